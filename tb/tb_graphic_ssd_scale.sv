// tb_graphic_ssd_scale: one complete aggregation on the engine at its default
// size. Every cache receives a few edges (DST = cache index mod 8, values
// known), then one broadcast gather per destination vertex returns the sum and
// the minimum over all caches; an edge-less vertex must be skipped by all.
module tb_graphic_ssd_scale;
  import gas_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  gas_req_t req;
  gas_rsp_t rsp;
  logic [31:0] skip_count, issued;
  int checks = 0, failures = 0;
  localparam int NC = 64;

  always #5 clk = ~clk;

  graphic_ssd #(.NUM_CORES(NC)) dut (.busy(), .skip(), .*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(gas_req_t r);
    @(negedge clk);
    req = r; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic get(output gas_rsp_t o);
    while (!rsp_valid) @(negedge clk);
    o = rsp;
    rsp_ready = 1; @(negedge clk); rsp_ready = 0;
  endtask

  initial begin
    gas_req_t r;
    gas_rsp_t o;
    longint esum [9];
    int emin [9];
    req_valid = 0; rsp_ready = 0; req = '0;
    for (int d = 0; d < 9; d++) begin esum[d] = 0; emin[d] = 65535; end
    repeat (3) @(negedge clk); rst_n = 1;
    checks++;
    if (dut.NUM_CORES != NC) begin failures++; $display("FAIL cache count"); end
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < 3; k++) begin
        int v;
        v = (c * 7 + k * 13) % 500 + 1;
        r = '0; r.op = OP_WRITE; r.src = 8'(k); r.dst = 8'(c % 8); r.operand = 16'(v);
        r.addr = 16'(k * 40); r.core = 16'(c);
        send(r);
        esum[c % 8] += v;
        if (v < emin[c % 8]) emin[c % 8] = v;
      end
    for (int d = 0; d < 9; d++) begin
      r = '0; r.op = OP_SUM; r.care_dst = 1; r.dst = 8'(d); r.bcast = 1;
      send(r); get(o);
      checks++;
      if (o.hit != (d < 8) || o.value != RES_BITS'(esum[d])) begin
        failures++; $display("FAIL sum dst %0d: %0d exp %0d", d, o.value, esum[d]);
      end
      r.op = OP_MIN;
      send(r); get(o);
      checks++;
      if (d < 8 && o.value != RES_BITS'(emin[d])) begin
        failures++; $display("FAIL min dst %0d: %0d exp %0d", d, o.value, emin[d]);
      end
    end
    checks++;
    if (skip_count < 32'(NC)) begin failures++; $display("FAIL no idle-skip"); end
    $display("caches %0d, idle-skips %0d, requests %0d", NC, skip_count, issued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
