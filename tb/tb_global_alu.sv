// tb_global_alu: checks request issue (all buffers at once, only when all have
// room, sel set for the addressed cache or all on broadcast) and the merge of
// per-cache responses for every result operation.
module tb_global_alu;
  import gas_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, in_valid, in_ready, buf_push, rsp_pop, out_valid, out_ready;
  logic [N-1:0] buf_ready, rsp_valid;
  gas_req_t in_req, buf_req [N];
  gas_rsp_t rsp [N], out_rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  global_alu #(.NUM_CORES(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gas_op_e ops[5] = '{OP_SUM, OP_MIN, OP_MAX, OP_CMPLT, OP_READ};
    in_valid = 0; out_ready = 0; buf_ready = '1; rsp_valid = 0; in_req = '0;
    for (int i = 0; i < N; i++) rsp[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      // issue
      in_req = '0; in_req.op = OP_ADD; in_req.bcast = 1'($urandom); in_req.core = 16'($urandom_range(0, N - 1));
      in_valid = 1; buf_ready = N'($urandom) | ((n % 2) ? '1 : '0);
      #1;
      checks++;
      if (buf_push != (&buf_ready) || in_ready != (&buf_ready)) begin failures++; $display("FAIL issue"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (buf_req[i].sel != (in_req.bcast || in_req.core == 16'(i))) begin failures++; $display("FAIL sel"); end
      end
      // merge
      begin
        gas_op_e op; logic [RES_BITS-1:0] e; logic hit;
        op = ops[n % 5]; hit = 0; e = (op == OP_MIN) ? '1 : '0;
        for (int i = 0; i < N; i++) begin
          rsp[i].op = op; rsp[i].hit = 1'($urandom); rsp[i].value = RES_BITS'($urandom_range(0, 1000));
          if (op == OP_READ) rsp[i].hit = (i == n % N);
          if (rsp[i].hit) begin
            hit = 1;
            case (op)
              OP_MIN: if (rsp[i].value < e) e = rsp[i].value;
              OP_MAX: if (rsp[i].value > e) e = rsp[i].value;
              default: e += rsp[i].value;
            endcase
          end
        end
        if (!hit) e = 0;
        rsp_valid = (n % 3 == 0) ? N'($urandom) & ~N'(1) : '1;
        out_ready = 1'($urandom);
        #1;
        checks++;
        if (out_valid != (&rsp_valid) || rsp_pop != (out_valid && out_ready)) begin failures++; $display("FAIL merge handshake"); end
        if (out_valid) begin
          checks++;
          if (out_rsp.hit != hit || out_rsp.value != e) begin failures++; $display("FAIL merge %s %0d exp %0d", op.name(), out_rsp.value, e); end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
