// tb_input_buffer: random pushes and pops against a queue model; checks order,
// full (push_ready low at DEPTH entries), empty and the fill count.
module tb_input_buffer;
  import gas_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0, push_valid, push_ready, pop_valid, pop_ready;
  gas_req_t push_data, pop_data;
  logic [2:0] count;
  gas_req_t q[$];
  int checks = 0, failures = 0, fulls = 0;
  always #5 clk = ~clk;
  input_buffer #(.T(gas_req_t), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      push_valid = ($urandom_range(0, 9) < ((n / 200) % 2 ? 3 : 7));
      pop_ready  = 1'($urandom);
      push_data  = gas_req_t'({$urandom, $urandom, $urandom});
      #1;
      checks++;
      if (count != 3'(q.size()) || push_ready != (q.size() < DEPTH) || pop_valid != (q.size() > 0)) begin
        failures++; $display("FAIL flags size=%0d count=%0d", q.size(), count);
      end
      if (!push_ready) fulls++;
      if (pop_valid && pop_ready) begin
        checks++;
        if (pop_data != q[0]) begin failures++; $display("FAIL order"); end
        void'(q.pop_front());
      end
      if (push_valid && push_ready) q.push_back(push_data);
      @(negedge clk);
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
