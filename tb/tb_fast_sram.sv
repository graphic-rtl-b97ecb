// tb_fast_sram: loads random words, then activates a random subset of rows for
// WIDTH cycles with each ALU function and checks that exactly the activated
// rows changed (sum, load, compare flag) and that every word is back in place
// after WIDTH shifts. Also checks the LSB-first bit order seen by the SFU.
module tb_fast_sram;
  import gas_pkg::*;
  localparam int ROWS = 32, W = 16;
  logic clk = 0;
  logic [ROWS-1:0] en, init_val, out_bit, flag;
  alu_op_e alu_op;
  logic opb, chk, init, we;
  logic [4:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_v [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fast_sram #(.ROWS(ROWS), .WIDTH(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] operand, seen;
    logic [ROWS-1:0] act;
    alu_op_e ops[4] = '{ALU_ADD, ALU_LOAD, ALU_CMPLT, ALU_PASS};
    en = 0; init = 0; init_val = 0; we = 0; chk = 0; opb = 0; alu_op = ALU_PASS; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = W'($urandom); ref_v[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 40; n++) begin
      alu_op = ops[n % 4]; operand = W'($urandom); act = ROWS'($urandom);
      init = 1; init_val = '0; @(negedge clk); init = 0;
      for (int k = 0; k < W; k++) begin
        en = act; opb = operand[k];
        seen[k] = out_bit[3];
        @(negedge clk);
      end
      en = 0;
      if (act[3]) checks++;
      if (act[3] && seen != ref_v[3]) begin failures++; $display("FAIL bit order row 3"); end
      for (int i = 0; i < ROWS; i++) begin
        if (act[i]) begin
          checks++;
          if (alu_op == ALU_CMPLT && flag[i] != (ref_v[i] < operand)) begin failures++; $display("FAIL flag %0d", i); end
          case (alu_op)
            ALU_ADD:  ref_v[i] = ref_v[i] + operand;
            ALU_LOAD: ref_v[i] = operand;
            default: ;
          endcase
        end
        raddr = 5'(i); #1;
        checks++;
        if (rdata != ref_v[i]) begin failures++; $display("FAIL row %0d op %s: %h exp %h", i, alu_op.name(), rdata, ref_v[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
