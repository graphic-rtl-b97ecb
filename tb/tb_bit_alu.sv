// tb_bit_alu: drives the row ALU bit-serially, LSB first, as a FAST SRAM row
// would, and checks the serial sum, the compare flag, the load and the
// min/max elimination step against integer arithmetic.
module tb_bit_alu;
  import gas_pkg::*;
  logic clk = 0, en, din, opb, chk, init, init_val, dout, st;
  alu_op_e op;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bit_alu dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(alu_op_e o, logic [15:0] a, logic [15:0] b, output logic [15:0] r);
    @(negedge clk); init = 1; init_val = 0; en = 0; op = o; @(negedge clk); init = 0;
    for (int k = 0; k < 16; k++) begin
      en = 1; din = a[k]; opb = b[k]; chk = 0;
      #1 r[k] = dout;
      @(negedge clk);
    end
    en = 0;
  endtask

  initial begin
    logic [15:0] a, b, r;
    en = 0; din = 0; opb = 0; chk = 0; init = 0; init_val = 0; op = ALU_PASS;
    for (int n = 0; n < 200; n++) begin
      a = 16'($urandom); b = 16'($urandom);
      if (n == 0) begin a = 16'hffff; b = 16'h0001; end
      run(ALU_ADD, a, b, r);
      checks++; if (r != 16'(a + b)) begin failures++; $display("FAIL add %h+%h=%h", a, b, r); end
      run(ALU_CMPLT, a, b, r);
      checks++; if (r != a || st != (a < b)) begin failures++; $display("FAIL cmplt %h %h", a, b); end
      run(ALU_LOAD, a, b, r);
      checks++; if (r != b) begin failures++; $display("FAIL load"); end
      run(ALU_PASS, a, b, r);
      checks++; if (r != a) begin failures++; $display("FAIL pass"); end
    end
    // elimination: candidate stays only while its bit equals the chosen bit
    for (int n = 0; n < 8; n++) begin
      @(negedge clk); init = 1; init_val = 1; @(negedge clk); init = 0;
      op = ALU_ELIM; en = 1; chk = 1; din = n[0]; opb = n[1]; @(negedge clk);
      en = 1; chk = 0; din = 1; opb = 0; @(negedge clk); en = 0;
      checks++; if (st != (n[0] == n[1])) begin failures++; $display("FAIL elim"); end
    end
    // a row that is not activated keeps its state
    @(negedge clk); init = 1; init_val = 0; @(negedge clk); init = 0;
    op = ALU_ADD; en = 0; din = 1; opb = 1; @(negedge clk);
    checks++; if (st != 0) begin failures++; $display("FAIL enable"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
