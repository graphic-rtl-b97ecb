// tb_sfu: presents random row words to the SFU bit by bit, as rotating rows
// would, and checks the sum (LSB first), the minimum and maximum (MSB first,
// with the candidate flags updated as the row ALUs do) and the flag count.
module tb_sfu;
  import gas_pkg::*;
  localparam int ROWS = 16, W = 16;
  logic clk = 0, rst_n = 0, clr, step, sel_bit;
  sfu_mode_e mode;
  logic [3:0] bit_idx;
  logic [ROWS-1:0] act, row_bit, row_flag;
  logic [RES_BITS-1:0] result;
  logic [W-1:0] v [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sfu #(.ROWS(ROWS), .WIDTH(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s; int mn, mx, cnt;
    clr = 0; step = 0; mode = SFU_SUM; bit_idx = 0; act = 0; row_bit = 0; row_flag = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      act = ROWS'($urandom); if (n == 0) act = '1;
      s = 0; mn = 65535; mx = 0; cnt = 0;
      for (int i = 0; i < ROWS; i++) begin
        v[i] = (n == 0) ? 16'hffff : W'($urandom);
        if (act[i]) begin s += v[i]; if (v[i] < mn) mn = v[i]; if (v[i] > mx) mx = v[i]; end
      end
      // sum
      mode = SFU_SUM; clr = 1; @(negedge clk); clr = 0;
      for (int k = 0; k < W; k++) begin
        for (int i = 0; i < ROWS; i++) row_bit[i] = v[i][k];
        bit_idx = 4'(k); step = 1; @(negedge clk);
      end
      step = 0;
      checks++; if (result != RES_BITS'(s)) begin failures++; $display("FAIL sum %0d exp %0d", result, s); end
      // min and max
      for (int m = 0; m < 2; m++) begin
        mode = m ? SFU_MAX : SFU_MIN; clr = 1; row_flag = act; @(negedge clk); clr = 0;
        for (int k = W - 1; k >= 0; k--) begin
          for (int i = 0; i < ROWS; i++) row_bit[i] = v[i][k];
          bit_idx = 4'(k); step = 1; #1;
          for (int i = 0; i < ROWS; i++) if (row_bit[i] != sel_bit) row_flag[i] = 0;
          @(negedge clk);
        end
        step = 0;
        checks++;
        if (act != 0 && result != RES_BITS'(m ? mx : mn)) begin failures++; $display("FAIL %s %0d", mode.name(), result); end
      end
      // flag count
      row_flag = ROWS'($urandom); cnt = $countones(row_flag & act);
      mode = SFU_CNT; step = 1; @(negedge clk); step = 0;
      checks++; if (result != RES_BITS'(cnt)) begin failures++; $display("FAIL cnt"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
