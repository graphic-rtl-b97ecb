// tb_cam_array: fills the CAM with random edges and compares the match lines of
// random (partly wildcard) searches with a reference list of the stored edges;
// also checks the no-match flag, invalidation and the masked SRC write.
module tb_cam_array;
  localparam int ROWS = 128;
  logic clk = 0, rst_n = 0;
  logic [7:0] key_src, key_dst, wsrc, wdst, msrc;
  logic care_src, care_dst, no_match, we, wvalid, mwe_src;
  logic [ROWS-1:0] ml, exp_ml;
  logic [6:0] waddr;
  logic [7:0] r_src [ROWS], r_dst [ROWS];
  logic r_v [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cam_array #(.ROWS(ROWS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROWS-1:0] ref_ml();
    logic [ROWS-1:0] m;
    for (int i = 0; i < ROWS; i++)
      m[i] = r_v[i] && (!care_src || r_src[i] == key_src) && (!care_dst || r_dst[i] == key_dst);
    return m;
  endfunction

  task automatic search_check();
    #1 exp_ml = ref_ml();
    checks++;
    if (ml !== exp_ml || no_match !== (exp_ml == 0)) begin
      failures++; $display("FAIL search %0d/%0d", key_src, key_dst);
    end
  endtask

  initial begin
    we = 0; mwe_src = 0; wvalid = 0; waddr = 0; wsrc = 0; wdst = 0; msrc = 0;
    key_src = 0; key_dst = 0; care_src = 0; care_dst = 0;
    for (int i = 0; i < ROWS; i++) r_v[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    search_check();  // empty after reset
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      we = 1; waddr = 7'(i); wvalid = (i % 9 != 4); wsrc = 8'($urandom_range(0, 15)); wdst = 8'($urandom_range(0, 15));
      r_v[i] = wvalid; r_src[i] = wsrc; r_dst[i] = wdst;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      key_src = 8'($urandom_range(0, 17)); key_dst = 8'($urandom_range(0, 17));
      care_src = 1'($urandom); care_dst = 1'($urandom);
      search_check();
      if (n % 20 == 0) begin  // rename the source of every matching row
        msrc = 8'($urandom_range(0, 15));
        exp_ml = ref_ml();
        mwe_src = 1; @(negedge clk); mwe_src = 0;
        for (int i = 0; i < ROWS; i++) if (exp_ml[i]) r_src[i] = msrc;
        search_check();
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
