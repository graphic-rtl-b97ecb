// cam_array: content-addressable memory of the GAS cache, one graph edge per row.
//
// Each row holds the source and destination vertex of one edge (SRC, DST) and a
// valid bit. A search compares the key with every row at once and drives one
// match line per row. There is no priority encoder: the match lines themselves
// leave the array and act as the row clocks of the FAST SRAM next to it, which
// is the central idea of the GAS cache. `no_match` is high when no line is set;
// it lets the controller skip a request at once (idle-skip).
//
// The search is ternary at the key: care_src / care_dst = 0 make that field a
// wildcard (a search "SRC=1, DST=*"). Besides the addressed row write there is
// a parallel write of the SRC field into every matching row, used by the
// shortest-path algorithm to rename a resolved source vertex to the start vertex.
//
// Timing: ml / no_match are combinational from the key and the stored rows.
// Both writes take effect at the rising clock edge. Valid bits reset to 0.
// The array size and the SRC/DST row content follow the paper; the valid bit,
// the wildcard per field and the masked SRC write are this design's choices.
module cam_array
  import gas_pkg::*;
#(
  parameter int unsigned ROWS  = gas_pkg::N_ROWS,
  parameter int unsigned VID_W = gas_pkg::VID_BITS,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // search
  input  logic [VID_W-1:0]   key_src,
  input  logic [VID_W-1:0]   key_dst,
  input  logic               care_src,
  input  logic               care_dst,
  output logic [ROWS-1:0]    ml,
  output logic               no_match,
  // addressed row write
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic               wvalid,
  input  logic [VID_W-1:0]   wsrc,
  input  logic [VID_W-1:0]   wdst,
  // write SRC of every matching row
  input  logic               mwe_src,
  input  logic [VID_W-1:0]   msrc
);

  logic [VID_W-1:0] src_q [ROWS];
  logic [VID_W-1:0] dst_q [ROWS];
  logic [ROWS-1:0]  valid_q;

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      ml[i] = valid_q[i] &&
              (!care_src || (src_q[i] == key_src)) &&
              (!care_dst || (dst_q[i] == key_dst));
    end
  end

  assign no_match = ~|ml;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= '0;
    else if (we) valid_q[waddr] <= wvalid;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < ROWS; i++) begin
      if (we && (waddr == AW'(i))) begin
        src_q[i] <= wsrc;
        dst_q[i] <= wdst;
      end else if (mwe_src && ml[i]) begin
        src_q[i] <= msrc;
      end
    end
  end

endmodule
