// fast_sram: FAST SRAM array of the GAS cache, rows that shift and compute
// independently.
//
// Every row is a ring of WIDTH cells. When the row's clock is activated
// (en[i], driven by a CAM match line or a bitmap bit) the whole row shifts one
// place towards its last cell: bit 0 leaves to the row's 1-bit ALU, everything
// moves down by one, and the ALU result enters the first cell (bit WIDTH-1).
// After WIDTH activated cycles each word is back in place, every bit having
// passed through the ALU once, least significant bit first. Rows that are not
// activated hold still, which is how the paper saves the shift energy of
// unmatched rows. All rows share one ALU function and one broadcast operand
// bit; which rows take part is chosen only by en.
//
// A conventional word-line-decoded port (we/waddr/wdata, raddr/rdata) loads
// and reads whole rows. out_bit[i] is the bit row i presents to its ALU and to
// the SFU; flag[i] is its ALU state bit.
//
// Timing: shifts and writes at the rising edge, rdata / out_bit combinational.
// A write takes priority over a shift of the same row. Row clock gating is
// modelled as a clock enable. Contents are not reset (a memory).
// Follows the paper: ring per row, ALU from last cell to first cell, per-row
// clock from the match line, 128x16 default. This design's choice: shift
// direction numbering (bit 0 is the last cell) and the port set.
module fast_sram
  import gas_pkg::*;
#(
  parameter int unsigned ROWS  = gas_pkg::N_ROWS,
  parameter int unsigned WIDTH = gas_pkg::N_WIDTH,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  // bit-serial compute
  input  logic [ROWS-1:0]  en,
  input  alu_op_e          alu_op,
  input  logic             opb,
  input  logic             chk,
  input  logic             init,
  input  logic [ROWS-1:0]  init_val,
  output logic [ROWS-1:0]  out_bit,
  output logic [ROWS-1:0]  flag,
  // row port
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [ROWS];
  logic [ROWS-1:0]  alu_out;

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    assign out_bit[i] = mem[i][0];

    bit_alu u_alu (
      .clk      (clk),
      .en       (en[i]),
      .op       (alu_op),
      .din      (mem[i][0]),
      .opb      (opb),
      .chk      (chk),
      .init     (init),
      .init_val (init_val[i]),
      .dout     (alu_out[i]),
      .st       (flag[i])
    );
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < ROWS; i++) begin
      if (we && (waddr == AW'(i))) mem[i] <= wdata;
      else if (en[i])              mem[i] <= {alu_out[i], mem[i][WIDTH-1:1]};
    end
  end

  assign rdata = mem[raddr];

endmodule
