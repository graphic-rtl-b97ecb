// sfu: 1-bit special function unit of the GAS cache, a reduction across rows.
//
// While the active rows of the FAST SRAM rotate, the SFU sees one bit of every
// row per cycle (row_bit) together with the rows' ALU state bits (row_flag).
// It reduces them to one result word:
//
//   SFU_SUM  each step adds popcount(act & row_bit) (a 1-bit adder tree) and
//            the running carry; the low bit is result bit `bit_idx`, the rest
//            is the new carry. After WIDTH steps LSB first, result =
//            {carry, bits}: the exact sum of all active rows.
//   SFU_MIN  one step per bit position, most significant first. Among the
//            candidate rows (act & row_flag) the result bit is 0 if any
//            candidate shows a 0 (an OR over rows), else 1. sel_bit is that
//            bit; the row ALUs use it to drop the candidates that differ.
//   SFU_MAX  the same with the roles of 0 and 1 swapped.
//   SFU_CNT  one step: result = popcount(act & row_flag), the number of rows
//            whose compare flag is set (the position in insertion sort).
//
// Timing: clr clears the result at a clock edge; each `step` updates it at a
// clock edge; sel_bit and result are combinational from the state. The
// reduction functions (sum, min, max, flag count, adder tree, OR) follow the
// paper; the step protocol and MSB-first elimination are this design's choice.
module sfu
  import gas_pkg::*;
#(
  parameter int unsigned ROWS  = gas_pkg::N_ROWS,
  parameter int unsigned WIDTH = gas_pkg::N_WIDTH,
  parameter int unsigned RES_W = gas_pkg::RES_BITS,
  localparam int unsigned CW   = $clog2(ROWS + 1),
  localparam int unsigned BW   = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             step,
  input  sfu_mode_e        mode,
  input  logic [BW-1:0]    bit_idx,
  input  logic [ROWS-1:0]  act,
  input  logic [ROWS-1:0]  row_bit,
  input  logic [ROWS-1:0]  row_flag,
  output logic             sel_bit,
  output logic [RES_W-1:0] result
);

  logic [WIDTH-1:0] bits_q;
  logic [CW-1:0]    carry_q;
  logic [CW-1:0]    cnt_q;
  logic [CW-1:0]    pop_bit, pop_flag;
  logic [CW:0]      sum_step;

  // 1-bit adder trees
  function automatic logic [CW-1:0] popcount(input logic [ROWS-1:0] v);
    logic [CW-1:0] c;
    c = '0;
    for (int i = 0; i < ROWS; i++) c += CW'(v[i]);
    return c;
  endfunction

  assign pop_bit  = popcount(act & row_bit);
  assign pop_flag = popcount(act & row_flag);
  assign sum_step = {1'b0, pop_bit} + {1'b0, carry_q};

  always_comb begin
    unique case (mode)
      SFU_MIN: sel_bit = ~|(act & row_flag & ~row_bit);
      SFU_MAX: sel_bit =  |(act & row_flag &  row_bit);
      default: sel_bit = sum_step[0];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q  <= '0;
      carry_q <= '0;
      cnt_q   <= '0;
    end else if (clr) begin
      bits_q  <= '0;
      carry_q <= '0;
      cnt_q   <= '0;
    end else if (step) begin
      unique case (mode)
        SFU_SUM: begin
          bits_q[bit_idx] <= sum_step[0];
          carry_q         <= sum_step[CW:1];
        end
        SFU_CNT: cnt_q <= pop_flag;
        default: bits_q[bit_idx] <= sel_bit;
      endcase
    end
  end

  always_comb begin
    unique case (mode)
      SFU_SUM: result = (RES_W'(carry_q) << WIDTH) | RES_W'(bits_q);
      SFU_CNT: result = RES_W'(cnt_q);
      default: result = RES_W'(bits_q);
    endcase
  end

endmodule
