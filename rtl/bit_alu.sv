// bit_alu: the 1-bit ALU attached to the end of one FAST SRAM row.
//
// The row is a ring of cells that shifts one place per activated clock. The
// ALU takes the bit leaving the last cell (din) and returns the bit written
// into the first cell (dout), so a W-bit word passes through it least
// significant bit first in W cycles. A single state bit (st) carries what a
// multi-bit operation needs between bits: the carry of an addition, the
// "less than so far" flag of a comparison, or the "still a candidate" flag of
// a minimum/maximum search.
//
//   ALU_PASS  dout = din
//   ALU_ADD   dout = din ^ opb ^ st,        st <= carry
//   ALU_LOAD  dout = opb
//   ALU_CMPLT dout = din,  st <= (din < opb) | (din == opb) & st
//   ALU_ELIM  dout = din,  on chk: st <= st & (din == opb)
//
// dout is combinational. st changes only at a clock edge where the row is
// active (en), or where init loads init_val. The operation list follows what
// the paper asks of the row ALU (add, compare with a flag, min/max with the
// SFU); the encoding and the ELIM step are this design's choice.
module bit_alu
  import gas_pkg::*;
(
  input  logic    clk,
  input  logic    en,        // row clock activated (match line / bitmap bit)
  input  alu_op_e op,
  input  logic    din,       // bit leaving the last cell of the row
  input  logic    opb,       // broadcast operand bit
  input  logic    chk,       // ELIM: this is the bit position being decided
  input  logic    init,      // load the state bit
  input  logic    init_val,
  output logic    dout,      // bit written into the first cell
  output logic    st
);

  always_comb begin
    unique case (op)
      ALU_ADD:  dout = din ^ opb ^ st;
      ALU_LOAD: dout = opb;
      default:  dout = din;
    endcase
  end

  always_ff @(posedge clk) begin
    if (init) begin
      st <= init_val;
    end else if (en) begin
      unique case (op)
        ALU_ADD:   st <= (din & opb) | (din & st) | (opb & st);
        ALU_CMPLT: st <= (~din & opb) | (~(din ^ opb) & st);
        ALU_ELIM:  if (chk) st <= st & ~(din ^ opb);
        default:   st <= st;
      endcase
    end
  end

endmodule
