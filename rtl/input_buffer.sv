// input_buffer: the small FIFO placed in front of each GAS cache.
//
// Requests for all caches are issued together, but a cache that finds no
// matching row ends a request in two cycles while one that matches works for
// WIDTH cycles or more. The buffer lets every cache drain its own queue at its
// own pace ("busy" caches keep requests waiting, "skipping" caches move on to
// the next one), which is what turns the CAM's no-match signal into speed.
// The same module, with the record type changed, also queues each cache's
// responses.
//
// Interface: push valid/ready, pop valid/ready (first-word-fall-through:
// pop_data is the oldest entry whenever pop_valid is high). Both may happen
// in one cycle. DEPTH entries; `count` is the fill level.
// The paper gives the buffer's place and purpose ("much smaller than SRAM");
// the depth and the handshake are this design's choice.
module input_buffer #(
  parameter type         T     = gas_pkg::gas_req_t,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     push_valid,
  output logic     push_ready,
  input  T         push_data,
  output logic     pop_valid,
  input  logic     pop_ready,
  output T         pop_data,
  output logic [PW:0] count
);

  T              mem [DEPTH];
  logic [PW-1:0] wp_q, rp_q;
  logic [PW:0]   cnt_q;
  logic          do_push, do_pop;

  assign push_ready = (cnt_q != (PW+1)'(DEPTH));
  assign pop_valid  = (cnt_q != '0);
  assign pop_data   = mem[rp_q];
  assign count      = cnt_q;
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wp_q <= nxt(wp_q);
      if (do_pop)  rp_q <= nxt(rp_q);
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q] <= push_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cnt_q <= (PW+1)'(DEPTH));

endmodule
