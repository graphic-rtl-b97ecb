// global_alu: issues requests to all GAS caches and merges their results.
//
// Issue side: one request is accepted when every cache's input buffer has
// room, and is written into all of them in the same cycle. A broadcast request
// is marked selected (sel = 1) in every copy; a request addressed to one cache
// (bcast = 0, core = k) is selected only in cache k's copy, the others pass it
// through in their decode cycle. Every cache therefore sees the same request
// sequence and returns its responses in the same order.
//
// Merge side: when every cache has a response at the head of its response
// queue, all are taken together and combined by operation over the caches
// with hit = 1: SUM and CMPLT add, MIN takes the minimum, MAX the maximum,
// READ takes the one addressed cache's word. The merged response waits for
// out_ready. A global result is the same as if the edges of all caches had sat
// in one array, because each reduction is associative.
//
// The paper names a global unit that feeds the input buffers; the broadcast
// rule, the merge and both handshakes are this design's choice.
module global_alu
  import gas_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // requests in
  input  logic     in_valid,
  output logic     in_ready,
  input  gas_req_t in_req,
  // to the input buffers
  output logic     buf_push,
  input  logic [NUM_CORES-1:0] buf_ready,
  output gas_req_t buf_req [NUM_CORES],
  // from the response queues
  input  logic [NUM_CORES-1:0] rsp_valid,
  output logic     rsp_pop,
  input  gas_rsp_t rsp [NUM_CORES],
  // merged responses out
  output logic     out_valid,
  input  logic     out_ready,
  output gas_rsp_t out_rsp
);

  // ---- issue
  assign in_ready = &buf_ready;
  assign buf_push = in_valid && in_ready;

  always_comb begin
    for (int i = 0; i < NUM_CORES; i++) begin
      buf_req[i]     = in_req;
      buf_req[i].sel = in_req.bcast || (in_req.core == CORE_BITS'(i));
    end
  end

  // ---- merge
  gas_rsp_t merged;
  logic     all_valid;

  assign all_valid = &rsp_valid;

  always_comb begin
    merged       = '0;
    merged.op    = rsp[0].op;
    unique case (rsp[0].op)
      OP_MIN:  merged.value = '1;
      default: merged.value = '0;
    endcase
    for (int i = 0; i < NUM_CORES; i++) begin
      if (rsp[i].hit) begin
        merged.hit = 1'b1;
        unique case (rsp[0].op)
          OP_MIN:  if (rsp[i].value < merged.value) merged.value = rsp[i].value;
          OP_MAX:  if (rsp[i].value > merged.value) merged.value = rsp[i].value;
          OP_READ: merged.value = merged.value | rsp[i].value;
          default: merged.value = merged.value + rsp[i].value;
        endcase
      end
    end
    if (!merged.hit) merged.value = '0;
  end

  assign out_valid = all_valid;
  assign out_rsp   = merged;
  assign rsp_pop   = all_valid && out_ready;

  a_same_op: assert property (@(posedge clk) disable iff (!rst_n)
    all_valid |-> (rsp[NUM_CORES-1].op == rsp[0].op));

endmodule
