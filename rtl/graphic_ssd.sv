// graphic_ssd: the in-SSD FAST-GAS aggregation engine of the GRAPHIC system.
//
// The graph sits in flash; an SSD controller (outside this module) streams
// partitions of the edge list into NUM_CORES GRAPHIC caches and then issues
// requests that aggregate over them. Each cache (gas_engine) holds ROWS edges
// in its CAM and their values in its FAST SRAM, and answers a request in a few
// cycles however many of its edges match. Only the aggregated results leave
// through the response port, towards the host bus and the combination engine
// (a systolic MLP accelerator) on the other side of DRAM; that is the
// compression of the graph transfer the architecture is named after.
//
//   req ─► global_alu ─► input_buffer[k] ─► gas_engine[k] ─► rsp queue[k] ─┐
//                ▲                                                         │
//   rsp ◄────────┴──────────────────── merge ◄─────────────────────────────┘
//
// Interface: req valid/ready (gas_pkg::gas_req_t), rsp valid/ready with one
// merged gas_rsp_t for every request whose operation returns a result. busy[k]
// and skip[k] show each cache's activity; skip_count counts idle-skips of all
// caches, issued counts accepted requests.
//
// Defaults: 128x16 arrays (as published). NUM_CORES defaults to 256; the
// published 1 MB FAST-GAS corresponds to 4096 such arrays, reduced here because
// the memory needed to elaborate the design grows linearly with the count.
// The cache count, the buffer depths and the issue/merge scheme are this
// design's choices; the cache structure and idle-skip follow the paper.
module graphic_ssd
  import gas_pkg::*;
#(
  parameter int unsigned NUM_CORES = 256,
  parameter int unsigned ROWS      = gas_pkg::N_ROWS,
  parameter int unsigned WIDTH     = gas_pkg::N_WIDTH,
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  gas_req_t             req,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output gas_rsp_t             rsp,
  output logic [NUM_CORES-1:0] busy,
  output logic [NUM_CORES-1:0] skip,
  output logic [31:0]          skip_count,
  output logic [31:0]          issued
);

  localparam int unsigned PW = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1;

  logic                 buf_push, rsp_pop;
  logic [NUM_CORES-1:0] buf_ready, q_valid;
  gas_req_t             buf_req [NUM_CORES];
  gas_rsp_t             q_rsp   [NUM_CORES];

  global_alu #(.NUM_CORES(NUM_CORES)) u_global (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (req_valid),
    .in_ready  (req_ready),
    .in_req    (req),
    .buf_push  (buf_push),
    .buf_ready (buf_ready),
    .buf_req   (buf_req),
    .rsp_valid (q_valid),
    .rsp_pop   (rsp_pop),
    .rsp       (q_rsp),
    .out_valid (rsp_valid),
    .out_ready (rsp_ready),
    .out_rsp   (rsp)
  );

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    logic     ib_valid, ib_ready, e_rsp_valid, e_rsp_ready;
    gas_req_t ib_req;
    gas_rsp_t e_rsp;
    logic [PW:0] ib_count, rq_count;

    input_buffer #(.T(gas_req_t), .DEPTH(BUF_DEPTH)) u_ibuf (
      .clk        (clk),
      .rst_n      (rst_n),
      .push_valid (buf_push),
      .push_ready (buf_ready[k]),
      .push_data  (buf_req[k]),
      .pop_valid  (ib_valid),
      .pop_ready  (ib_ready),
      .pop_data   (ib_req),
      .count      (ib_count)
    );

    gas_engine #(.ROWS(ROWS), .WIDTH(WIDTH)) u_gas (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (ib_valid),
      .req_ready (ib_ready),
      .req       (ib_req),
      .rsp_valid (e_rsp_valid),
      .rsp_ready (e_rsp_ready),
      .rsp       (e_rsp),
      .busy      (busy[k]),
      .skip      (skip[k])
    );

    input_buffer #(.T(gas_rsp_t), .DEPTH(BUF_DEPTH)) u_rspq (
      .clk        (clk),
      .rst_n      (rst_n),
      .push_valid (e_rsp_valid),
      .push_ready (e_rsp_ready),
      .push_data  (e_rsp),
      .pop_valid  (q_valid[k]),
      .pop_ready  (rsp_pop),
      .pop_data   (q_rsp[k]),
      .count      (rq_count)
    );
  end

  logic [$clog2(NUM_CORES+1)-1:0] skips_now;
  always_comb begin
    skips_now = '0;
    for (int k = 0; k < NUM_CORES; k++) skips_now += $bits(skips_now)'(skip[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skip_count <= '0;
      issued     <= '0;
    end else begin
      skip_count <= skip_count + 32'(skips_now);
      issued     <= issued + 32'(buf_push);
    end
  end

endmodule
