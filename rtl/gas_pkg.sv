// gas_pkg: sizes, operation codes and request/response records shared by the
// gather-and-scatter (GAS) cache, its input buffers and the top level.
//
// One GAS cache pairs a 128x16 CAM with a 128x16 FAST SRAM (both sizes from the
// published array configuration). The CAM row of 16 bits is split into an 8-bit
// source vertex and an 8-bit destination vertex; the SRAM row holds a 16-bit
// value (an edge weight, a path length or one feature element).
//
// The operation set below, its encoding and the record layouts are this
// design's own choice; each operation is one step the published algorithms
// (feature aggregation, SSSP, connected components, insertion sort) are built
// from.
package gas_pkg;

  localparam int unsigned N_ROWS    = 128;  // rows per CAM / FAST SRAM array
  localparam int unsigned N_WIDTH   = 16;   // bits per FAST SRAM row
  localparam int unsigned VID_BITS  = 8;    // vertex index width: 16-bit CAM row = SRC + DST
  localparam int unsigned ADDR_BITS = 16;   // row / bitmap-chunk address field in a request
  localparam int unsigned CORE_BITS = 16;   // cache index field in a request
  localparam int unsigned RES_BITS  = 40;   // result field: sums over many rows and caches

  // Operations understood by one GAS cache.
  typedef enum logic [3:0] {
    OP_NOP         = 4'd0,   // nothing
    OP_WRITE       = 4'd1,   // row addr: CAM <= {src,dst} valid, SRAM <= operand
    OP_READ        = 4'd2,   // row addr: result <= SRAM row            (result)
    OP_ADD         = 4'd3,   // matched rows: val <= val + operand (bit-serial)
    OP_LOAD        = 4'd4,   // matched rows: val <= operand (bit-serial)
    OP_CMPLT       = 4'd5,   // matched rows: flag <= val < operand; result = #flags (result)
    OP_SUM         = 4'd6,   // result = sum of matched rows           (result)
    OP_MIN         = 4'd7,   // result = min of matched rows; upd: write it back (result)
    OP_MAX         = 4'd8,   // result = max of matched rows; upd: write it back (result)
    OP_SET_SRC     = 4'd9,   // matched CAM rows: SRC <= operand[VID_BITS-1:0]
    OP_LOAD_BITMAP = 4'd10,  // bitmap[addr*WIDTH +: WIDTH] <= operand (dense mode)
    OP_DENSE_ADD   = 4'd11,  // rows whose bitmap bit is set: val <= val + operand
    OP_INVALIDATE  = 4'd12   // row addr: CAM row marked empty
  } gas_op_e;

  // ALU functions of the 1-bit ALU at the end of every FAST SRAM row.
  typedef enum logic [2:0] {
    ALU_PASS  = 3'd0,  // rotate unchanged
    ALU_ADD   = 3'd1,  // serial add of the broadcast operand bit, state = carry
    ALU_LOAD  = 3'd2,  // write the broadcast operand bit
    ALU_CMPLT = 3'd3,  // rotate unchanged, state = (row < operand) so far
    ALU_ELIM  = 3'd4   // rotate unchanged, on check: state &= (row bit == operand bit)
  } alu_op_e;

  // Reduction modes of the 1-bit special function unit.
  typedef enum logic [1:0] {
    SFU_SUM = 2'd0,
    SFU_MIN = 2'd1,
    SFU_MAX = 2'd2,
    SFU_CNT = 2'd3
  } sfu_mode_e;

  typedef struct packed {
    gas_op_e            op;
    logic               upd;       // MIN/MAX: write the result back to the matched rows
    logic               care_src;  // compare the SRC field (0: wildcard)
    logic               care_dst;  // compare the DST field (0: wildcard)
    logic [VID_BITS-1:0]   src;
    logic [VID_BITS-1:0]   dst;
    logic [N_WIDTH-1:0]   operand;
    logic [ADDR_BITS-1:0]  addr;
    logic               bcast;     // to every cache (else only to cache `core`)
    logic [CORE_BITS-1:0]  core;
    logic               sel;       // set per cache by the dispatcher: this cache takes part
  } gas_req_t;

  typedef struct packed {
    gas_op_e            op;
    logic               hit;       // at least one row took part
    logic [RES_BITS-1:0]   value;
  } gas_rsp_t;

  // Operations that return a result record.
  function automatic logic has_result(gas_op_e op);
    return (op == OP_READ) || (op == OP_CMPLT) || (op == OP_SUM) ||
           (op == OP_MIN) || (op == OP_MAX);
  endfunction

  // Operations whose active rows come from a CAM search.
  function automatic logic is_search(gas_op_e op);
    return (op == OP_ADD) || (op == OP_LOAD) || (op == OP_CMPLT) || (op == OP_SUM) ||
           (op == OP_MIN) || (op == OP_MAX) || (op == OP_SET_SRC);
  endfunction

endpackage
