// gas_engine: one GRAPHIC cache (a gather-and-scatter engine): CAM, FAST SRAM,
// 1-bit SFU and the controller that sequences them.
//
// The CAM holds one edge (SRC, DST) per row and the FAST SRAM row next to it
// holds that edge's value. A request names a CAM key (either field may be a
// wildcard); the match lines of the search select the active rows, which then
// rotate for WIDTH cycles through their 1-bit ALUs while the unmatched rows
// stand still. So one request updates every matching edge in WIDTH cycles,
// however many rows match. In the dense (bitmap) mode a bitmap register loaded
// column by column plays the role of the match lines instead.
//
// Requests (gas_pkg::gas_op_e) and their cost in cycles, W = WIDTH:
//   WRITE, INVALIDATE, LOAD_BITMAP, SET_SRC, NOP   2 (accept, decode)
//   READ                                           2 + response
//   ADD, LOAD, DENSE_ADD                           2 + W
//   SUM                                            2 + W + response
//   CMPLT                                          2 + W + 1 + response
//   MIN, MAX                                       2 + W*W (+ W with upd) + response
// MIN/MAX decide one bit per rotation, most significant first, dropping the
// candidate rows whose bit differs from the SFU's choice (W rotations keep the
// words aligned); with upd set a further rotation writes the result into every
// matched row ("find-and-update").
//
// Idle-skip: when the search matches no row (or the bitmap is empty) the
// request ends at the decode cycle instead of spending W or more cycles; a
// request whose `sel` is 0 (meant for another cache) is passed the same way.
// Every request of a result-bearing operation (gas_pkg::has_result) returns
// exactly one response, with hit = 0 when nothing took part, so responses of
// many caches stay aligned.
//
// Interface: req valid/ready (taken in S_IDLE), rsp valid/ready (held until
// taken). `skip` pulses for one cycle on each idle-skip, `busy` is high
// outside S_IDLE. The datapath, the match-line row clocks, the SFU functions
// and the idle-skip rule follow the paper; the request set, the cycle
// schedule and the response handshake are this design's own.
module gas_engine
  import gas_pkg::*;
#(
  parameter int unsigned ROWS  = gas_pkg::N_ROWS,
  parameter int unsigned WIDTH = gas_pkg::N_WIDTH,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW   = (WIDTH > 1) ? $clog2(WIDTH) : 1,
  localparam int unsigned RB   = $clog2(gas_pkg::RES_BITS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  gas_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output gas_rsp_t rsp,
  output logic     busy,
  output logic     skip
);

  if (WIDTH > gas_pkg::N_WIDTH) begin : g_chk_w
    $error("WIDTH must not exceed the request operand width");
  end
  if (ROWS % WIDTH != 0) begin : g_chk_rows
    $error("ROWS must be a multiple of WIDTH (bitmap loaded in WIDTH-bit chunks)");
  end

  typedef enum logic [2:0] {S_IDLE, S_DEC, S_EXEC, S_FIN, S_RESP} state_e;

  state_e           state_q;
  gas_req_t         req_q;
  logic [ROWS-1:0]  act_q, bitmap_q;
  logic [BW-1:0]    cnt_q, pass_q;
  logic             upd_phase_q;
  logic             hit_q, use_sfu_q;
  logic [RES_BITS-1:0] value_q;

  // CAM
  logic [ROWS-1:0]  ml;
  logic             no_match;
  logic             cam_we, cam_mwe;

  // FAST SRAM
  logic [ROWS-1:0]  row_bit, row_flag, sram_en;
  alu_op_e          alu_op;
  logic             opb, chk, alu_init;
  logic [ROWS-1:0]  alu_init_val;
  logic             sram_we;
  logic [WIDTH-1:0] rdata;

  // SFU
  logic             sfu_clr, sfu_step, sel_bit;
  sfu_mode_e        sfu_mode;
  logic [BW-1:0]    sfu_idx;
  logic [RES_BITS-1:0] sfu_result;

  logic [WIDTH-1:0] operand_w;
  logic             last_bit, last_pass;

  assign operand_w = req_q.operand[WIDTH-1:0];
  assign last_bit  = (cnt_q == BW'(WIDTH - 1));
  assign last_pass = (pass_q == BW'(WIDTH - 1));

  cam_array #(.ROWS(ROWS), .VID_W(VID_BITS)) u_cam (
    .clk      (clk),
    .rst_n    (rst_n),
    .key_src  (req_q.src),
    .key_dst  (req_q.dst),
    .care_src (req_q.care_src),
    .care_dst (req_q.care_dst),
    .ml       (ml),
    .no_match (no_match),
    .we       (cam_we),
    .waddr    (req_q.addr[AW-1:0]),
    .wvalid   (req_q.op == OP_WRITE),
    .wsrc     (req_q.src),
    .wdst     (req_q.dst),
    .mwe_src  (cam_mwe),
    .msrc     (req_q.operand[VID_BITS-1:0])
  );

  fast_sram #(.ROWS(ROWS), .WIDTH(WIDTH)) u_sram (
    .clk      (clk),
    .en       (sram_en),
    .alu_op   (alu_op),
    .opb      (opb),
    .chk      (chk),
    .init     (alu_init),
    .init_val (alu_init_val),
    .out_bit  (row_bit),
    .flag     (row_flag),
    .we       (sram_we),
    .waddr    (req_q.addr[AW-1:0]),
    .wdata    (operand_w),
    .raddr    (req_q.addr[AW-1:0]),
    .rdata    (rdata)
  );

  sfu #(.ROWS(ROWS), .WIDTH(WIDTH), .RES_W(RES_BITS)) u_sfu (
    .clk      (clk),
    .rst_n    (rst_n),
    .clr      (sfu_clr),
    .step     (sfu_step),
    .mode     (sfu_mode),
    .bit_idx  (sfu_idx),
    .act      (act_q),
    .row_bit  (row_bit),
    .row_flag (row_flag),
    .sel_bit  (sel_bit),
    .result   (sfu_result)
  );

  always_comb begin
    unique case (req_q.op)
      OP_MIN:   sfu_mode = SFU_MIN;
      OP_MAX:   sfu_mode = SFU_MAX;
      OP_CMPLT: sfu_mode = SFU_CNT;
      default:  sfu_mode = SFU_SUM;
    endcase
  end

  logic dec_sel, dec_search, dec_empty;
  assign dec_sel    = (state_q == S_DEC) && req_q.sel;
  assign dec_search = is_search(req_q.op);
  assign dec_empty  = (req_q.op == OP_DENSE_ADD) ? ~|bitmap_q : no_match;

  // datapath controls
  always_comb begin
    cam_we       = dec_sel && ((req_q.op == OP_WRITE) || (req_q.op == OP_INVALIDATE));
    cam_mwe      = dec_sel && (req_q.op == OP_SET_SRC);
    sram_we      = dec_sel && (req_q.op == OP_WRITE);
    alu_init     = dec_sel;
    alu_init_val = ((req_q.op == OP_MIN) || (req_q.op == OP_MAX)) ? ml : '0;
    sfu_clr      = dec_sel;
    sram_en      = '0;
    alu_op       = ALU_PASS;
    opb          = operand_w[cnt_q];
    chk          = 1'b0;
    sfu_step     = 1'b0;
    sfu_idx      = cnt_q;
    if (state_q == S_EXEC) begin
      sram_en = act_q;
      unique case (req_q.op)
        OP_ADD, OP_DENSE_ADD: alu_op = ALU_ADD;
        OP_LOAD:              alu_op = ALU_LOAD;
        OP_CMPLT:             alu_op = ALU_CMPLT;
        OP_SUM: begin
          alu_op   = ALU_PASS;
          sfu_step = 1'b1;
        end
        OP_MIN, OP_MAX: begin
          if (upd_phase_q) begin
            alu_op = ALU_LOAD;
            opb    = sfu_result[RB'(cnt_q)];
          end else begin
            alu_op   = ALU_ELIM;
            chk      = (cnt_q == BW'(WIDTH - 1) - pass_q);
            opb      = sel_bit;
            sfu_step = chk;
          end
        end
        default: alu_op = ALU_PASS;
      endcase
    end else if (state_q == S_FIN) begin
      sfu_step = 1'b1;  // CMPLT: count the flags
    end
  end

  assign req_ready = (state_q == S_IDLE);
  assign busy      = (state_q != S_IDLE);
  assign skip      = (state_q == S_DEC) && (!req_q.sel || (dec_search && no_match) ||
                     ((req_q.op == OP_DENSE_ADD) && dec_empty));
  assign rsp_valid = (state_q == S_RESP);
  assign rsp.op    = req_q.op;
  assign rsp.hit   = hit_q;
  assign rsp.value = use_sfu_q ? sfu_result : value_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      req_q       <= '0;
      act_q       <= '0;
      bitmap_q    <= '0;
      cnt_q       <= '0;
      pass_q      <= '0;
      upd_phase_q <= 1'b0;
      hit_q       <= 1'b0;
      use_sfu_q   <= 1'b0;
      value_q     <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          req_q   <= req;
          state_q <= S_DEC;
        end

        S_DEC: begin
          cnt_q       <= '0;
          pass_q      <= '0;
          upd_phase_q <= 1'b0;
          hit_q       <= 1'b0;
          use_sfu_q   <= 1'b0;
          value_q     <= '0;
          state_q     <= has_result(req_q.op) ? S_RESP : S_IDLE;
          if (req_q.sel) begin
            unique case (req_q.op)
              OP_READ: begin
                hit_q   <= 1'b1;
                value_q <= RES_BITS'(rdata);
              end
              OP_LOAD_BITMAP:
                for (int c = 0; c < ROWS / WIDTH; c++)
                  if (req_q.addr == ADDR_BITS'(c)) bitmap_q[c*WIDTH +: WIDTH] <= operand_w;
              OP_DENSE_ADD: begin
                act_q <= bitmap_q;
                if (!dec_empty) state_q <= S_EXEC;
              end
              OP_ADD, OP_LOAD, OP_CMPLT, OP_SUM, OP_MIN, OP_MAX: begin
                act_q <= ml;
                if (!no_match) begin
                  hit_q     <= 1'b1;
                  use_sfu_q <= has_result(req_q.op);
                  state_q   <= S_EXEC;
                end
              end
              default: ;
            endcase
          end
        end

        S_EXEC: begin
          cnt_q <= last_bit ? '0 : cnt_q + 1'b1;
          if (last_bit) begin
            if ((req_q.op == OP_MIN) || (req_q.op == OP_MAX)) begin
              if (upd_phase_q) begin
                state_q <= S_RESP;
              end else if (!last_pass) begin
                pass_q <= pass_q + 1'b1;
              end else if (req_q.upd) begin
                upd_phase_q <= 1'b1;
              end else begin
                state_q <= S_RESP;
              end
            end else if (req_q.op == OP_CMPLT) begin
              state_q <= S_FIN;
            end else begin
              state_q <= has_result(req_q.op) ? S_RESP : S_IDLE;
            end
          end
        end

        S_FIN: state_q <= S_RESP;

        S_RESP: if (rsp_ready) state_q <= S_IDLE;

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a response is held stable until it is taken
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));

endmodule
