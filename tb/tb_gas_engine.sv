// tb_gas_engine: self-checking test of one GRAPHIC cache.
//
// A reference model (plain arrays of SRC, DST, valid and value) predicts every
// response and the contents of every row. The test first runs the sample graph
// of the COO example (edges 1->2:5, 1->3:3, 2->4:1, 3->4:4, 4->5:5, 5->3:7),
// then the four-step shortest-path example from vertex 0, then the dense
// bitmap mode, then a long random sequence of all operations. It also checks
// the cycle cost of each kind of request: 2 + W for a matched bit-serial
// update, 2 for an idle-skip, 2 + W*W (+W) for min/max.
module tb_gas_engine;
  import gas_pkg::*;

  localparam int unsigned ROWS  = 128;
  localparam int unsigned WIDTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, rsp_valid, rsp_ready, busy, skip;
  gas_req_t req;
  gas_rsp_t rsp;
  int checks = 0, failures = 0, skips = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (skip) skips++;

  gas_engine #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);

  // ---------------- reference model
  logic [7:0]       m_src [ROWS];
  logic [7:0]       m_dst [ROWS];
  logic             m_vld [ROWS];
  logic [WIDTH-1:0] m_val [ROWS];
  logic [ROWS-1:0]  m_bitmap;

  function automatic logic m_match(gas_req_t r, int i);
    return m_vld[i] && (!r.care_src || m_src[i] == r.src) && (!r.care_dst || m_dst[i] == r.dst);
  endfunction

  function automatic gas_rsp_t model(gas_req_t r);
    gas_rsp_t o;
    logic [RES_BITS-1:0] acc;
    logic hit;
    o = '0; o.op = r.op; hit = 0;
    acc = (r.op == OP_MIN) ? '1 : '0;
    if (!r.sel) return o;
    case (r.op)
      OP_WRITE: begin
        m_src[r.addr] = r.src; m_dst[r.addr] = r.dst; m_vld[r.addr] = 1; m_val[r.addr] = r.operand;
      end
      OP_INVALIDATE: m_vld[r.addr] = 0;
      OP_READ: begin hit = 1; acc = RES_BITS'(m_val[r.addr]); end
      OP_LOAD_BITMAP: m_bitmap[r.addr*WIDTH +: WIDTH] = r.operand;
      OP_DENSE_ADD: for (int i = 0; i < ROWS; i++) if (m_bitmap[i]) m_val[i] += r.operand;
      default: begin
        for (int i = 0; i < ROWS; i++) if (m_match(r, i)) begin
          hit = 1;
          case (r.op)
            OP_ADD:     m_val[i] += r.operand;
            OP_LOAD:    m_val[i] = r.operand;
            OP_CMPLT:   acc += (m_val[i] < r.operand);
            OP_SUM:     acc += m_val[i];
            OP_MIN:     if (m_val[i] < acc) acc = RES_BITS'(m_val[i]);
            OP_MAX:     if (m_val[i] > acc) acc = RES_BITS'(m_val[i]);
            OP_SET_SRC: m_src[i] = r.operand[7:0];
            default: ;
          endcase
        end
        if (r.upd && hit && (r.op == OP_MIN || r.op == OP_MAX))
          for (int i = 0; i < ROWS; i++) if (m_match(r, i)) m_val[i] = acc[WIDTH-1:0];
      end
    endcase
    o.hit = hit;
    o.value = hit ? acc : '0;
    return o;
  endfunction

  // ---------------- driver
  int last_cycles;
  gas_rsp_t last_rsp;

  task automatic send(gas_req_t r, int exp_cycles = -1);
    gas_rsp_t exp;
    int n;
    exp = model(r);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req = r; req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    n = 1;
    if (has_result(r.op)) begin
      while (!rsp_valid) begin @(negedge clk); n++; end
      last_rsp = rsp;
      checks++;
      if (rsp.hit !== exp.hit || rsp.value !== exp.value || rsp.op !== r.op) begin
        failures++;
        $display("FAIL op=%s src=%0d dst=%0d: got hit=%0d val=%0d, expected hit=%0d val=%0d",
                 r.op.name(), r.src, r.dst, rsp.hit, rsp.value, exp.hit, exp.value);
      end
      rsp_ready = 1; @(negedge clk); rsp_ready = 0; n++;
    end else begin
      while (!req_ready) begin @(negedge clk); n++; end
    end
    last_cycles = n;
    if (exp_cycles >= 0) begin
      checks++;
      if (n != exp_cycles) begin
        failures++;
        $display("FAIL cycles op=%s: %0d, expected %0d", r.op.name(), n, exp_cycles);
      end
    end
  endtask

  function automatic gas_req_t mk(gas_op_e op, int src = 0, int dst = 0, bit cs = 0, bit cd = 0,
                                  int operand = 0, int addr = 0, bit upd = 0);
    gas_req_t r;
    r = '0;
    r.op = op; r.src = 8'(src); r.dst = 8'(dst); r.care_src = cs; r.care_dst = cd;
    r.operand = 16'(operand); r.addr = 16'(addr); r.upd = upd; r.sel = 1; r.bcast = 1;
    return r;
  endfunction

  task automatic check_rows(string what);
    for (int i = 0; i < ROWS; i++) if (m_vld[i]) begin
      send(mk(OP_READ, .addr(i)));
    end
  endtask

  // ---------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; rsp_ready = 0; req = '0;
    for (int i = 0; i < ROWS; i++) begin m_vld[i] = 0; m_val[i] = 0; m_src[i] = 0; m_dst[i] = 0; end
    m_bitmap = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- sample graph in COO form (one edge per row)
    send(mk(OP_WRITE, 1, 2, .operand(5), .addr(0)), 2);
    send(mk(OP_WRITE, 1, 3, .operand(3), .addr(1)));
    send(mk(OP_WRITE, 2, 4, .operand(1), .addr(2)));
    send(mk(OP_WRITE, 3, 4, .operand(4), .addr(3)));
    send(mk(OP_WRITE, 4, 5, .operand(5), .addr(4)));
    send(mk(OP_WRITE, 5, 3, .operand(7), .addr(5)));
    // gather: sum of the values of the out-edges of vertex 1 = 8
    send(mk(OP_SUM, 1, 0, 1, 0), 2 + WIDTH + 1);
    checks++; if (last_rsp.value != 8) begin failures++; $display("FAIL sample sum"); end
    send(mk(OP_MIN, 0, 4, 0, 1), 2 + WIDTH * WIDTH + 1);   // min into vertex 4 = 1
    send(mk(OP_MAX, 0, 3, 0, 1));                           // max into vertex 3 = 7
    send(mk(OP_ADD, 1, 0, 1, 0, .operand(2)), 2 + WIDTH);   // "ALU input: 2" on src=1 rows
    check_rows("after add");
    send(mk(OP_SUM, 9, 0, 1, 0), 3);                        // idle-skip: no edge from 9
    send(mk(OP_ADD, 9, 0, 1, 0, .operand(2)), 2);
    send(mk(OP_CMPLT, 0, 0, 0, 0, .operand(5)), 2 + WIDTH + 2);  // rows < 5 of all
    send(mk(OP_MIN, 0, 3, 0, 1, .upd(1)), 2 + WIDTH * WIDTH + WIDTH + 1);
    check_rows("after find-and-update");
    for (int i = 0; i < 6; i++) send(mk(OP_INVALIDATE, .addr(i)));

    // ---- shortest paths from vertex 0 on the four-step example
    send(mk(OP_WRITE, 0, 1, .operand(1), .addr(10)));
    send(mk(OP_WRITE, 0, 2, .operand(5), .addr(11)));
    send(mk(OP_WRITE, 2, 3, .operand(1), .addr(12)));
    send(mk(OP_WRITE, 2, 4, .operand(4), .addr(13)));
    send(mk(OP_WRITE, 3, 4, .operand(2), .addr(14)));
    for (int v = 1; v <= 4; v++) begin
      int d;
      send(mk(OP_MIN, 0, v, 1, 1, .upd(1)));     // settle dist(0,v) over the rows 0->v
      d = int'(last_rsp.value);
      send(mk(OP_ADD, v, 0, 1, 0, .operand(d))); // extend the paths leaving v
      send(mk(OP_SET_SRC, v, 0, 1, 0, .operand(0)));
    end
    begin
      int exp_d[5] = '{0, 1, 5, 6, 8};
      for (int v = 1; v <= 4; v++) begin
        send(mk(OP_MIN, 0, v, 1, 1));
        checks++;
        if (last_rsp.value != RES_BITS'(exp_d[v])) begin
          failures++; $display("FAIL sssp dist(%0d)=%0d exp %0d", v, last_rsp.value, exp_d[v]);
        end
      end
    end
    check_rows("after sssp");

    // ---- dense bitmap mode: rows 40..47 hold features, bitmap picks 40,42,45
    for (int i = 40; i < 48; i++) send(mk(OP_WRITE, 7, 7, .operand(i), .addr(i)));
    send(mk(OP_LOAD_BITMAP, .operand(16'b0010_0101_0000_0000), .addr(2)));
    send(mk(OP_DENSE_ADD, .operand(100)), 2 + WIDTH);
    check_rows("after dense add");
    send(mk(OP_LOAD_BITMAP, .operand(0), .addr(2)));
    send(mk(OP_DENSE_ADD, .operand(100)), 2);

    // ---- random sequence
    for (int i = 0; i < ROWS; i++)
      send(mk(OP_WRITE, $urandom_range(0, 7), $urandom_range(0, 7), .operand($urandom), .addr(i)));
    for (int n = 0; n < 300; n++) begin
      gas_op_e op;
      int pick;
      pick = $urandom_range(0, 9);
      case (pick)
        0: op = OP_ADD; 1: op = OP_LOAD; 2: op = OP_CMPLT; 3: op = OP_SUM; 4: op = OP_MIN;
        5: op = OP_MAX; 6: op = OP_SET_SRC; 7: op = OP_READ; 8: op = OP_WRITE;
        default: op = OP_SUM;
      endcase
      send(mk(op, $urandom_range(0, 9), $urandom_range(0, 9), 1'($urandom), 1'($urandom),
              (op == OP_SET_SRC) ? $urandom_range(0, 7) : $urandom, $urandom_range(0, ROWS - 1),
              1'($urandom)));
    end
    check_rows("after random");

    checks++;
    if (skips < 2) begin failures++; $display("FAIL idle-skip seen %0d times", skips); end
    $display("idle-skips: %0d", skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
