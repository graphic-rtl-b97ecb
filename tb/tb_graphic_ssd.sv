// tb_graphic_ssd: end-to-end test of the in-SSD aggregation engine.
//
// A reference model holds every cache's rows and predicts each merged
// response. Requests are streamed without waiting where the algorithm allows,
// so the input buffers fill and the issue side stalls. Phases:
//   1. a random graph is spread over the caches, each row holding one edge
//      and the feature of its source vertex; every vertex then gathers the sum
//      and the maximum of its neighbours' features (GCN-style aggregation);
//   2. single-source shortest paths on the four-step example graph, its edges
//      spread over different caches (add, rename source, find-and-update min);
//   3. connected components by repeated find-and-update of the minimum label;
//   4. insertion (cycle) sort of 12 values inside one cache using the compare
//      flags and their count;
//   5. the dense bitmap mode in one cache.
// Each mechanism (idle-skip, issue stall, merge over several caches,
// find-and-update, addressed read, dense mode, sort swap) is counted and must
// occur at least once.
module tb_graphic_ssd;
  import gas_pkg::*;

  localparam int N = 4, ROWS = 128, W = 16;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  gas_req_t req;
  gas_rsp_t rsp;
  logic [N-1:0] busy, skip;
  logic [31:0] skip_count, issued;
  int checks = 0, failures = 0;
  int n_stall = 0, n_multi = 0, n_upd = 0, n_read = 0, n_dense = 0, n_swap = 0;

  always #5 clk = ~clk;

  graphic_ssd #(.NUM_CORES(N)) dut (.*);

  // ---------------- reference model
  logic [7:0]     m_src [N][ROWS];
  logic [7:0]     m_dst [N][ROWS];
  logic           m_vld [N][ROWS];
  logic [W-1:0]   m_val [N][ROWS];
  logic [ROWS-1:0] m_bm [N];
  gas_rsp_t expq[$];

  function automatic gas_rsp_t model(gas_req_t r);
    gas_rsp_t o;
    logic [RES_BITS-1:0] acc;
    int hits;
    o = '0; o.op = r.op; hits = 0;
    acc = (r.op == OP_MIN) ? '1 : '0;
    for (int c = 0; c < N; c++) begin
      logic [RES_BITS-1:0] a;
      logic h;
      if (!(r.bcast || r.core == 16'(c))) continue;
      a = (r.op == OP_MIN) ? '1 : '0; h = 0;
      case (r.op)
        OP_WRITE: begin m_src[c][r.addr] = r.src; m_dst[c][r.addr] = r.dst; m_vld[c][r.addr] = 1; m_val[c][r.addr] = r.operand; end
        OP_INVALIDATE: m_vld[c][r.addr] = 0;
        OP_READ: begin h = 1; a = RES_BITS'(m_val[c][r.addr]); end
        OP_LOAD_BITMAP: m_bm[c][r.addr*W +: W] = r.operand;
        OP_DENSE_ADD: for (int i = 0; i < ROWS; i++) if (m_bm[c][i]) m_val[c][i] += r.operand;
        default: begin
          for (int i = 0; i < ROWS; i++)
            if (m_vld[c][i] && (!r.care_src || m_src[c][i] == r.src) && (!r.care_dst || m_dst[c][i] == r.dst)) begin
              h = 1;
              case (r.op)
                OP_ADD:     m_val[c][i] += r.operand;
                OP_LOAD:    m_val[c][i] = r.operand;
                OP_CMPLT:   a += (m_val[c][i] < r.operand);
                OP_SUM:     a += m_val[c][i];
                OP_MIN:     if (m_val[c][i] < a) a = RES_BITS'(m_val[c][i]);
                OP_MAX:     if (m_val[c][i] > a) a = RES_BITS'(m_val[c][i]);
                OP_SET_SRC: m_src[c][i] = r.operand[7:0];
                default: ;
              endcase
            end
          if (r.upd && h && (r.op == OP_MIN || r.op == OP_MAX))
            for (int i = 0; i < ROWS; i++)
              if (m_vld[c][i] && (!r.care_src || m_src[c][i] == r.src) && (!r.care_dst || m_dst[c][i] == r.dst))
                m_val[c][i] = a[W-1:0];
        end
      endcase
      if (h) begin
        hits++;
        case (r.op)
          OP_MIN:  if (a < acc) acc = a;
          OP_MAX:  if (a > acc) acc = a;
          OP_READ: acc = a;
          default: acc += a;
        endcase
      end
    end
    if (hits > 1) n_multi++;
    o.hit = (hits > 0);
    o.value = o.hit ? acc : '0;
    return o;
  endfunction

  // ---------------- driver and checker
  gas_rsp_t last_rsp;

  task automatic send(gas_req_t r);
    gas_rsp_t e;
    e = model(r);
    if (has_result(r.op)) expq.push_back(e);
    if (r.upd) n_upd++;
    if (r.op == OP_READ) n_read++;
    if (r.op == OP_DENSE_ADD) n_dense++;
    @(negedge clk);
    req = r; req_valid = 1;
    while (!req_ready) begin n_stall++; @(negedge clk); end
    @(negedge clk);
    req_valid = 0;
  endtask

  always @(negedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    gas_rsp_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected response");
    end else begin
      e = expq.pop_front();
      if (rsp != e) begin
        failures++;
        $display("FAIL %s: got hit=%0d value=%0d, expected hit=%0d value=%0d",
                 rsp.op.name(), rsp.hit, rsp.value, e.hit, e.value);
      end
    end
    last_rsp = rsp;
    if (failures > 50) begin  // a broken design: stop early
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic drain();
    while (expq.size() != 0) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic gas_req_t mk(gas_op_e op, int src = 0, int dst = 0, bit cs = 0, bit cd = 0,
                                  int operand = 0, int addr = 0, bit upd = 0, int core = -1);
    gas_req_t r;
    r = '0;
    r.op = op; r.src = 8'(src); r.dst = 8'(dst); r.care_src = cs; r.care_dst = cd;
    r.operand = 16'(operand); r.addr = 16'(addr); r.upd = upd;
    r.bcast = (core < 0); r.core = 16'((core < 0) ? 0 : core);
    return r;
  endfunction

  task automatic clear_all();
    for (int c = 0; c < N; c++) for (int i = 0; i < ROWS; i++)
      if (m_vld[c][i]) send(mk(OP_INVALIDATE, .addr(i), .core(c)));
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nxt_row [N];
    logic [W-1:0] feat [64];
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int c = 0; c < N; c++) begin
      nxt_row[c] = 0; m_bm[c] = '0;
      for (int i = 0; i < ROWS; i++) begin m_vld[c][i] = 0; m_val[c][i] = 0; m_src[c][i] = 0; m_dst[c][i] = 0; end
    end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // ---- 1. neighbour aggregation over a random graph of 64 vertices
    for (int v = 0; v < 64; v++) feat[v] = W'($urandom_range(0, 1000));
    for (int e = 0; e < 4 * ROWS - 8; e++) begin
      int s, d, c;
      s = $urandom_range(0, 63); d = $urandom_range(0, 63);
      c = (d + s) % N;                    // edges of one vertex land in several caches
      if (nxt_row[c] >= ROWS) c = (c + 1) % N;
      if (nxt_row[c] >= ROWS) continue;
      send(mk(OP_WRITE, s, d, .operand(feat[s]), .addr(nxt_row[c]), .core(c)));
      nxt_row[c]++;
    end
    for (int v = 0; v < 70; v++) begin      // 64..69 have no edges: idle-skip everywhere
      send(mk(OP_SUM, 0, v, 0, 1));
      send(mk(OP_MAX, 0, v, 0, 1));
    end
    send(mk(OP_READ, .addr(5), .core(2)));
    drain();
    clear_all();

    // ---- 2. shortest paths from vertex 0 (edges on different caches)
    send(mk(OP_WRITE, 0, 1, .operand(1), .addr(0), .core(0)));
    send(mk(OP_WRITE, 0, 2, .operand(5), .addr(0), .core(1)));
    send(mk(OP_WRITE, 2, 3, .operand(1), .addr(0), .core(2)));
    send(mk(OP_WRITE, 2, 4, .operand(4), .addr(1), .core(0)));
    send(mk(OP_WRITE, 3, 4, .operand(2), .addr(0), .core(3)));
    for (int v = 1; v <= 4; v++) begin
      send(mk(OP_MIN, 0, v, 1, 1, .upd(1)));
      drain();
      send(mk(OP_ADD, v, 0, 1, 0, .operand(int'(last_rsp.value))));
      send(mk(OP_SET_SRC, v, 0, 1, 0, .operand(0)));
    end
    begin
      int exp_d[5] = '{0, 1, 5, 6, 8};
      for (int v = 1; v <= 4; v++) begin
        send(mk(OP_MIN, 0, v, 1, 1));
        drain();
        checks++;
        if (last_rsp.value != RES_BITS'(exp_d[v])) begin failures++; $display("FAIL sssp %0d", v); end
      end
    end
    clear_all();

    // ---- 3. connected components: rows (u,v) carry a label, start = u
    begin
      int edges[6][2] = '{'{1, 2}, '{2, 3}, '{5, 6}, '{6, 7}, '{7, 5}, '{9, 8}};
      int lab;
      for (int e = 0; e < 6; e++) begin
        // both directions, label = smaller endpoint
        lab = (edges[e][0] < edges[e][1]) ? edges[e][0] : edges[e][1];
        send(mk(OP_WRITE, edges[e][0], edges[e][1], .operand(lab), .addr(e), .core(e % N)));
        send(mk(OP_WRITE, edges[e][1], edges[e][0], .operand(lab), .addr(e + 8), .core((e + 1) % N)));
      end
      for (int it = 0; it < 3; it++)
        for (int v = 1; v <= 9; v++) begin
          // rows touching v take the smallest label found among them
          send(mk(OP_MIN, 0, v, 0, 1, .upd(1)));
          drain();
          if (last_rsp.hit) begin
            send(mk(OP_LOAD, v, 0, 1, 0, .operand(int'(last_rsp.value))));
            send(mk(OP_MIN, 0, v, 0, 1, .upd(1)));
          end
        end
      begin
        int exp_c[10] = '{0, 1, 1, 1, 0, 5, 5, 5, 8, 8};
        for (int v = 1; v <= 9; v++) if (v != 4) begin
          send(mk(OP_MIN, 0, v, 0, 1));
          drain();
          checks++;
          if (last_rsp.value != RES_BITS'(exp_c[v])) begin failures++; $display("FAIL cc %0d: %0d", v, last_rsp.value); end
        end
      end
    end
    clear_all();

    // ---- 4. insertion (cycle) sort of 12 distinct values in cache 2
    begin
      int n = 12, i = 0, x, p, y;
      int vals[12];
      for (int k = 0; k < n; k++) begin
        vals[k] = 1000 - 37 * ((k * 5) % 12);
        send(mk(OP_WRITE, 200, 200, .operand(vals[k]), .addr(k), .core(2)));
      end
      while (i < n) begin
        send(mk(OP_READ, .addr(i), .core(2))); drain(); x = int'(last_rsp.value);
        send(mk(OP_CMPLT, 0, 0, 0, 0, .operand(x), .core(2))); drain(); p = int'(last_rsp.value);
        if (p == i) i++;
        else begin
          send(mk(OP_READ, .addr(p), .core(2))); drain(); y = int'(last_rsp.value);
          send(mk(OP_WRITE, 200, 200, .operand(x), .addr(p), .core(2)));
          send(mk(OP_WRITE, 200, 200, .operand(y), .addr(i), .core(2)));
          n_swap++;
        end
      end
      for (int k = 0; k < n; k++) begin
        send(mk(OP_READ, .addr(k), .core(2))); drain();
        checks++;
        if (k > 0 && int'(last_rsp.value) <= x) begin failures++; $display("FAIL sort order at %0d", k); end
        x = int'(last_rsp.value);
      end
    end

    // ---- 5. dense bitmap mode in cache 1
    for (int k = 0; k < 16; k++) send(mk(OP_WRITE, 50, k, .operand(k * 3), .addr(k), .core(1)));
    send(mk(OP_LOAD_BITMAP, .operand(16'hA5C3), .addr(0), .core(1)));
    send(mk(OP_DENSE_ADD, .operand(7), .core(1)));
    send(mk(OP_SUM, 50, 0, 1, 0));
    drain();

    // ---- mechanism coverage
    begin
      int cnt[7];
      string nm[7] = '{"idle-skip", "issue stall", "multi-cache merge", "find-and-update",
                       "addressed read", "dense add", "sort swap"};
      cnt = '{int'(skip_count), n_stall, n_multi, n_upd, n_read, n_dense, n_swap};
      for (int k = 0; k < 7; k++) begin
        $display("%-18s %0d", nm[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[k]); end
      end
    end
    checks++;
    if (issued == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
