// tb_galois_cache: end-to-end test of the cache at its default size
// (GF(2^6): 64 sets x 64 ways, a = b = 1, c = 0), with no parameter
// overrides.
//
// A driver issues reads and writes from several security domains, switching
// the domain register between requests and sometimes presenting the next
// request before the previous one has finished. A memory model answers line
// reads after a random latency and applies the cache's write-backs, with a
// randomly stalling request channel.
//
// The checker keeps its own copy of the cache (valid, dirty, domain, line
// address and data per way and row) and a flat golden memory, and for every
// response checks:
//   - hit or miss as the model predicts, and the way of a hit;
//   - the row reported equals Pi(t, s, way) worked out by the checker;
//   - read data equal to the golden memory;
//   - a dirty victim is written back exactly once, with its address and data,
//     and a clean or empty victim not at all;
//   - a hit answers two clocks after the request is accepted.
// Each domain owns a private address range; a range of read-only lines is
// shared by all domains, so that a line cached by one domain is missed by
// another. Mechanisms that must occur at least once: read hit, write hit,
// miss into an empty slot, clean eviction, dirty write-back, domain switch,
// miss on a line held by another domain, request back-pressure and memory
// back-pressure.
module tb_galois_cache;
  import galois_pkg::*;

  localparam int unsigned N      = DEFAULT_N;
  localparam int unsigned POLY   = gf_poly(N);
  localparam int unsigned A      = 1, B = 1, C = 0;
  localparam int unsigned WAYS   = 2 ** N;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned LA_W   = ADDR_W - 6;
  localparam int unsigned LINE_W = LINE_BYTES * 8;
  localparam int          NOPS   = 20000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 set_sdid_valid = 0;
  logic [N-1:0]         set_sdid = '0, cur_sdid;
  logic                 req_valid = 0, req_ready, req_we = 0;
  logic [ADDR_W-1:0]    req_addr = '0;
  logic [WORD_BITS-1:0] req_wdata = '0;
  logic [7:0]           req_be = '0;
  logic                 resp_valid, resp_hit;
  logic [WORD_BITS-1:0] resp_rdata;
  logic [N-1:0]         resp_way, resp_row;
  logic                 mem_req_valid, mem_req_ready = 0, mem_req_we;
  logic [LA_W-1:0]      mem_req_addr;
  logic [LINE_W-1:0]    mem_req_wdata;
  logic                 mem_resp_valid = 0;
  logic [LINE_W-1:0]    mem_resp_rdata = '0;

  galois_cache dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d %s: got %0h expected %0h", cyc, what, got, exp);
    end
  endtask

  // ---------------- reference arithmetic ----------------
  function automatic int unsigned ref_mul(int unsigned a, int unsigned b);
    int unsigned r = 0;
    for (int i = int'(N) - 1; i >= 0; i--) begin
      r = r << 1;
      if (r >= (1 << N)) r = r ^ POLY;
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  function automatic int unsigned pi(int unsigned t, int unsigned s, int unsigned w);
    return ref_mul(A, s) ^ ref_mul(ref_mul(B, t), w) ^ C;
  endfunction

  function automatic logic [LINE_W-1:0] init_line(logic [LA_W-1:0] la);
    logic [LINE_W-1:0] l;
    for (int i = 0; i < int'(LINE_W / 32); i++) l[i*32 +: 32] = (32'(la) * 32'h9E3779B1) ^ 32'(i * 32'h01010101);
    return l;
  endfunction

  // ---------------- memory model and golden memory ----------------
  logic [LINE_W-1:0] mem    [logic [LA_W-1:0]];
  logic [LINE_W-1:0] golden [logic [LA_W-1:0]];

  function automatic logic [LINE_W-1:0] mem_get(logic [LA_W-1:0] la);
    return mem.exists(la) ? mem[la] : init_line(la);
  endfunction
  function automatic logic [LINE_W-1:0] gold_get(logic [LA_W-1:0] la);
    return golden.exists(la) ? golden[la] : init_line(la);
  endfunction

  typedef struct { logic [LA_W-1:0] la; logic [LINE_W-1:0] data; } wb_t;
  wb_t wb_q [$];
  int  rd_delay = -1;
  logic [LA_W-1:0] rd_la;
  int  n_mem_bp = 0;

  always @(negedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rd_delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= mem_get(rd_la);
      rd_delay = -1;
    end else if (rd_delay > 0) rd_delay--;
    // ready for the coming edge is chosen first, then the handshake it makes
    mem_req_ready = ($urandom_range(9) < 7);
    if (mem_req_valid && !mem_req_ready) n_mem_bp++;
    if (mem_req_valid && mem_req_ready) begin   // taken at the coming edge
      if (mem_req_we) begin
        mem[mem_req_addr] = mem_req_wdata;
        wb_q.push_back('{mem_req_addr, mem_req_wdata});
      end else begin
        rd_la = mem_req_addr;
        rd_delay = $urandom_range(4);
      end
    end
  end

  // ---------------- cache model ----------------
  logic              m_valid [WAYS][WAYS];
  logic              m_dirty [WAYS][WAYS];
  logic [N-1:0]      m_sdid  [WAYS][WAYS];
  logic [LA_W-1:0]   m_la    [WAYS][WAYS];
  logic [LINE_W-1:0] m_line  [WAYS][WAYS];

  typedef struct {
    logic [N-1:0] t; logic we; logic [ADDR_W-1:0] addr;
    logic [WORD_BITS-1:0] wdata; logic [7:0] be; longint acc;
  } op_t;
  op_t ops [$];

  int n_rd_hit = 0, n_wr_hit = 0, n_fill_empty = 0, n_evict_clean = 0, n_writeback = 0;
  int n_switch = 0, n_xdomain = 0, n_req_bp = 0, n_done = 0;

  function automatic logic [LINE_W-1:0] merge(logic [LINE_W-1:0] l, int unsigned wsel,
                                              logic [WORD_BITS-1:0] d, logic [7:0] be);
    for (int b = 0; b < 8; b++) if (be[b]) l[wsel * 64 + b * 8 +: 8] = d[b*8 +: 8];
    return l;
  endfunction

  always @(negedge clk) begin
    if (resp_valid) begin
      op_t o;
      int unsigned s, wsel, hw, v, r;
      logic [LA_W-1:0] la;
      logic [LINE_W-1:0] g;
      bit phit, other;
      o = ops.pop_front();
      la = o.addr[ADDR_W-1:6];
      s = la[N-1:0];
      wsel = o.addr[5:3];
      phit = 0; hw = 0;
      for (int w = 0; w < int'(WAYS); w++) begin
        r = pi(o.t, s, w);
        if (m_valid[w][r] && m_sdid[w][r] == o.t && m_la[w][r] == la) begin phit = 1; hw = w; end
      end
      g = gold_get(la);
      chk("hit/miss", resp_hit, phit);
      if (!o.we) chk("read data", resp_rdata, g[wsel*64 +: 64]);
      if (phit) begin
        chk("hit way", resp_way, hw);
        chk("hit row", resp_row, pi(o.t, s, hw));
        chk("hit latency", cyc - o.acc, 2);
        chk("no write-back on hit", wb_q.size(), 0);
        if (o.we) begin
          m_line[hw][pi(o.t, s, hw)] = merge(m_line[hw][pi(o.t, s, hw)], wsel, o.wdata, o.be);
          m_dirty[hw][pi(o.t, s, hw)] = 1;
          n_wr_hit++;
        end else n_rd_hit++;
      end else begin
        v = resp_way;
        r = pi(o.t, s, v);
        chk("fill row", resp_row, r);
        // was the line cached by another domain?
        other = 0;
        for (int w = 0; w < int'(WAYS); w++)
          for (int rr = 0; rr < int'(WAYS); rr++)
            if (m_valid[w][rr] && m_la[w][rr] == la && m_sdid[w][rr] != o.t) other = 1;
        if (other) n_xdomain++;
        if (!m_valid[v][r]) begin
          n_fill_empty++;
          chk("no write-back for empty slot", wb_q.size(), 0);
        end else if (!m_dirty[v][r]) begin
          n_evict_clean++;
          chk("no write-back for clean victim", wb_q.size(), 0);
        end else begin
          n_writeback++;
          chk("one write-back", wb_q.size(), 1);
          if (wb_q.size() > 0) begin
            wb_t e;
            e = wb_q[0];
            chk("write-back address", e.la, m_la[v][r]);
            chk("write-back data", e.data == m_line[v][r], 1);
          end
        end
        wb_q.delete();
        m_valid[v][r] = 1;
        m_dirty[v][r] = o.we;
        m_sdid[v][r]  = o.t;
        m_la[v][r]    = la;
        m_line[v][r]  = o.we ? merge(mem_get(la), wsel, o.wdata, o.be) : mem_get(la);
        chk("miss latency at least 3", (cyc - o.acc) >= 3, 1);
      end
      if (o.we) golden[la] = merge(g, wsel, o.wdata, o.be);
      n_done++;
    end
    if (req_valid && !req_ready) n_req_bp++;
  end

  // ---------------- driver ----------------
  localparam int NDOM = 4;
  logic [N-1:0] doms [NDOM] = '{0, 1, 5, 63};

  function automatic logic [ADDR_W-1:0] pick_addr(int d, output bit shared);
    // set index from a small group so that sets overflow; private tags per
    // domain; 1 in 8 accesses goes to the shared read-only range
    logic [LA_W-1:0] la;
    int unsigned s = $urandom_range(3);
    shared = ($urandom_range(7) == 0);
    if (shared) la = LA_W'({8'hEE, 10'($urandom_range(15)), 6'(s)});
    else        la = LA_W'({8'(d + 1), 10'($urandom_range(95)), 6'(s)});
    return {la, 3'($urandom_range(7)), 3'b000};
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d operations (state %0d, ops pending %0d)", n_done, dut.state_q, ops.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    bit shared;
    for (int w = 0; w < int'(WAYS); w++) for (int r = 0; r < int'(WAYS); r++) m_valid[w][r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    d = 0;
    for (int k = 0; k < NOPS; k++) begin
      op_t o;
      if ($urandom_range(15) == 0) begin
        d = $urandom_range(NDOM - 1);
        if (doms[d] != cur_sdid) n_switch++;
        set_sdid_valid = 1; set_sdid = doms[d];
        @(negedge clk);
        set_sdid_valid = 0;
      end
      o.t     = doms[d];
      o.addr  = pick_addr(d, shared);
      o.we    = !shared && ($urandom_range(2) == 0);
      o.wdata = {$urandom, $urandom};
      o.be    = ($urandom_range(1) == 0) ? 8'hFF : 8'($urandom);
      req_valid = 1; req_we = o.we; req_addr = o.addr; req_wdata = o.wdata; req_be = o.be;
      while (!req_ready) @(negedge clk);
      o.acc = cyc;
      ops.push_back(o);
      @(negedge clk);
      req_valid = 0;
      // usually wait for the answer; sometimes present the next request early
      if ($urandom_range(3) != 0) while (ops.size() != 0) @(negedge clk);
    end
    while (ops.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    chk("all requests answered", n_done, NOPS);
    $display("read hits %0d, write hits %0d, fills into empty slots %0d, clean evictions %0d, write-backs %0d",
             n_rd_hit, n_wr_hit, n_fill_empty, n_evict_clean, n_writeback);
    $display("domain switches %0d, misses on lines held by another domain %0d, request stalls %0d, memory stalls %0d",
             n_switch, n_xdomain, n_req_bp, n_mem_bp);
    chk("read hit seen",        n_rd_hit      > 0, 1);
    chk("write hit seen",       n_wr_hit      > 0, 1);
    chk("empty fill seen",      n_fill_empty  > 0, 1);
    chk("clean eviction seen",  n_evict_clean > 0, 1);
    chk("write-back seen",      n_writeback   > 0, 1);
    chk("domain switch seen",   n_switch      > 0, 1);
    chk("cross-domain miss seen", n_xdomain   > 0, 1);
    chk("request stall seen",   n_req_bp      > 0, 1);
    chk("memory stall seen",    n_mem_bp      > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
