// tb_galois_cache_attacks: the two cache attacks analysed for the 4x4 cache,
// run on the RTL in GF(4) (N = 2, R = x^2+x+1, a = b = 1, c = 0).
//
// Domain numbers: 0, 1, x = 2, x+1 = 3. A set s of domain t occupies row
// Pi(t,s,w) = s + t*w of every way w.
//
// Part 1, Prime+Probe (adversary 1, victim x). The adversary primes its set
// 0 (repeating the four lines until one full pass hits, since replacement is
// random), the victim fills one line of its set sv (random), and the
// adversary probes its four lines again. Because the two domains' sets meet
// in exactly one slot, the adversary sees a miss if and only if the victim's
// random victim way v is that meeting way; the first line to miss must be
// the one that sat in way v. Over many trials both outcomes must occur, so
// the adversary learns only that some line was filled.
//
// Part 2, collusion (domains 1 and 0 against victim x). Domain 1 fills the
// whole cache; domain 0 fills its sets 1, x and x+1 (rows 1..3), leaving
// domain 1 a single line per set, all in row 0. The victim fills one line of
// its set sv. Domain 1 probes its four surviving lines: exactly the line of
// set v misses when the victim's slot lies in row 0 (then sv = x*v, which the
// colluders learn), otherwise none misses. For sv = 0 and v = 0 domain 1
// then records four misses in its set 0.
module tb_galois_cache_attacks;
  import galois_pkg::*;

  localparam int unsigned N = 2, POLY = 'b111, WAYS = 4;
  localparam int unsigned ADDR_W = 32, LA_W = 26, LINE_W = 512;
  localparam logic [1:0] DOM_X = 2'd2;

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
  logic                 mem_req_valid, mem_req_ready = 1, mem_req_we;
  logic [LA_W-1:0]      mem_req_addr;
  logic [LINE_W-1:0]    mem_req_wdata;
  logic                 mem_resp_valid = 0;
  logic [LINE_W-1:0]    mem_resp_rdata = '0;

  galois_cache #(.N(N), .POLY(POLY), .A(1), .B(1), .C(0)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic int unsigned gmul(int unsigned a, int unsigned b);
    int unsigned r = 0;
    for (int i = 1; i >= 0; i--) begin
      r = r << 1;
      if (r >= 4) r = r ^ POLY;
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction
  function automatic int unsigned pi(int unsigned t, int unsigned s, int unsigned w);
    return s ^ gmul(t, w);
  endfunction

  // memory: always ready, read data two clocks later (content = address)
  int rd_delay = -1;
  logic [LA_W-1:0] rd_la;
  always @(negedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rd_delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= LINE_W'(rd_la);
      rd_delay = -1;
    end else if (rd_delay > 0) rd_delay--;
    if (mem_req_valid && mem_req_ready && !mem_req_we) begin
      rd_la = mem_req_addr;
      rd_delay = 1;
    end
  end

  // one access of domain t to the line with set index s and tag k
  task automatic access(input logic [1:0] t, input int unsigned s, input int unsigned k,
                        output bit hit, output int unsigned way, output int unsigned row);
    if (cur_sdid != t) begin
      @(negedge clk); set_sdid_valid = 1; set_sdid = t;
      @(negedge clk); set_sdid_valid = 0;
    end
    @(negedge clk);
    req_valid = 1; req_we = 0;
    req_addr = {LA_W'({4'(t), 16'(k), 2'(s)}), 6'd0};
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    hit = resp_hit; way = resp_way; row = resp_row;
    chk("row = Pi", row, pi(t, s, way));
  endtask

  // touch lines (t, set, tag k) for all listed sets and tags until one
  // full pass hits everywhere
  task automatic fill_sets(input logic [1:0] t, input logic [3:0] sets, input int unsigned tag0,
                           output int unsigned where [4][4]);
    bit all_hit, h;
    int unsigned w, r;
    int passes = 0;
    do begin
      all_hit = 1;
      for (int s = 0; s < 4; s++) if (sets[s])
        for (int k = 0; k < 4; k++) begin
          access(t, s, tag0 + k, h, w, r);
          where[s][k] = w;
          if (!h) all_hit = 0;
        end
      passes++;
    end while (!all_hit && passes < 500);
    chk("fill converged", all_hit, 1);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned where [4][4];
    int unsigned where0 [4][4];
    int unsigned sv, v, r, w, wstar;
    int unsigned misses, first_miss;
    int pp_seen = 0, pp_unseen = 0, co_seen = 0, co_unseen = 0, co_four = 0;
    bit h;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------- part 1: Prime+Probe ----------
    for (int trial = 0; trial < 48; trial++) begin
      fill_sets(2'd1, 4'b0001, 100, where);           // prime set 0 of domain 1
      sv = (trial < 12) ? 0 : $urandom_range(3);
      access(DOM_X, sv, 1000 + trial, h, v, r);       // victim fill
      chk("victim misses", h, 0);
      wstar = 0;
      for (int ww = 0; ww < 4; ww++) if (pi(DOM_X, sv, ww) == pi(1, 0, ww)) wstar = ww;
      misses = 0; first_miss = 99;
      for (int k = 0; k < 4; k++) begin
        access(2'd1, 0, 100 + k, h, w, r);
        if (!h) begin
          if (misses == 0) first_miss = k;
          misses++;
        end
      end
      chk("probe sees a miss iff the victim used the meeting way", misses > 0, v == wstar);
      if (misses > 0) begin
        chk("first miss is the line that sat in way v", where[0][first_miss], v);
        pp_seen++;
      end else pp_unseen++;
    end

    // ---------- part 2: collusion ----------
    for (int trial = 0; trial < 48; trial++) begin
      fill_sets(2'd1, 4'b1111, 200, where);           // domain 1 fills everything
      fill_sets(2'd0, 4'b1110, 300, where0);          // domain 0 fills rows 1..3
      sv = (trial < 16) ? 0 : $urandom_range(3);
      access(DOM_X, sv, 2000 + trial, h, v, r);       // victim fill
      chk("victim misses", h, 0);
      // survivors of domain 1 sit in row 0: set s at way s
      misses = 0;
      for (int s = 0; s < 4; s++) begin
        int unsigned k_surv;
        k_surv = 99;
        for (int k = 0; k < 4; k++) if (where[s][k] == s) k_surv = k;
        chk("survivor of each set found", k_surv != 99, 1);
        access(2'd1, s, 200 + k_surv, h, w, r);
        chk("survivor hit unless the victim took its slot", !h,
            (pi(DOM_X, sv, v) == 0) && (v == s));
        if (!h) misses++;
        if (!h) chk("colluders infer the victim's set", gmul(DOM_X, s), sv);
        if (s == 0) begin
          int unsigned m0;
          m0 = h ? 0 : 1;
          for (int k = 0; k < 4; k++) if (k != k_surv) begin
            bit h2;
            int unsigned w2, r2;
            access(2'd1, 0, 200 + k, h2, w2, r2);
            if (!h2) m0++;
          end
          chk("set 0: four misses iff the victim filled way 0 of its set 0", m0 == 4, sv == 0 && v == 0);
          if (m0 == 4) co_four++;
        end
      end
      if (misses > 0) co_seen++; else co_unseen++;
    end

    $display("prime+probe: victim fill seen %0d, not seen %0d", pp_seen, pp_unseen);
    $display("collusion: victim fill seen %0d (four misses in set 0: %0d), not seen %0d", co_seen, co_four, co_unseen);
    chk("prime+probe detection occurred", pp_seen > 0, 1);
    chk("prime+probe miss-free trial occurred", pp_unseen > 0, 1);
    chk("collusion detection occurred", co_seen > 0, 1);
    chk("collusion four-miss case occurred", co_four > 0, 1);
    chk("collusion miss-free trial occurred", co_unseen > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
