// galois_cache: a side-channel resilient set-associative cache with 2^N sets
// and 2^N ways, skewed per security domain by a linear function over GF(2^N).
//
// Every way is a separate bank (way_bank). A request from security domain t
// for a line whose set index is s reads, in every way w at once, the row
//     Pi(t, s, w) = A*s + (B*t)*w + C   (mod R, all in GF(2^N))
// computed by galois_index from the set bits of the address and the product
// B*t held in sdid_ctx. Because of this skewing, any set of one domain
// shares exactly one cache line slot with any set of any other domain, so a
// random eviction by one domain lands in a random set of every other domain.
// Replacement picks the victim way with lfsr_repl, uniformly over all ways
// and without preferring empty ones, as the security argument assumes.
//
// Addressing: a byte address splits into line offset (6 bits for 64-byte
// lines), set index s (the next N bits) and the rest. A tag entry holds the
// full line address and the domain t that brought the line in; a hit needs
// both to match, so domains never hit on each other's lines. Domains are
// expected not to share writable memory: a line used by two domains is held
// once per domain.
//
// Operation (one request at a time):
//   IDLE    req_ready=1; an accepted request latches address, data and the
//           current domain, and all ways read their row Pi(t,s,w).
//   LOOKUP  tags compared. Hit: the word is returned (write: merged into the
//           line, line marked dirty) and the FSM returns to IDLE. Miss: the
//           LFSR names the victim way v; its entry is latched.
//   WB      if the victim is valid and dirty, it is written back (one line).
//   RF_REQ  the missing line is requested from memory.
//   RF_WAIT on the memory response the line (merged with the write word, if
//           any) is written into way v at row Pi(t,s,v) and the word returned.
// A hit answers with resp_valid two clocks after the request is accepted; a
// miss takes 2 clocks plus the memory's latency (plus a write-back).
// resp_hit/resp_way/resp_row report where the line was found or placed.
//
// Words are 64-bit aligned: req_addr[2:0] is not used, req_be selects bytes.
//
// Security-domain switch: set_sdid_valid/set_sdid load a new domain; requests
// accepted from the following clock on use it.
//
// Memory side: one request channel (valid/ready, we, line address, line data)
// and a response channel (valid, line data) for reads; writes get no
// response. At most one memory read is outstanding.
//
// From the paper: the square 2^N x 2^N shape, the permutation Pi and its
// XOR-only implementation, precomputed B*t, random replacement, the Table I
// reducing polynomials, 64-byte lines. This design's own choices: the
// request/response and memory handshakes, the blocking FSM, write-back with
// write-allocate, the domain stored in the tag, the LFSR, the default N = 6
// and C = 0 (A = B = 1 is the case the paper works through). Only p = 2
// fields are built; the paper notes odd-prime fields are possible but costly.
module galois_cache
  import galois_pkg::*;
#(
  parameter int unsigned N         = DEFAULT_N,
  parameter int unsigned POLY      = gf_poly(N),
  parameter int unsigned A         = 1,
  parameter int unsigned B         = 1,
  parameter int unsigned C         = 0,
  parameter int unsigned ADDR_W    = 32,
  parameter logic [15:0] LFSR_SEED = 16'hACE1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // security-domain context
  input  logic                       set_sdid_valid,
  input  logic [N-1:0]               set_sdid,
  output logic [N-1:0]               cur_sdid,
  // CPU request
  input  logic                       req_valid,
  output logic                       req_ready,
  input  logic                       req_we,
  input  logic [ADDR_W-1:0]          req_addr,
  input  logic [WORD_BITS-1:0]       req_wdata,
  input  logic [WORD_BITS/8-1:0]     req_be,
  // CPU response
  output logic                       resp_valid,
  output logic [WORD_BITS-1:0]       resp_rdata,
  output logic                       resp_hit,
  output logic [N-1:0]               resp_way,
  output logic [N-1:0]               resp_row,
  // memory request
  output logic                       mem_req_valid,
  input  logic                       mem_req_ready,
  output logic                       mem_req_we,
  output logic [ADDR_W-$clog2(LINE_BYTES)-1:0] mem_req_addr,
  output logic [LINE_BYTES*8-1:0]    mem_req_wdata,
  // memory read response
  input  logic                       mem_resp_valid,
  input  logic [LINE_BYTES*8-1:0]    mem_resp_rdata
);

  localparam int unsigned WAYS   = 2 ** N;
  localparam int unsigned OFF_W  = $clog2(LINE_BYTES);
  localparam int unsigned LA_W   = ADDR_W - OFF_W;         // line address
  localparam int unsigned TAG_W  = N + LA_W;               // {domain, line address}
  localparam int unsigned LINE_W = LINE_BYTES * 8;
  localparam int unsigned WSEL_W = $clog2(LINE_W / WORD_BITS);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_RF_REQ, S_RF_WAIT} state_e;

  state_e state_q, state_d;

  // ---------------- domain context and skewing ----------------
  logic [N-1:0] ctx_bt;

  sdid_ctx #(.N(N), .POLY(POLY), .B(B)) u_sdid (
    .clk, .rst_n, .set_valid(set_sdid_valid), .set_sdid(set_sdid),
    .sdid(cur_sdid), .bt(ctx_bt)
  );

  // latched request
  logic                   we_q;
  logic [LA_W-1:0]        la_q;
  logic [WSEL_W-1:0]      wsel_q;
  logic [WORD_BITS-1:0]   wdata_q;
  logic [WORD_BITS/8-1:0] be_q;
  logic [N-1:0]           sdid_q, bt_q;

  logic           accept;
  logic [N-1:0]   s_cur, bt_cur;
  logic [N-1:0]   row [WAYS];

  assign req_ready = (state_q == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign s_cur     = (state_q == S_IDLE) ? req_addr[OFF_W +: N] : la_q[N-1:0];
  assign bt_cur    = (state_q == S_IDLE) ? ctx_bt : bt_q;

  galois_index #(.N(N), .POLY(POLY), .A(A), .C(C)) u_index (
    .s(s_cur), .bt(bt_cur), .idx(row)
  );

  // ---------------- replacement ----------------
  logic [N-1:0] lfsr_way;

  lfsr_repl #(.N(N), .SEED(LFSR_SEED)) u_lfsr (
    .clk, .rst_n, .en(1'b1), .way(lfsr_way)
  );

  // ---------------- ways ----------------
  logic              bank_en    [WAYS];
  logic              bank_we    [WAYS];
  logic              bank_wdirty;
  logic [LINE_W-1:0] bank_wline;
  logic              rvalid [WAYS];
  logic              rdirty [WAYS];
  logic [TAG_W-1:0]  rtag   [WAYS];
  logic [LINE_W-1:0] rline  [WAYS];

  for (genvar w = 0; w < WAYS; w++) begin : g_bank
    way_bank #(.ROWS(WAYS), .TAG_W(TAG_W), .LINE_W(LINE_W)) u_bank (
      .clk, .rst_n,
      .en(bank_en[w]), .we(bank_we[w]), .addr(row[w]),
      .wvalid(1'b1), .wdirty(bank_wdirty), .wtag({sdid_q, la_q}), .wline(bank_wline),
      .rvalid(rvalid[w]), .rdirty(rdirty[w]), .rtag(rtag[w]), .rline(rline[w])
    );
  end

  // ---------------- tag compare ----------------
  logic [WAYS-1:0] hit_vec;
  logic            hit;
  logic [N-1:0]    hit_way;

  always_comb begin
    hit_way = '0;
    for (int w = 0; w < int'(WAYS); w++) begin
      hit_vec[w] = rvalid[w] && (rtag[w] == {sdid_q, la_q});
      if (hit_vec[w]) hit_way = N'(w);
    end
    hit = |hit_vec;
  end

  // ---------------- victim ----------------
  logic [N-1:0]      vic_way_q;
  logic [LA_W-1:0]   vic_la_q;
  logic [LINE_W-1:0] vic_line_q;

  // merge the write word into a line
  function automatic logic [LINE_W-1:0] merge_word(input logic [LINE_W-1:0] line,
                                                   input logic [WSEL_W-1:0] sel,
                                                   input logic [WORD_BITS-1:0] data,
                                                   input logic [WORD_BITS/8-1:0] be);
    logic [LINE_W-1:0] r;
    r = line;
    for (int b = 0; b < int'(WORD_BITS / 8); b++)
      if (be[b]) r[int'(sel) * WORD_BITS + b * 8 +: 8] = data[b * 8 +: 8];
    return r;
  endfunction

  logic [LINE_W-1:0] hit_line, fill_line;

  assign hit_line  = rline[hit_way];
  assign fill_line = we_q ? merge_word(mem_resp_rdata, wsel_q, wdata_q, be_q) : mem_resp_rdata;

  always_comb begin
    state_d     = state_q;
    bank_wdirty = 1'b1;
    bank_wline  = merge_word(hit_line, wsel_q, wdata_q, be_q);
    for (int w = 0; w < int'(WAYS); w++) begin
      bank_en[w] = accept;
      bank_we[w] = 1'b0;
    end
    unique case (state_q)
      S_IDLE:   if (accept) state_d = S_LOOKUP;
      S_LOOKUP: begin
        if (hit) begin
          if (we_q) begin
            bank_en[hit_way] = 1'b1;
            bank_we[hit_way] = 1'b1;
          end
          state_d = S_IDLE;
        end else begin
          state_d = (rvalid[lfsr_way] && rdirty[lfsr_way]) ? S_WB : S_RF_REQ;
        end
      end
      S_WB:     if (mem_req_ready) state_d = S_RF_REQ;
      S_RF_REQ: if (mem_req_ready) state_d = S_RF_WAIT;
      S_RF_WAIT: begin
        if (mem_resp_valid) begin
          bank_en[vic_way_q] = 1'b1;
          bank_we[vic_way_q] = 1'b1;
          bank_wdirty        = we_q;
          bank_wline         = fill_line;
          state_d            = S_IDLE;
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    mem_req_valid = (state_q == S_WB) || (state_q == S_RF_REQ);
    mem_req_we    = (state_q == S_WB);
    mem_req_addr  = (state_q == S_WB) ? vic_la_q : la_q;
    mem_req_wdata = vic_line_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      we_q        <= 1'b0;
      la_q        <= '0;
      wsel_q      <= '0;
      wdata_q     <= '0;
      be_q        <= '0;
      sdid_q      <= '0;
      bt_q        <= '0;
      vic_way_q   <= '0;
      vic_la_q    <= '0;
      vic_line_q  <= '0;
      resp_valid  <= 1'b0;
      resp_rdata  <= '0;
      resp_hit    <= 1'b0;
      resp_way    <= '0;
      resp_row    <= '0;
    end else begin
      state_q    <= state_d;
      resp_valid <= 1'b0;
      if (accept) begin
        we_q    <= req_we;
        la_q    <= req_addr[ADDR_W-1:OFF_W];
        wsel_q  <= req_addr[OFF_W-1 -: WSEL_W];
        wdata_q <= req_wdata;
        be_q    <= req_be;
        sdid_q  <= cur_sdid;
        bt_q    <= ctx_bt;
      end
      if (state_q == S_LOOKUP) begin
        if (hit) begin
          resp_valid <= 1'b1;
          resp_rdata <= hit_line[int'(wsel_q) * WORD_BITS +: WORD_BITS];
          resp_hit   <= 1'b1;
          resp_way   <= hit_way;
          resp_row   <= row[hit_way];
        end else begin
          vic_way_q   <= lfsr_way;
          vic_la_q    <= rtag[lfsr_way][LA_W-1:0];
          vic_line_q  <= rline[lfsr_way];
        end
      end
      if (state_q == S_RF_WAIT && mem_resp_valid) begin
        resp_valid <= 1'b1;
        resp_rdata <= fill_line[int'(wsel_q) * WORD_BITS +: WORD_BITS];
        resp_hit   <= 1'b0;
        resp_way   <= vic_way_q;
        resp_row   <= row[vic_way_q];
      end
    end
  end

  // ---------------- handshake rules ----------------
  // a memory request holds its content until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_we) && $stable(mem_req_addr))
    else $error("galois_cache: memory request changed before it was accepted");
  // no read response without an outstanding read
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> state_q == S_RF_WAIT)
    else $error("galois_cache: unexpected memory response");
  // a line is held at most once per domain
  assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_LOOKUP |-> $onehot0(hit_vec))
    else $error("galois_cache: line found in more than one way");

  initial begin
    assert (ADDR_W >= OFF_W + N) else $error("galois_cache: ADDR_W too small");
    assert (WORD_BITS * (2 ** WSEL_W) == LINE_W) else $error("galois_cache: line is not a whole number of words");
  end

endmodule
