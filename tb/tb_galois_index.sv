// tb_galois_index: checks the skewing permutation Pi(t,s,w) = a*s + b*t*w + c.
//
// 1. GF(4), a = b = 1, c = 0: the 4x4 example layouts of domains 0, 1, x and
//    x+1 (which set of the domain sits in each row of each way) are compared
//    row by row.
// 2. GF(8) with a = 3, b = 5, c = 6: every (t, s, w) is compared with a
//    reference formula; then, over all pairs of distinct domains and all
//    pairs of sets, exactly one way must share a row (diagonalization), and
//    each way must map the sets of one domain onto distinct rows.
// 3. GF(64) at the default size, a = 1, b = 1, c = 0: random (t, s) against
//    the reference, and diagonalization for random domain/set pairs.
module tb_galois_index;

  int checks = 0, failures = 0;

  function automatic int unsigned ref_mul(int unsigned a, int unsigned b, int unsigned n, int unsigned poly);
    int unsigned r = 0;
    for (int i = int'(n) - 1; i >= 0; i--) begin
      r = r << 1;
      if (r >= (1 << n)) r = r ^ poly;
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  task automatic chk(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---- GF(4) ----
  logic [1:0] s2, bt2;
  logic [1:0] idx2 [4];
  galois_index #(.N(2), .POLY(3'b111), .A(1), .C(0)) u_g4 (.s(s2), .bt(bt2), .idx(idx2));

  // FIG[t][row][way] = set label shown in that slot (0, 1, x=2, x+1=3)
  int unsigned FIG [4][4][4] = '{
    '{'{0,0,0,0}, '{1,1,1,1}, '{2,2,2,2}, '{3,3,3,3}},   // domain 0
    '{'{0,1,2,3}, '{1,0,3,2}, '{2,3,0,1}, '{3,2,1,0}},   // domain 1
    '{'{0,2,3,1}, '{1,3,2,0}, '{2,0,1,3}, '{3,1,0,2}},   // domain x
    '{'{0,3,1,2}, '{1,2,0,3}, '{2,1,3,0}, '{3,0,2,1}}    // domain x+1
  };

  // ---- GF(8), a=3, b=5, c=6 ----
  localparam int unsigned A8 = 3, B8 = 5, C8 = 6, P8 = 'b1011;
  logic [2:0] s3, bt3;
  logic [2:0] idx3 [8];
  galois_index #(.N(3), .A(A8), .C(C8)) u_g8 (.s(s3), .bt(bt3), .idx(idx3));
  int unsigned tab8 [8][8][8];   // [t][s][w]

  // ---- GF(64) default ----
  logic [5:0] s6, bt6;
  logic [5:0] idx6 [64];
  galois_index u_g64 (.s(s6), .bt(bt6), .idx(idx6));
  logic [5:0] keep6 [64];

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1. figure layouts
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < 4; r++)
        for (int w = 0; w < 4; w++) begin
          bt2 = 2'(t);                  // b = 1
          s2  = 2'(FIG[t][r][w]);
          #1;
          chk($sformatf("GF4 layout t=%0d row=%0d way=%0d", t, r, w), idx2[w], r);
        end

    // 2. GF(8) exhaustive
    for (int t = 0; t < 8; t++)
      for (int s = 0; s < 8; s++) begin
        bt3 = 3'(ref_mul(B8, t, 3, P8));
        s3  = 3'(s);
        #1;
        for (int w = 0; w < 8; w++) begin
          tab8[t][s][w] = idx3[w];
          chk("GF8 formula", idx3[w],
              ref_mul(A8, s, 3, P8) ^ ref_mul(ref_mul(B8, t, 3, P8), w, 3, P8) ^ C8);
        end
      end
    for (int t = 0; t < 8; t++)
      for (int t2 = 0; t2 < 8; t2++) begin
        if (t == t2) continue;
        for (int s = 0; s < 8; s++)
          for (int s2i = 0; s2i < 8; s2i++) begin
            int n;
            n = 0;
            for (int w = 0; w < 8; w++) if (tab8[t][s][w] == tab8[t2][s2i][w]) n++;
            chk("GF8 diagonalization", n, 1);
          end
      end
    for (int t = 0; t < 8; t++)
      for (int w = 0; w < 8; w++) begin
        logic [7:0] seen;
        seen = '0;
        for (int s = 0; s < 8; s++) seen[tab8[t][s][w]] = 1'b1;
        chk("GF8 bijection", seen, 8'hFF);
      end

    // 3. GF(64)
    for (int k = 0; k < 300; k++) begin
      int unsigned t, t2, sa, sb;
      int n;
      t  = $urandom_range(63); t2 = $urandom_range(63);
      sa = $urandom_range(63); sb = $urandom_range(63);
      n  = 0;
      if (t2 == t) t2 = (t + 1) % 64;
      bt6 = 6'(t); s6 = 6'(sa); #1;
      for (int w = 0; w < 64; w++) begin
        keep6[w] = idx6[w];
        chk("GF64 formula", idx6[w], sa ^ ref_mul(t, w, 6, 'b1000011));
      end
      bt6 = 6'(t2); s6 = 6'(sb); #1;
      for (int w = 0; w < 64; w++) if (keep6[w] == idx6[w]) n++;
      chk("GF64 diagonalization", n, 1);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
