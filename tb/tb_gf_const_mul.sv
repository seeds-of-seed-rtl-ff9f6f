// tb_gf_const_mul: exhaustive check of the constant GF(2^N) multiplier.
//
// Several instances (different fields and constants) are driven with every
// input value and compared with a bit-serial reference that reduces after
// each shift (a different algorithm from the unit's full product followed by
// top-down reduction). Known products from the 4x4 example layout
// (x*x = x+1 and x*(x+1) = 1 in GF(4)) and from GF(16) are checked too.
module tb_gf_const_mul;

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

  // GF(4) x^2+x+1, K = x (2) and x+1 (3)
  logic [1:0] x2, y2a, y2b;
  gf_const_mul #(.N(2), .POLY(3'b111), .K(2)) u_g4a (.x(x2), .y(y2a));
  gf_const_mul #(.N(2), .POLY(3'b111), .K(3)) u_g4b (.x(x2), .y(y2b));
  // GF(8), GF(16), GF(32), GF(64), GF(128) from the polynomial table
  logic [2:0] x3, y3;
  gf_const_mul #(.N(3), .K(5))   u_g8   (.x(x3), .y(y3));
  logic [3:0] x4, y4;
  gf_const_mul #(.N(4), .K(8))   u_g16  (.x(x4), .y(y4));
  logic [4:0] x5, y5;
  gf_const_mul #(.N(5), .K(29))  u_g32  (.x(x5), .y(y5));
  logic [5:0] x6, y6, y6b;
  gf_const_mul #(.N(6), .K(63))  u_g64  (.x(x6), .y(y6));
  gf_const_mul #(.N(6), .K(1))   u_g64b (.x(x6), .y(y6b));
  logic [6:0] x7, y7;
  gf_const_mul #(.N(7), .K(101)) u_g128 (.x(x7), .y(y7));

  task automatic chk(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // known values
    x2 = 2'd2; #1; chk("GF4 x*x", y2a, 3);
    x2 = 2'd3; #1; chk("GF4 x*(x+1)", y2a, 1);
    x2 = 2'd2; #1; chk("GF4 (x+1)*x", y2b, 1);
    x4 = 4'd2; #1; chk("GF16 x^3*x", y4, 3);
    for (int v = 0; v < 4; v++) begin
      x2 = 2'(v); #1;
      chk("GF4 K=2", y2a, ref_mul(2, v, 2, 3'b111));
      chk("GF4 K=3", y2b, ref_mul(3, v, 2, 3'b111));
    end
    for (int v = 0; v < 8; v++)   begin x3 = 3'(v); #1; chk("GF8 K=5",    y3, ref_mul(5, v, 3, 'b1011)); end
    for (int v = 0; v < 16; v++)  begin x4 = 4'(v); #1; chk("GF16 K=8",   y4, ref_mul(8, v, 4, 'b10011)); end
    for (int v = 0; v < 32; v++)  begin x5 = 5'(v); #1; chk("GF32 K=29",  y5, ref_mul(29, v, 5, 'b100101)); end
    for (int v = 0; v < 64; v++)  begin
      x6 = 6'(v); #1;
      chk("GF64 K=63", y6, ref_mul(63, v, 6, 'b1000011));
      chk("GF64 K=1", y6b, v);
    end
    for (int v = 0; v < 128; v++) begin x7 = 7'(v); #1; chk("GF128 K=101", y7, ref_mul(101, v, 7, 'b10000011)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
