// tb_sdid_ctx: the domain register must show t and b*t one clock after a
// write, hold them while no write occurs, and reset to domain 0.
// GF(16) with b = 7 is used so that the product is not trivial.
module tb_sdid_ctx;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic set_valid = 0;
  logic [3:0] set_sdid = '0, sdid, bt;

  sdid_ctx #(.N(4), .B(7)) dut (.*);

  always #5 clk = ~clk;

  function automatic int unsigned ref_mul(int unsigned a, int unsigned b);
    int unsigned r = 0;
    for (int i = 3; i >= 0; i--) begin
      r = r << 1;
      if (r >= 16) r = r ^ 'b10011;
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  task automatic chk(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned cur = 0;
    repeat (2) @(negedge clk);
    chk("reset sdid", sdid, 0);
    chk("reset bt", bt, 0);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      set_valid = ($urandom_range(1) == 1);
      set_sdid  = 4'($urandom_range(15));
      if (set_valid) cur = set_sdid;
      @(negedge clk);
      chk("sdid", sdid, cur);
      chk("bt", bt, ref_mul(7, cur));
      set_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
