// tb_lfsr_repl: the replacement LFSR must follow x^16+x^14+x^13+x^11+1 from
// its seed, hold while disabled, return to its seed after exactly 65535
// steps and, over one period, name each of 8 ways 8192 times (way 0: 8191).
module tb_lfsr_repl;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] way16;
  logic [2:0]  way3;

  lfsr_repl #(.N(16), .SEED(16'h1234)) u16 (.clk, .rst_n, .en, .way(way16));
  lfsr_repl #(.N(3),  .SEED(16'h0001)) u3  (.clk, .rst_n, .en, .way(way3));

  always #5 clk = ~clk;

  task automatic chk(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // reference: Fibonacci-free restatement of the Galois step
  function automatic logic [15:0] step(logic [15:0] v);
    logic fb = v[0];
    logic [15:0] r = {1'b0, v[15:1]};
    if (fb) begin r[15] = ~r[15]; r[13] = ~r[13]; r[12] = ~r[12]; r[10] = ~r[10]; end
    return r;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] exp16 = 16'h1234;
    int unsigned cnt [8] = '{default: 0};
    int unsigned period = 0;
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("seed", way16, 16'h1234);
    chk("hold", way16, 16'h1234);
    en = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      exp16 = step(exp16);
      chk("sequence", way16, exp16);
    end
    en = 0;
    repeat (5) @(negedge clk);
    chk("hold while disabled", way16, exp16);
    // one full period of the N=3 instance, which restarts from seed 1
    rst_n = 0; @(negedge clk); rst_n = 1;
    en = 1;
    do begin
      cnt[way3]++;
      period++;
      @(negedge clk);
    end while (u3.state != 16'h0001 && period < 70000);
    chk("period", period, 65535);
    for (int w = 0; w < 8; w++) chk($sformatf("way %0d count", w), cnt[w], w == 0 ? 8191 : 8192);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
