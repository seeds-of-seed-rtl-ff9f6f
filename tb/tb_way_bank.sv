// tb_way_bank: random reads and writes against a reference array. After
// reset every row must read as invalid; a read returns the row one clock
// later and holds it until the next read, even if that row is written
// meanwhile.
module tb_way_bank;

  localparam int ROWS = 8, TW = 12, LW = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en = 0, we = 0, wvalid = 0, wdirty = 0;
  logic [2:0] addr = '0;
  logic [TW-1:0] wtag = '0, rtag;
  logic [LW-1:0] wline = '0, rline;
  logic rvalid, rdirty;

  way_bank #(.ROWS(ROWS), .TAG_W(TW), .LINE_W(LW)) dut (.*);

  always #5 clk = ~clk;

  logic          m_valid [ROWS];
  logic          m_dirty [ROWS];
  logic [TW-1:0] m_tag   [ROWS];
  logic [LW-1:0] m_line  [ROWS];

  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic          have = 0;
    logic          e_valid = 0, e_dirty = 0;
    logic [TW-1:0] e_tag = '0;
    logic [LW-1:0] e_line = '0;
    for (int r = 0; r < ROWS; r++) m_valid[r] = 0;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); en = 1; we = 0; addr = 3'(r);
      @(negedge clk); en = 0;
      chk("reset invalid", rvalid, 0);
    end
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      en = ($urandom_range(3) != 0);
      we = ($urandom_range(1) == 1);
      addr = 3'($urandom_range(ROWS - 1));
      wvalid = 1'($urandom); wdirty = 1'($urandom);
      wtag = TW'($urandom); wline = {8'($urandom), 32'($urandom)};
      if (en && !we) begin
        // snapshot of the row as the read sees it
        have = 1;
        e_valid = m_valid[addr]; e_dirty = m_dirty[addr]; e_tag = m_tag[addr]; e_line = m_line[addr];
      end else if (en && we) begin
        m_valid[addr] = wvalid; m_dirty[addr] = wdirty; m_tag[addr] = wtag; m_line[addr] = wline;
      end
      @(negedge clk);
      en = 0;
      if (have) begin
        chk("rvalid", rvalid, e_valid);
        if (e_valid) begin
          chk("rdirty", rdirty, e_dirty);
          chk("rtag", rtag, e_tag);
          chk("rline", rline, e_line);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
