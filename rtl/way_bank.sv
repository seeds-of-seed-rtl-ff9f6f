// way_bank: one way of the skewed cache, with its own row address.
//
// In a skewed cache every way is read at a different row (the skewing
// function gives one row per way), so each way is a bank of its own: a tag
// array, a data array and valid/dirty bits, all addressed by this bank's
// row. The tag and data arrays are plain memories (no reset); valid and
// dirty are flip-flops so that reset empties the way.
//
// Interface: when en is high and we is low the row addr is read, and
// rvalid/rdirty/rtag/rline hold that row from the next clock on until the
// next read. When en and we are high the row is written with wvalid,
// wdirty, wtag and wline (whole entry; the controller merges partial
// writes). Reads and writes take one clock. The split into tag and data
// arrays is conventional; the paper does not describe the arrays.
module way_bank #(
  parameter int unsigned ROWS   = 64,
  parameter int unsigned TAG_W  = 32,
  parameter int unsigned LINE_W = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] addr,
  input  logic                    wvalid,
  input  logic                    wdirty,
  input  logic [TAG_W-1:0]        wtag,
  input  logic [LINE_W-1:0]       wline,
  output logic                    rvalid,
  output logic                    rdirty,
  output logic [TAG_W-1:0]        rtag,
  output logic [LINE_W-1:0]       rline
);

  logic [TAG_W-1:0]  tag_mem  [ROWS];
  logic [LINE_W-1:0] data_mem [ROWS];
  logic [ROWS-1:0]   valid_q;
  logic [ROWS-1:0]   dirty_q;

  // tag and data arrays: synchronous read, synchronous write
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        tag_mem[addr]  <= wtag;
        data_mem[addr] <= wline;
      end else begin
        rtag  <= tag_mem[addr];
        rline <= data_mem[addr];
      end
    end
  end

  // state bits: reset to empty
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      dirty_q <= '0;
      rvalid  <= 1'b0;
      rdirty  <= 1'b0;
    end else if (en) begin
      if (we) begin
        valid_q[addr] <= wvalid;
        dirty_q[addr] <= wdirty;
      end else begin
        rvalid <= valid_q[addr];
        rdirty <= dirty_q[addr];
      end
    end
  end

endmodule
