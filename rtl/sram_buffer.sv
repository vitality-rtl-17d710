// sram_buffer: one on-chip buffer (the paper has four, for Q, K, V and O, of
// 50 KB each). A word is one token row of DIM data elements (64 x 16 bit =
// 128 bytes), so 50 KB hold DEPTH = 400 rows. One write port and one read port,
// both synchronous; rdata holds the word addressed in the previous cycle with
// re high (one-cycle read latency). Written as a plain array, so that a memory
// compiler macro can replace it. The capacity follows the paper; the row-wide
// word, the two ports and the latency are this design's choices. Contents are
// not reset.
module sram_buffer #(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned DEPTH  = 400,
  parameter int unsigned AW     = vit_pkg::IDX_W
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [DIM*DATA_W-1:0]     wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [DIM*DATA_W-1:0]     rdata
);
  logic [DIM*DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
