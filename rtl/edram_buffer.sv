// edram_buffer: the tile's input buffer (eDRAM in silicon), written as a
// memory array with one write port and one read port of 16-bit words.
//
// Default 8192 words = 16 KB, the conv-tile size chosen in the paper;
// classifier tiles use 4 KB (WORDS = 2048). Read data appears one cycle after
// `re` (registered output, held otherwise). A write and a read of the same
// address in one cycle return the old word. Refresh and the eDRAM bank
// structure are not modelled. The size follows the paper; the port
// arrangement and latency are this design's own.
module edram_buffer #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
