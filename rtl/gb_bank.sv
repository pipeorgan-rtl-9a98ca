// gb_bank: one bank of the global buffer, a WORDS x 64-bit SRAM with one
// write port and one read port.
//
// Written as a register array so that synthesis infers a memory; on a real
// chip it is an SRAM macro. Reads are synchronous: rdata holds the word
// addressed in the previous cycle in which re was high. A write and a read of
// the same address in one cycle return the old word. Contents are not
// reset. The two-port organisation is this design's choice; the paper gives
// only the total capacity (1 MB).
module gb_bank #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned W     = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
