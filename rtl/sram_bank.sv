// sram_bank -- one memory bank of the vector engine (Fig. 4: "N Banks, 1KB").
//
// WORDS x W single-port memory written as an array: a write stores wdata at
// addr on the clock edge; a read (en without we) returns the word at addr on
// rdata one clock later. rdata holds its value between reads. The default
// 512 x 16 bit is the paper's 1 KB; a synthesis flow maps the array to an
// SRAM macro or flops.
module sram_bank #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
