// sfm_fifo -- SoftMax FIFO of Fig. 1 (entries e^x1 .. e^xn).
//
// While a SoftMax vector streams in, each exponential is pushed here and
// added to the running sum; once the sum is complete the entries are popped
// one by one as dividends for the linear CORDIC. Synchronous FIFO with a
// show-ahead read: dout is the oldest entry whenever empty is low, pop
// removes it on the clock edge. Push when full and pop when empty are ignored
// (and flagged by assertions). DEPTH (the paper's n) is not given in the
// paper; 16 is this design's default.
module sfm_fifo
  import davinci_pkg::*;
#(
  parameter int unsigned W     = CW,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic                       pop,
  input  logic [W-1:0]               din,
  output logic [W-1:0]               dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + AW'(1);
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + AW'(1);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  // Handshake rules.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
