// relu_buffer -- the ReLU path of Fig. 1: a mux controlled by the sign bit
// (x or 0) followed by a buffer register.
//
// y <= (x < 0) ? 0 : x on every clock edge where en is high; y holds
// otherwise. One cycle of latency. The register is this design's reading of
// the "Buffer" symbol in the figure. The output is never negative, so its
// sign bit is constant 0 and synthesis reports it as an idle output bit.
module relu_buffer #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= x[W-1] ? '0 : x;
  end

endmodule
