// ivn_pe -- processing element of the systolic matrix multiplier.
//
// Each cycle with 'en' high the PE multiplies the operand arriving from its
// left neighbour (a_in) by the operand arriving from above (b_in), adds the
// 64-bit product to its own accumulator, and registers both operands on to
// its right (a_out) and lower (b_out) neighbours. This is the output-
// stationary multiply-and-accumulate cell the paper describes ("PEs perform
// multiply and accumulate operations on the incoming elements and share this
// information immediately with the neighboring PEs"); the stationary-output
// arrangement and the 64-bit accumulator are this design's choices.
//
// Timing: operands and accumulator update on the same clock edge; 'clr'
// (synchronous) zeroes the accumulator and the forwarded operands.
module ivn_pe #(
  parameter int unsigned W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  en,
  input  logic signed [W-1:0]   a_in,
  input  logic signed [W-1:0]   b_in,
  output logic signed [W-1:0]   a_out,
  output logic signed [W-1:0]   b_out,
  output logic signed [2*W-1:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (clr) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (en) begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= acc + (2*W)'(a_in) * (2*W)'(b_in);
    end
  end

endmodule
