// ivn_systolic_mm -- N x N fixed-point matrix multiplier, C = A * B, built as
// an N x N systolic array of ivn_pe cells (36 PEs for N = 6, as in the
// paper's block diagram).
//
// On 'start' the two operand matrices are captured. Row i of A then enters
// the left edge of array row i skewed by i cycles, and column j of B enters
// the top edge of array column j skewed by j cycles, so that A[i][k] and
// B[k][j] meet in PE(i,j) at cycle i+j+k. After 3N-2 feed cycles every PE
// holds the full 64-bit dot product; it is scaled back to Q(W-FRAC).FRAC
// (floor, saturate) and presented on 'c' with a one-cycle 'done' pulse.
// 'c' holds its value until the next 'done'.
//
// Timing: start -> done = 3N cycles (18 for N = 6). 'start' is ignored while
// 'busy'. The systolic arrangement follows the paper; the skewed operand
// feed, the output-stationary dataflow and the scaling rule are this
// design's choices.
module ivn_systolic_mm #(
  parameter int unsigned N    = 6,
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] a [N][N],
  input  logic signed [W-1:0] b [N][N],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] c [N][N]
);

  localparam int unsigned FEED = 3*N - 2;
  localparam int unsigned TW   = $clog2(FEED + 1);

  logic signed [W-1:0]   a_q [N][N];
  logic signed [W-1:0]   b_q [N][N];
  logic [TW-1:0]         t;
  logic                  feeding;
  logic                  pe_clr;

  // Operand wires between PEs: ah[i][j] enters PE(i,j) from the left,
  // bv[i][j] enters PE(i,j) from above.
  logic signed [W-1:0]   ah  [N][N+1];
  logic signed [W-1:0]   bv  [N+1][N];
  logic signed [2*W-1:0] acc [N][N];

  // Skewed edge feed.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      ah[i][0] = '0;
      for (int k = 0; k < N; k++)
        if (feeding && int'(t) == i + k) ah[i][0] = a_q[i][k];
    end
    for (int j = 0; j < N; j++) begin
      bv[0][j] = '0;
      for (int k = 0; k < N; k++)
        if (feeding && int'(t) == k + j) bv[0][j] = b_q[k][j];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      ivn_pe #(.W(W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (pe_clr),
        .en    (feeding),
        .a_in  (ah[i][j]),
        .b_in  (bv[i][j]),
        .a_out (ah[i][j+1]),
        .b_out (bv[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end

  assign pe_clr = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      feeding <= 1'b0;
      done    <= 1'b0;
      t       <= '0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_q[i][j] <= '0;
          b_q[i][j] <= '0;
          c[i][j]   <= '0;
        end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_q     <= a;
        b_q     <= b;
        busy    <= 1'b1;
        feeding <= 1'b1;
        t       <= '0;
      end else if (feeding) begin
        if (t == TW'(FEED - 1)) feeding <= 1'b0;
        t <= t + 1'b1;
      end else if (busy) begin
        // accumulators are final one cycle after the last feed
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            c[i][j] <= ivn_pkg::sat32(acc[i][j] >>> FRAC);
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
