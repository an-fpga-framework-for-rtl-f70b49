// ivn_mat_vec -- fixed-point matrix-vector product y = M * v using N
// multiply-and-accumulate units (six for N = 6, as in the paper's diagram).
//
// On 'start' M and v are captured. In each of the following N cycles, column
// k of M and element k of v are presented together, time-aligned, to the N
// MAC units; MAC i adds M[i][k] * v[k] to its 64-bit accumulator. The
// accumulators are then scaled back to fixed point (floor, saturate) and
// 'y' is updated with a one-cycle 'done' pulse. The MAC-per-row structure and
// time-aligned streams follow the paper; the capture-then-stream sequencing
// is this design's choice.
//
// Timing: start -> done = N + 2 cycles (capture, N MAC steps, scale). 'start' is ignored while 'busy'.
module ivn_mat_vec #(
  parameter int unsigned N    = 6,
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] m [N][N],
  input  logic signed [W-1:0] v [N],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] y [N]
);

  localparam int unsigned KW = $clog2(N + 1);

  logic signed [W-1:0]   m_q [N][N];
  logic signed [W-1:0]   v_q [N];
  logic signed [2*W-1:0] acc [N];
  logic [KW-1:0]         k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      k    <= '0;
      for (int i = 0; i < N; i++) begin
        acc[i] <= '0;
        v_q[i] <= '0;
        y[i]   <= '0;
        for (int j = 0; j < N; j++) m_q[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        m_q  <= m;
        v_q  <= v;
        busy <= 1'b1;
        k    <= '0;
        for (int i = 0; i < N; i++) acc[i] <= '0;
      end else if (busy) begin
        if (k == KW'(N)) begin
          for (int i = 0; i < N; i++) y[i] <= ivn_pkg::sat32(acc[i] >>> FRAC);
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          for (int i = 0; i < N; i++)
            acc[i] <= acc[i] + (2*W)'(m_q[i][k]) * (2*W)'(v_q[k]);
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
