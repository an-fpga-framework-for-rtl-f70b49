// ivn_mat_inv -- N x N matrix inverse by LDU decomposition in IEEE 754
// single precision, with fixed-point ports.
//
// Following the paper (after Ruan's scalable LU inversion), the inverse is
// computed in three stages:
//   (a) decomposition A = L D U, with L unit lower triangular, D diagonal and
//       U unit upper triangular (Doolittle elimination in place, then
//       D^-1 = 1/diag and U = row-normalised upper part);
//   (b) inversion of the three factors: D^-1 elementwise, L^-1 by forward
//       substitution, U^-1 by backward substitution;
//   (c) A^-1 = U^-1 D^-1 L^-1, summed only over the non-zero terms
//       k >= max(i, j).
// The input is converted from fixed point to float when 'start' is taken,
// and each result element from float to fixed point as it is completed, as
// the paper does at the inverter's ports. No pivoting is done, which suits
// the symmetric positive-definite matrices (R and H' R^-1 H) it is used on.
//
// The paper builds this block with high-level synthesis and does not give
// its schedule. Here one sequencer performs one float operation per cycle
// (a divide, a multiply-subtract, or for stage (c) a double multiply-add)
// on register arrays; that schedule, the float subset (see ivn_fp_pkg) and
// the absence of pivoting are this design's choices.
//
// Timing: start -> done is 1 + (N-1)N(2N-1)/6 + (N-1)N/2 + N + N(N-1)/2
// + 2*(N-1)N(N+1)/6 + N(N+1)(2N+1)/6 + 1 cycles, 254 for N = 6. 'a' is
// read only in the cycle 'start' is taken; 'inv' holds until the next run.
module ivn_mat_inv #(
  parameter int unsigned N    = 6,
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] a [N][N],
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] inv [N][N]
);
  import ivn_fp_pkg::*;

  localparam int unsigned IW = $clog2(N);

  typedef enum logic [2:0] {
    PH_IDLE, PH_DEC, PH_DIAG, PH_UNORM, PH_LINV, PH_UINV, PH_MUL
  } phase_e;

  phase_e  ph;
  f32_t    m   [N][N];   // L below the diagonal, D on it, U above it
  f32_t    li  [N][N];   // L^-1 (unit lower)
  f32_t    ui  [N][N];   // U^-1 (unit upper)
  f32_t    dinv[N];      // D^-1
  f32_t    acc;
  logic [IW-1:0] i, j, k;
  logic          dstep;  // PH_DEC: the multiplier (divide) step of a row

  // One float operation per cycle, selected by phase.
  f32_t mik, mkk, mij, mkj, prod, nxt;
  always_comb begin
    mik  = m[i][k];
    mkk  = m[k][k];
    mij  = m[i][j];
    mkj  = m[k][j];
    prod = F32_ZERO;
    nxt  = F32_ZERO;
    unique case (ph)
      PH_DEC:   nxt = dstep ? f32_div(mik, mkk) : f32_sub(mij, f32_mul(mik, mkj));
      PH_DIAG:  nxt = f32_div(F32_ONE, mkk);
      PH_UNORM: nxt = f32_mul(m[k][j], dinv[k]);
      PH_LINV:  begin prod = f32_mul(mik, li[k][j]); nxt = f32_sub(acc, prod); end
      PH_UINV:  begin prod = f32_mul(mik, ui[k][j]); nxt = f32_sub(acc, prod); end
      PH_MUL:   begin
                  prod = f32_mul(f32_mul(ui[i][k], dinv[k]), li[k][j]);
                  nxt  = f32_add(acc, prod);
                end
      default:  nxt = F32_ZERO;
    endcase
  end

  function automatic logic [IW-1:0] imax(input logic [IW-1:0] p, input logic [IW-1:0] q);
    return (p > q) ? p : q;
  endfunction

  assign busy = (ph != PH_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph    <= PH_IDLE;
      done  <= 1'b0;
      acc   <= F32_ZERO;
      i     <= '0;
      j     <= '0;
      k     <= '0;
      dstep <= 1'b0;
      for (int r = 0; r < N; r++) begin
        dinv[r] <= F32_ZERO;
        for (int c = 0; c < N; c++) begin
          m[r][c]   <= F32_ZERO;
          li[r][c]  <= F32_ZERO;
          ui[r][c]  <= F32_ZERO;
          inv[r][c] <= '0;
        end
      end
    end else begin
      done <= 1'b0;
      unique case (ph)
        PH_IDLE: if (start) begin
          for (int r = 0; r < N; r++)
            for (int c = 0; c < N; c++) begin
              m[r][c]  <= fx_to_f32(a[r][c], FRAC);
              li[r][c] <= (r == c) ? F32_ONE : F32_ZERO;
              ui[r][c] <= (r == c) ? F32_ONE : F32_ZERO;
            end
          ph    <= PH_DEC;
          k     <= '0;
          i     <= IW'(1);
          dstep <= 1'b1;
        end
        // (a) Doolittle elimination: m[i][k] = l_ik, then row update.
        PH_DEC: begin
          if (dstep) begin
            m[i][k] <= nxt;
            j       <= k + 1'b1;
            dstep   <= 1'b0;
          end else begin
            m[i][j] <= nxt;
            if (j == IW'(N-1)) begin
              dstep <= 1'b1;
              if (i == IW'(N-1)) begin
                if (k == IW'(N-2)) begin
                  ph <= PH_DIAG;
                  k  <= '0;
                end else begin
                  k <= k + 1'b1;
                  i <= k + 2'd2;
                end
              end else begin
                i <= i + 1'b1;
              end
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        // D^-1
        PH_DIAG: begin
          dinv[k] <= nxt;
          if (k == IW'(N-1)) begin
            ph <= PH_UNORM;
            k  <= '0;
            j  <= IW'(1);
          end else begin
            k <= k + 1'b1;
          end
        end
        // U = D^-1 * (upper part)
        PH_UNORM: begin
          m[k][j] <= nxt;
          if (j == IW'(N-1)) begin
            if (k == IW'(N-2)) begin
              ph  <= PH_LINV;
              i   <= IW'(1);
              j   <= '0;
              k   <= '0;
              acc <= F32_ZERO;
            end else begin
              k <= k + 1'b1;
              j <= k + 2'd2;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        // (b) L^-1[i][j] = -sum_{k=j}^{i-1} L[i][k] L^-1[k][j]
        PH_LINV: begin
          if (k == i - 1'b1) begin
            li[i][j] <= nxt;
            acc      <= F32_ZERO;
            if (j == i - 1'b1) begin
              if (i == IW'(N-1)) begin
                ph  <= PH_UINV;
                i   <= IW'(N-2);
                j   <= IW'(N-1);
                k   <= IW'(N-1);
              end else begin
                i <= i + 1'b1;
                j <= '0;
                k <= '0;
              end
            end else begin
              j <= j + 1'b1;
              k <= j + 1'b1;
            end
          end else begin
            acc <= nxt;
            k   <= k + 1'b1;
          end
        end
        // (b) U^-1[i][j] = -sum_{k=i+1}^{j} U[i][k] U^-1[k][j], rows bottom-up
        PH_UINV: begin
          if (k == j) begin
            ui[i][j] <= nxt;
            acc      <= F32_ZERO;
            if (j == IW'(N-1)) begin
              if (i == '0) begin
                ph <= PH_MUL;
                i  <= '0;
                j  <= '0;
                k  <= '0;
              end else begin
                i <= i - 1'b1;
                j <= i;
                k <= i;
              end
            end else begin
              j <= j + 1'b1;
              k <= i + 1'b1;
            end
          end else begin
            acc <= nxt;
            k   <= k + 1'b1;
          end
        end
        // (c) A^-1[i][j] = sum_{k>=max(i,j)} U^-1[i][k] D^-1[k] L^-1[k][j]
        PH_MUL: begin
          if (k == IW'(N-1)) begin
            inv[i][j] <= f32_to_fx(nxt, FRAC);
            acc       <= F32_ZERO;
            if (j == IW'(N-1)) begin
              if (i == IW'(N-1)) begin
                ph   <= PH_IDLE;
                done <= 1'b1;
              end else begin
                i <= i + 1'b1;
                j <= '0;
                k <= i + 1'b1;
              end
            end else begin
              j <= j + 1'b1;
              k <= imax(i, j + 1'b1);
            end
          end else begin
            acc <= nxt;
            k   <= k + 1'b1;
          end
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  // The UINV walk starts at i = N-2 with the one-term entry (N-2, N-1); the
  // sequencer relies on N >= 2.
  initial assert (N >= 2) else $error("ivn_mat_inv needs N >= 2");

endmodule
