// ivn_core -- least-squares rate estimator: x = (H' R^-1 H)^-1 H' R^-1 y.
//
// The core holds one instance of each of the paper's four arithmetic units
// (streaming transpose, 6x6 systolic multiplier, floating-point LDU
// inverter, 6-MAC matrix-vector unit) and sequences them in the order of the
// paper's flow diagram:
//
//   load R   (36 words from the buffer)  -> start inverse: R^-1
//   load H   (36 words, also streamed through the transpose: H')   } in
//   load y   (6 words)                                             } parallel
//   wait for R^-1 and H'
//   multiply P = H' R^-1
//   multiply M = P H              and, at the same time, z = P y
//   inverse  M^-1
//   matrix-vector x = M^-1 z
//
// so the transpose runs beside the first inversion, as the two sit side by
// side in the paper's diagram. The diagram prints the final product as
// "[H'R^-1H] H'R^-1 y" and feeds both H'R^-1 and y into the matrix-vector
// unit; this design forms the product as two matrix-vector passes, first
// z = (H'R^-1) y and then x = M^-1 z, with the inverse of M as the paper's
// equation requires. The sequencer itself, the load order and the overlap
// are this design's own.
//
// The factor lambda/(4 pi) of the paper's equation is not applied here: y
// is expected already in range-rate units, prepared by the processor, which
// the paper says performs the measurement pre-processing.
//
// Interface: 'go' (one-cycle pulse) starts a run; the core then reads the
// input buffer through buf_raddr / buf_rdata (one-cycle read latency).
// 'done' rises when x is valid and stays high until the next 'go'; 'busy' is
// high in between. For N = 6, go -> done takes about 600 cycles, dominated
// by the two 254-cycle inversions. An assertion checks that the transpose
// never refuses a word while H is loaded; it is disabled during reset, which
// is why lint reports rst_n as used both asynchronously and synchronously.
module ivn_core #(
  parameter int unsigned N      = 6,
  parameter int unsigned W      = 32,
  parameter int unsigned FRAC   = 16,
  parameter int unsigned BUF_AW = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                go,
  output logic [BUF_AW-1:0]   buf_raddr,
  input  logic [W-1:0]        buf_rdata,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] x [N]
);

  localparam int unsigned NN  = N*N;
  localparam int unsigned NW  = 2*NN + N;              // words read
  localparam int unsigned CW  = $clog2(NW + 1);
  // buffer word addresses of the three inputs
  localparam int unsigned A_H = 0;
  localparam int unsigned A_R = NN;
  localparam int unsigned A_Y = 2*NN;

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_INV_R, S_MM1, S_MM2, S_INV_M, S_MV2
  } seq_e;

  seq_e seq;

  // ---------------- operand registers
  logic signed [W-1:0] h  [N][N];
  logic signed [W-1:0] ht [N][N];
  logic signed [W-1:0] r  [N][N];
  logic signed [W-1:0] y  [N];

  // ---------------- load counters
  // Read order: R (n = 0..NN-1), H (NN..2NN-1), y (2NN..NW-1).
  logic [CW-1:0] rd_n;          // next word to request
  logic [CW-1:0] cap_n;         // word arriving this cycle
  logic          rd_act, cap_act;
  logic [CW-1:0] ht_n;          // transpose output word count
  logic          ht_done, inv_r_started;

  always_comb begin
    if (int'(rd_n) < NN)       buf_raddr = BUF_AW'(A_R + int'(rd_n));
    else if (int'(rd_n) < 2*NN) buf_raddr = BUF_AW'(A_H + int'(rd_n) - NN);
    else                       buf_raddr = BUF_AW'(A_Y + int'(rd_n) - 2*NN);
  end

  // ---------------- arithmetic units
  logic                tp_in_valid, tp_in_ready, tp_out_valid, tp_out_last;
  logic signed [W-1:0] tp_out_data;

  logic                mm_start, mm_busy, mm_done;
  logic signed [W-1:0] mm_a [N][N], mm_b [N][N], mm_c [N][N];

  logic                inv_start, inv_busy, inv_done;
  logic signed [W-1:0] inv_a [N][N], inv_q [N][N];

  logic                mv_start, mv_busy, mv_done;
  logic signed [W-1:0] mv_m [N][N], mv_v [N], mv_y [N];

  ivn_transpose #(.N(N), .W(W)) u_transpose (
    .clk, .rst_n,
    .in_valid (tp_in_valid), .in_ready (tp_in_ready), .in_data (buf_rdata),
    .out_valid(tp_out_valid), .out_last (tp_out_last), .out_data(tp_out_data)
  );

  ivn_systolic_mm #(.N(N), .W(W), .FRAC(FRAC)) u_mm (
    .clk, .rst_n, .start(mm_start), .a(mm_a), .b(mm_b),
    .busy(mm_busy), .done(mm_done), .c(mm_c)
  );

  ivn_mat_inv #(.N(N), .W(W), .FRAC(FRAC)) u_inv (
    .clk, .rst_n, .start(inv_start), .a(inv_a),
    .busy(inv_busy), .done(inv_done), .inv(inv_q)
  );

  ivn_mat_vec #(.N(N), .W(W), .FRAC(FRAC)) u_mv (
    .clk, .rst_n, .start(mv_start), .m(mv_m), .v(mv_v),
    .busy(mv_busy), .done(mv_done), .y(mv_y)
  );

  // H words (second block of the read order) feed the transpose directly.
  assign tp_in_valid = cap_act && int'(cap_n) >= NN && int'(cap_n) < 2*NN;

  // Operand selection: each unit captures its operands on its start cycle.
  //   multiplier : (H', R^-1) in S_MM1 ; (P, H) in S_MM2
  //   inverter   : R in S_INV_R        ; M in S_INV_M
  //   mat-vec    : (P, y) in S_MM2     ; (M^-1, z) in S_MV2
  always_comb begin
    mm_a  = (seq == S_MM1) ? ht : mm_c;
    mm_b  = (seq == S_MM1) ? inv_q : h;
    inv_a = (seq == S_INV_M) ? mm_c : r;
    mv_m  = (seq == S_MV2) ? inv_q : mm_c;
    mv_v  = (seq == S_MV2) ? mv_y : y;
  end

  // ---------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq           <= S_IDLE;
      busy          <= 1'b0;
      done          <= 1'b0;
      rd_n          <= '0;
      cap_n         <= '0;
      rd_act        <= 1'b0;
      cap_act       <= 1'b0;
      ht_n          <= '0;
      ht_done       <= 1'b0;
      inv_r_started <= 1'b0;
      mm_start      <= 1'b0;
      inv_start     <= 1'b0;
      mv_start      <= 1'b0;
      for (int i = 0; i < N; i++) begin
        x[i] <= '0;
        y[i] <= '0;
        for (int j = 0; j < N; j++) begin
          h[i][j]  <= '0;
          ht[i][j] <= '0;
          r[i][j]  <= '0;
        end
      end
    end else begin
      mm_start  <= 1'b0;
      inv_start <= 1'b0;
      mv_start  <= 1'b0;

      // buffer read pipeline (active in S_LOAD and while H' / y still arrive)
      cap_act <= rd_act;
      cap_n   <= rd_n;
      if (rd_act) begin
        if (int'(rd_n) == NW - 1) rd_act <= 1'b0;
        rd_n <= rd_n + 1'b1;
      end
      if (cap_act) begin
        if (int'(cap_n) < NN)
          r[int'(cap_n) / N][int'(cap_n) % N] <= buf_rdata;
        else if (int'(cap_n) < 2*NN)
          h[(int'(cap_n) - NN) / N][(int'(cap_n) - NN) % N] <= buf_rdata;
        else
          y[int'(cap_n) - 2*NN] <= buf_rdata;
      end
      if (tp_out_valid) begin
        ht[int'(ht_n) / N][int'(ht_n) % N] <= tp_out_data;
        ht_n <= ht_n + 1'b1;
        if (tp_out_last) ht_done <= 1'b1;
      end

      unique case (seq)
        S_IDLE: if (go) begin
          seq           <= S_LOAD;
          busy          <= 1'b1;
          done          <= 1'b0;
          rd_n          <= '0;
          rd_act        <= 1'b1;
          ht_n          <= '0;
          ht_done       <= 1'b0;
          inv_r_started <= 1'b0;
        end
        // R arrives first; its inversion starts as soon as it is complete,
        // while H streams through the transpose.
        S_LOAD: begin
          if (!inv_r_started && cap_act && int'(cap_n) == NN - 1) begin
            // last R word lands this cycle; start the inverter next cycle
            inv_r_started <= 1'b1;
            inv_start     <= 1'b1;
            seq           <= S_INV_R;
          end
        end
        S_INV_R: if (inv_done || (!inv_busy && !inv_start)) begin
          if (ht_done && !rd_act && !cap_act) begin
            mm_start <= 1'b1;
            seq      <= S_MM1;
          end
        end
        S_MM1: if (mm_done) begin
          // P = H' R^-1 is on mm_c: start M = P H and z = P y together
          mm_start <= 1'b1;
          mv_start <= 1'b1;
          seq      <= S_MM2;
        end
        S_MM2: if (!mm_start && !mm_busy && !mv_busy && !mv_start) begin
          inv_start <= 1'b1;
          seq       <= S_INV_M;
        end
        S_INV_M: if (inv_done) begin
          mv_start <= 1'b1;
          seq      <= S_MV2;
        end
        S_MV2: if (mv_done) begin
          x    <= mv_y;
          busy <= 1'b0;
          done <= 1'b1;
          seq  <= S_IDLE;
        end
        default: seq <= S_IDLE;
      endcase
    end
  end

  // The transpose never refuses a word: H is streamed in only when it is idle.
  a_tp_ready: assert property (@(posedge clk) disable iff (!rst_n)
                tp_in_valid |-> tp_in_ready);

endmodule
