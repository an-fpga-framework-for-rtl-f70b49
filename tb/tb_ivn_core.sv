// tb_ivn_core -- end-to-end test of the least-squares core alone.
// A testbench memory with one-cycle read latency stands in for the input
// buffer. For each of the 21 samples of the axial motion workload (one every
// 0.5 s over 10 s) it loads quantised H, R and y, pulses 'go', waits for
// 'done', and compares the six rates with a double-precision weighted least
// squares solution of the same quantised inputs: each must agree within
// 1 % of |x| plus 2e-3 absolute. It also counts the cycles from 'go' to
// 'done' (checked against 7.1 us at an assumed 100 MHz clock, 710 cycles)
// and checks that the transpose ran beside the first inversion and the
// second multiplication beside the first matrix-vector product.
module tb_ivn_core;
  import ivn_tb_pkg::*;
  localparam int NS = 21;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0, busy, done;
  logic [6:0]  buf_raddr;
  logic [31:0] buf_rdata;
  logic signed [31:0] x [N];
  logic [31:0] mem [128];
  int checks = 0, failures = 0;
  int overlap_tp_inv = 0, overlap_mm_mv = 0;

  ivn_core #(.N(N), .W(32), .FRAC(16), .BUF_AW(7)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) buf_rdata <= mem[buf_raddr];

  always @(posedge clk) begin
    if (dut.u_transpose.out_valid && dut.u_inv.busy) overlap_tp_inv++;
    if (dut.u_mm.busy && dut.u_mv.busy) overlap_mm_mv++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rmat_t h, rc, hq, rq;
    rvec_t y, yq, xr;
    int cyc;
    real got, tol;
    for (int i = 0; i < 128; i++) mem[i] = '0;
    make_h(h);
    make_r(rc);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NS; s++) begin
      make_y(h, s, y);
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          mem[i*N + j]       = to_fx(h[i][j]);
          mem[N*N + i*N + j] = to_fx(rc[i][j]);
          hq[i][j] = from_fx(to_fx(h[i][j]));
          rq[i][j] = from_fx(to_fx(rc[i][j]));
        end
        mem[2*N*N + i] = to_fx(y[i]);
        yq[i] = from_fx(to_fx(y[i]));
      end
      ref_ls(hq, rq, yq, xr);
      @(negedge clk); go = 1'b1;
      @(negedge clk); go = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 710) begin failures++; $display("sample %0d: latency %0d cycles > 710", s, cyc); end
      if (s == 0) $display("core latency go->done: %0d cycles", cyc);
      for (int i = 0; i < N; i++) begin
        got = from_fx(x[i]);
        tol = 0.01 * ((xr[i] < 0.0) ? -xr[i] : xr[i]) + 2.0e-3;
        checks++;
        if ((got - xr[i] > tol) || (xr[i] - got > tol)) begin
          failures++;
          $display("sample %0d x[%0d] = %f, reference %f", s, i, got, xr[i]);
        end
      end
      if (s == 0) $display("x = %f %f %f %f %f %f (ref vz %f wz %f)", from_fx(x[0]), from_fx(x[1]),
                           from_fx(x[2]), from_fx(x[3]), from_fx(x[4]), from_fx(x[5]), xr[2], xr[5]);
    end
    checks++;
    if (overlap_tp_inv == 0) begin failures++; $display("transpose never overlapped the inversion"); end
    checks++;
    if (overlap_mm_mv == 0) begin failures++; $display("multiplier never overlapped the matrix-vector unit"); end
    $display("overlap cycles: transpose||inverse %0d, multiply||mat-vec %0d", overlap_tp_inv, overlap_mm_mv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
