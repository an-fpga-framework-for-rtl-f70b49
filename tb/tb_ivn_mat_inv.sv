// tb_ivn_mat_inv -- self-checking test of the LDU floating-point inverter.
// Builds symmetric positive-definite Q16.16 matrices (diagonal, covariance-
// like A = B'B + cI, and the identity), inverts the quantised input in double
// precision with Gauss-Jordan elimination in the testbench, and compares
// every element of the hardware result within a tolerance of
// 4 LSB + 1e-4 relative. It also checks the start-to-done latency of 254
// cycles for N = 6.
module tb_ivn_mat_inv;
  localparam int N = 6;
  localparam real S = 65536.0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic signed [31:0] a [N][N], inv [N][N];
  int checks = 0, failures = 0;

  ivn_mat_inv #(.N(N), .W(32), .FRAC(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real x); return (x < 0.0) ? -x : x; endfunction

  task automatic run(input string tag);
    real g [N][2*N];
    real p, f, got, expv;
    int cyc;
    int exp_lat;
    // reference: Gauss-Jordan with partial pivoting on the quantised input
    for (int i = 0; i < N; i++)
      for (int j = 0; j < 2*N; j++)
        g[i][j] = (j < N) ? $itor(a[i][j]) / S : ((j - N == i) ? 1.0 : 0.0);
    for (int c = 0; c < N; c++) begin
      int piv = c;
      for (int r = c + 1; r < N; r++) if (rabs(g[r][c]) > rabs(g[piv][c])) piv = r;
      for (int j = 0; j < 2*N; j++) begin real tmp = g[c][j]; g[c][j] = g[piv][j]; g[piv][j] = tmp; end
      p = g[c][c];
      for (int j = 0; j < 2*N; j++) g[c][j] /= p;
      for (int r = 0; r < N; r++) if (r != c) begin
        f = g[r][c];
        for (int j = 0; j < 2*N; j++) g[r][j] -= f * g[c][j];
      end
    end
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) a[i][j] = $signed($urandom);
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_lat = 1 + (N-1)*N*(2*N-1)/6 + (N-1)*N/2 + N + N*(N-1)/2 + 2*(N-1)*N*(N+1)/6 + N*(N+1)*(2*N+1)/6;
    checks++;
    if (cyc != exp_lat) begin failures++; $display("%s: latency %0d expected %0d", tag, cyc, exp_lat); end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      got  = $itor(inv[i][j]) / S;
      expv = g[i][j + N];
      checks++;
      if (rabs(got - expv) > 4.0 / S + 1e-4 * rabs(expv)) begin
        failures++;
        if (failures < 10) $display("%s: inv[%0d][%0d]=%f expected %f", tag, i, j, got, expv);
      end
    end
  endtask

  initial begin
    real bm [N][N];
    real s;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) a[i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) a[i][j] = (i == j) ? 32'sh10000 : '0;
    run("identity");
    // diagonal covariance 0.01 .. 0.06 (inverse up to 100)
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) a[i][j] = (i == j) ? 32'($rtoi(0.01 * (i + 1) * S)) : '0;
    run("diagonal");
    for (int t = 0; t < 15; t++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        bm[i][j] = ($itor($urandom_range(0, 2000)) - 1000.0) / 250.0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        s = (i == j) ? 1.0 : 0.0;
        for (int k = 0; k < N; k++) s += bm[k][i] * bm[k][j];
        a[i][j] = 32'($rtoi(s * S));
      end
      // keep it exactly symmetric after quantisation
      for (int i = 0; i < N; i++) for (int j = 0; j < i; j++) a[i][j] = a[j][i];
      run("spd");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
