// tb_ivn_mat_vec -- self-checking test of the 6-MAC matrix-vector unit.
// Random Q16.16 matrices and vectors are multiplied; every output element is
// compared with a testbench dot product (64-bit, shift by 16, saturate) and
// the start-to-done latency of N+2 cycles is checked.
module tb_ivn_mat_vec;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic signed [31:0] m [N][N], v [N], y [N];
  int checks = 0, failures = 0;

  ivn_mat_vec #(.N(N), .W(32), .FRAC(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [31:0] exp_y [N];
    logic signed [63:0] s;
    int cyc;
    for (int i = 0; i < N; i++) begin v[i] = '0; for (int j = 0; j < N; j++) m[i][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      for (int i = 0; i < N; i++) begin
        v[i] = $signed($urandom_range(0, 32'h00ff_ffff)) - 32'sh0080_0000;
        for (int j = 0; j < N; j++) m[i][j] = $signed($urandom_range(0, 32'h00ff_ffff)) - 32'sh0080_0000;
      end
      if (t == 0) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) m[i][j] = 32'sh7fff_ffff;
      for (int i = 0; i < N; i++) begin
        s = '0;
        for (int k = 0; k < N; k++) s += 64'(m[i][k]) * 64'(v[k]);
        s = s >>> 16;
        exp_y[i] = (s > 64'sh7fffffff) ? 32'sh7fffffff : (s < -64'sh80000000) ? 32'sh80000000 : s[31:0];
      end
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      for (int i = 0; i < N; i++) begin v[i] = '0; for (int j = 0; j < N; j++) m[i][j] = '0; end
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != N + 2) begin failures++; $display("latency %0d expected %0d", cyc, N + 2); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (y[i] !== exp_y[i]) begin failures++; $display("trial %0d y[%0d]=%0d expected %0d", t, i, y[i], exp_y[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
