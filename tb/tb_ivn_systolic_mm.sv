// tb_ivn_systolic_mm -- self-checking test of the 6x6 systolic multiplier.
// Multiplies identity, integer and random Q16.16 matrices, compares every
// element with a product computed in the testbench (64-bit dot product,
// arithmetic shift by 16, saturation) and checks the start-to-done latency
// of 3N cycles.
module tb_ivn_systolic_mm;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic signed [31:0] a [N][N], b [N][N], c [N][N];
  int checks = 0, failures = 0;

  ivn_systolic_mm #(.N(N), .W(32), .FRAC(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [31:0] ref_elem(int i, int j);
    logic signed [63:0] s;
    s = '0;
    for (int k = 0; k < N; k++) s += 64'(a[i][k]) * 64'(b[k][j]);
    s = s >>> 16;
    if (s > 64'sh7fffffff) return 32'sh7fffffff;
    if (s < -64'sh80000000) return 32'sh80000000;
    return s[31:0];
  endfunction

  task automatic run(input string tag);
    logic signed [31:0] exp_c [N][N];
    int cyc;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) exp_c[i][j] = ref_elem(i, j);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    // scramble inputs to show they were captured
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin a[i][j] = $signed($urandom); b[i][j] = $signed($urandom); end
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 3*N) begin failures++; $display("%s: latency %0d, expected %0d", tag, cyc, 3*N); end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++;
      if (c[i][j] !== exp_c[i][j]) begin
        failures++;
        if (failures < 10) $display("%s: c[%0d][%0d]=%0d expected %0d", tag, i, j, c[i][j], exp_c[i][j]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin a[i][j] = '0; b[i][j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // identity times integer matrix
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      a[i][j] = (i == j) ? 32'sh10000 : '0;
      b[i][j] = 32'(i*N + j - 17) <<< 16;
    end
    run("identity");
    // integer matrices
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      a[i][j] = 32'(i - j) <<< 16;
      b[i][j] = 32'(i + 2*j - 3) <<< 16;
    end
    run("integer");
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        a[i][j] = $signed($urandom_range(0, 32'h000f_ffff)) - 32'sh0008_0000;
        b[i][j] = $signed($urandom_range(0, 32'h000f_ffff)) - 32'sh0008_0000;
      end
      run("random");
    end
    // saturation
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      a[i][j] = 32'sh4000_0000; b[i][j] = (i == j) ? 32'sh7fff_0000 : 32'sh0100_0000;
    end
    run("saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
