// tb_ivn_transpose -- self-checking test of the streaming transpose.
// Streams random 6x6 matrices in row-major order (with random gaps in
// in_valid) and checks that the output stream is the column-major order of
// each input, that it starts the cycle after the last input word, runs
// without gaps, flags its last word, and holds in_ready low meanwhile.
module tb_ivn_transpose;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_last;
  logic signed [31:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  ivn_transpose #(.N(N), .W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [31:0] mtx [N*N];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) begin
      for (int e = 0; e < N*N; e++) mtx[e] = $signed($urandom);
      for (int e = 0; e < N*N; e++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1; in_data = mtx[e];
        checks++;
        if (!in_ready) begin failures++; $display("in_ready low while loading"); end
      end
      @(negedge clk); in_valid = 1'b0; in_data = '0;
      // first output must be present now
      for (int col = 0; col < N; col++)
        for (int row = 0; row < N; row++) begin
          checks++;
          if (!out_valid || in_ready || out_data !== mtx[row*N + col] ||
              out_last !== (row == N-1 && col == N-1)) begin
            failures++;
            if (failures < 10) $display("trial %0d out (%0d,%0d): valid=%b data=%h exp %h", t, row, col, out_valid, out_data, mtx[row*N+col]);
          end
          @(negedge clk);
        end
      checks++;
      if (out_valid) begin failures++; $display("out_valid stays high"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
