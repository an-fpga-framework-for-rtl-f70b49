// tb_ivn_pe -- self-checking test of the systolic processing element.
// Drives random operand pairs with random enable and clear, keeps a
// reference accumulator in the testbench and checks the accumulator and the
// one-cycle forwarding of both operands after every clock.
module tb_ivn_pe;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic signed [31:0] a_in = '0, b_in = '0, a_out, b_out;
  logic signed [63:0] acc;
  int checks = 0, failures = 0;

  ivn_pe #(.W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [63:0] ref_acc;
    logic signed [31:0] ref_a, ref_b;
    ref_acc = '0; ref_a = '0; ref_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      en   = ($urandom_range(0, 3) != 0);
      clr  = ($urandom_range(0, 40) == 0);
      a_in = $signed($urandom);
      b_in = $signed($urandom);
      if (clr) begin
        ref_acc = '0; ref_a = '0; ref_b = '0;
      end else if (en) begin
        ref_acc = ref_acc + 64'(a_in) * 64'(b_in);
        ref_a = a_in; ref_b = b_in;
      end
      @(posedge clk); #1;
      checks++;
      if (acc !== ref_acc || a_out !== ref_a || b_out !== ref_b) begin
        failures++;
        if (failures < 5) $display("mismatch step %0d: acc %0d exp %0d", n, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
