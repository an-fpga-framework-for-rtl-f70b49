// tb_ivn_data_buffer -- self-checking test of the input block memory.
// Writes random words to random addresses while reading random addresses,
// and checks every read (one-cycle latency, old data on a same-cycle
// write) against a testbench copy of the memory.
module tb_ivn_data_buffer;
  logic clk = 1'b0, we = 1'b0;
  logic [6:0]  waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [128];
  int checks = 0, failures = 0;

  ivn_data_buffer #(.DEPTH(128), .W(32), .AW(7)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expd;
    // initialise every word
    for (int a = 0; a < 128; a++) begin
      @(negedge clk); we = 1'b1; waddr = 7'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 1) != 0);
      waddr = 7'($urandom_range(0, 127));
      wdata = $urandom;
      raddr = (n % 5 == 0) ? waddr : 7'($urandom_range(0, 127));
      expd  = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expd) begin
        failures++;
        if (failures < 10) $display("read %0d: %h expected %h", raddr, rdata, expd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
