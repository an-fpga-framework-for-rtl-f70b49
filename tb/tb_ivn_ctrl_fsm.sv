// tb_ivn_ctrl_fsm -- self-checking test of the four-state controller.
// Drives random start / ready / send / done inputs for many cycles and
// compares the state, load_en and compute_go after every clock with a
// reference model of the printed transitions; also walks one directed
// IDLE -> SEND_DATA -> COMPUTE -> DONE -> IDLE cycle.
module tb_ivn_ctrl_fsm;
  import ivn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ready = 1'b0, send = 1'b0, done = 1'b0;
  ivn_state_e state;
  logic load_en, compute_go;
  int checks = 0, failures = 0;
  int visits [4] = '{0, 0, 0, 0};

  ivn_ctrl_fsm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] model_next(logic [1:0] s);
    case (s)
      2'd0: return (start && ready) ? 2'd1 : 2'd0;
      2'd1: return send ? 2'd2 : 2'd1;
      2'd2: return done ? 2'd3 : 2'd2;
      default: return (done && start) ? 2'd3 : 2'd0;
    endcase
  endfunction

  task automatic step_check(input logic [1:0] exp_state);
    @(posedge clk); #1;
    checks++;
    if (state !== ivn_state_e'(exp_state)) begin
      failures++;
      if (failures < 10) $display("state %0d expected %0d", state, exp_state);
    end
    visits[exp_state]++;
  endtask

  initial begin
    logic [1:0] ms;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed walk
    @(negedge clk); start = 1'b1; ready = 1'b0;      // {start,ready} = 10 stays
    step_check(2'd0);
    @(negedge clk); start = 1'b0; ready = 1'b1;      // 01 stays
    step_check(2'd0);
    @(negedge clk); start = 1'b1; ready = 1'b1;
    step_check(2'd1);
    @(negedge clk); checks++; if (!load_en) begin failures++; $display("load_en low in SEND_DATA"); end
    step_check(2'd1);                                // send = 0 stays
    @(negedge clk); send = 1'b1; #1;
    checks++; if (!compute_go) begin failures++; $display("no compute_go"); end
    step_check(2'd2);
    @(negedge clk); send = 1'b0; #1; checks++; if (compute_go || load_en) begin failures++; $display("stray go/load"); end
    step_check(2'd2);                                // done = 0 stays
    @(negedge clk); done = 1'b1;
    step_check(2'd3);
    step_check(2'd3);                                // done & start stay
    @(negedge clk); start = 1'b0;
    step_check(2'd0);
    // random walk against the model
    ms = 2'd0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      start = ($urandom_range(0, 3) != 0);
      ready = ($urandom_range(0, 1) != 0);
      send  = ($urandom_range(0, 2) == 0);
      done  = ($urandom_range(0, 2) == 0);
      #1;
      checks++;
      if (load_en !== (ms == 2'd1) || compute_go !== (ms == 2'd1 && send)) begin
        failures++;
        if (failures < 10) $display("outputs wrong in state %0d", ms);
      end
      ms = model_next(ms);
      step_check(ms);
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (visits[s] == 0) begin failures++; $display("state %0d never visited", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
