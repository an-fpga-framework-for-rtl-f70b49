// tb_ivn_axi_regs -- self-checking test of the software-accessible registers.
// A processor model performs AXI4-Lite writes and reads. Checks: the CTRL
// bits read back and reach ctl_start / ctl_ready / ctl_send, byte strobes
// are honoured, STATUS reflects the state and done inputs, the six result
// registers return their inputs, data-window writes reach the buffer port
// (address and data) only while load_en is high, and responses are held
// while the master stalls BREADY / RREADY.
module tb_ivn_axi_regs;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        ctl_start, ctl_ready, ctl_send;
  logic [1:0]  state = 2'd0;
  logic        load_en = 1'b0, core_done = 1'b0;
  logic [31:0] result [N];
  logic        buf_we;
  logic [6:0]  buf_waddr;
  logic [31:0] buf_wdata;
  int checks = 0, failures = 0;
  int buf_writes = 0;
  logic [31:0] seen [128];

  ivn_axi_regs #(.N(N), .ADDR_W(10), .BUF_AW(7)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .ctl_start, .ctl_ready, .ctl_send, .state, .load_en, .core_done, .result,
    .buf_we, .buf_waddr, .buf_wdata
  );

  ivn_ps_model #(.ADDR_W(10)) ps (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready
  );

  always #5 clk = ~clk;

  always @(posedge clk) if (buf_we) begin
    buf_writes++;
    seen[buf_waddr] <= buf_wdata;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp_v);
    end
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] words [78];
    for (int i = 0; i < N; i++) result[i] = $urandom;
    for (int i = 0; i < 128; i++) seen[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // CTRL
    ps.write('h000, 32'h3);
    ps.read('h000, d);
    expect_eq("ctrl readback", d, 32'h3);
    expect_eq("ctl bits", {29'd0, ctl_send, ctl_ready, ctl_start}, 32'h3);
    ps.write('h000, 32'h4, 4'h0);                 // no strobes: no change
    ps.read('h000, d);
    expect_eq("ctrl strobe", d, 32'h3);
    ps.write('h000, 32'h7);
    expect_eq("ctl send", {31'd0, ctl_send}, 32'h1);
    // STATUS
    for (int s = 0; s < 4; s++) begin
      state = 2'(s); core_done = s[0];
      ps.read('h004, d);
      expect_eq("status", d, {29'd0, core_done, state});
    end
    // results
    for (int i = 0; i < N; i++) begin
      ps.read('h040 + 4*i, d);
      expect_eq("result", d, result[i]);
    end
    ps.read('h0f0, d);
    expect_eq("unmapped", d, 32'h0);
    // data window while load_en is low: dropped
    load_en = 1'b0;
    ps.write('h200 + 4*5, 32'hdead_beef);
    expect_eq("dropped write", 32'(buf_writes), 32'd0);
    // data window while load_en is high
    load_en = 1'b1;
    for (int n = 0; n < 78; n++) begin
      words[n] = $urandom;
      ps.write('h200 + 4*n, words[n]);
    end
    @(negedge clk);
    expect_eq("buffer writes", 32'(buf_writes), 32'd78);
    for (int n = 0; n < 78; n++) expect_eq("buffer word", seen[n], words[n]);
    load_en = 1'b0;
    // response hold under back-pressure
    ps.stall_resp = 1'b1;
    ps.write('h000, 32'h1);
    ps.read('h000, d);
    expect_eq("stalled read", d, 32'h1);
    ps.stall_resp = 1'b0;
    expect_eq("stalled responses held", 32'(ps.stalled_resps), 32'd2);
    expect_eq("bad responses", 32'(ps.bad_resps), 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
