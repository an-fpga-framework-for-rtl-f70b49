// tb_ivn_top -- end-to-end test of the iVisNav estimator at its default size.
// A processor model drives the AXI4-Lite port through the full protocol for
// each of the 21 samples of the axial motion workload (vz = 3 m/s,
// wz = 0.8 rad/s, one sample every 0.5 s for 10 s): set ready and start,
// write H, R and y, set send, poll STATUS until DONE, read the six rates,
// clear CTRL. Every rate is compared with a double-precision weighted least
// squares solution of the same quantised inputs (1 % of |x| + 2e-3), and
// the relative error of vz and wz against it is reported in percent.
//
// It also makes each control mechanism happen and counts it, failing if one
// never does: IDLE holding with only start or only ready set; SEND_DATA
// holding until send; COMPUTE holding until done; DONE holding while start
// stays set and returning to IDLE when it is cleared; data-window writes
// outside SEND_DATA being dropped (a run with no new data must reproduce the
// previous result); the transpose running beside the first inversion and
// the second multiplication beside the first matrix-vector product; and
// bus responses held under back-pressure. The cycles spent in COMPUTE are
// checked against 7.1 us at an assumed 100 MHz clock (710 cycles).
module tb_ivn_top;
  import ivn_tb_pkg::*;
  localparam int NS = 21;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  int checks = 0, failures = 0;
  int n_idle_hold = 0, n_send_hold = 0, n_compute_hold = 0, n_done_hold = 0, n_done_exit = 0;
  int n_dropped = 0, n_tp_inv = 0, n_mm_mv = 0;
  int compute_cycles = 0, max_compute = 0;

  ivn_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready)
  );

  ivn_ps_model #(.ADDR_W(10)) ps (
    .clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready
  );

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (dut.u_core.u_transpose.out_valid && dut.u_core.u_inv.busy) n_tp_inv++;
    if (dut.u_core.u_mm.busy && dut.u_core.u_mv.busy) n_mm_mv++;
    if (dut.state == ivn_pkg::ST_COMPUTE) compute_cycles++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(input string what, input logic [1:0] exp_s);
    logic [31:0] d;
    ps.read('h004, d);
    checks++;
    if (d[1:0] !== exp_s) begin failures++; $display("%s: state %0d expected %0d", what, d[1:0], exp_s); end
  endtask

  // One complete estimation; returns the six raw result words.
  task automatic run_once(input bit load, input logic [31:0] words [78], output logic [31:0] res [N]);
    logic [31:0] d;
    ps.write('h000, 32'h1);                      // start only
    expect_state("start only", 2'd0); n_idle_hold++;
    ps.write('h000, 32'h2);                      // ready only
    expect_state("ready only", 2'd0); n_idle_hold++;
    ps.write('h000, 32'h3);                      // start and ready
    expect_state("start+ready", 2'd1);
    if (load) for (int n = 0; n < 78; n++) begin
      ps.write('h200 + 4*n, words[n]);
      if (n == 40) begin expect_state("loading", 2'd1); n_send_hold++; end
    end
    compute_cycles = 0;
    ps.write('h000, 32'h7);                      // send
    do begin
      ps.read('h004, d);
      if (d[1:0] == 2'd2) n_compute_hold++;
    end while (d[1:0] != 2'd3);
    checks++;
    if (!d[2]) begin failures++; $display("done flag not set in DONE"); end
    if (compute_cycles > max_compute) max_compute = compute_cycles;
    for (int i = 0; i < N; i++) ps.read('h040 + 4*i, res[i]);
    expect_state("done hold", 2'd3); n_done_hold++;
    ps.write('h000, 32'h0);
    expect_state("done exit", 2'd0); n_done_exit++;
  endtask

  initial begin
    rmat_t h, rc, hq, rq;
    rvec_t y, yq, xr;
    logic [31:0] words [78], junk [78];
    logic [31:0] res [N], res2 [N];
    real got, tol, pe_vz, pe_wz, max_vz = 0.0, max_wz = 0.0;
    make_h(h);
    make_r(rc);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NS; s++) begin
      make_y(h, s, y);
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          words[i*N + j]       = to_fx(h[i][j]);
          words[N*N + i*N + j] = to_fx(rc[i][j]);
          hq[i][j] = from_fx(to_fx(h[i][j]));
          rq[i][j] = from_fx(to_fx(rc[i][j]));
        end
        words[2*N*N + i] = to_fx(y[i]);
        yq[i] = from_fx(to_fx(y[i]));
      end
      ref_ls(hq, rq, yq, xr);
      if (s == 3) ps.stall_resp = 1'b1;
      run_once(1'b1, words, res);
      ps.stall_resp = 1'b0;
      for (int i = 0; i < N; i++) begin
        got = from_fx(res[i]);
        tol = 0.01 * ((xr[i] < 0.0) ? -xr[i] : xr[i]) + 2.0e-3;
        checks++;
        if ((got - xr[i] > tol) || (xr[i] - got > tol)) begin
          failures++;
          $display("sample %0d x[%0d] = %f, reference %f", s, i, got, xr[i]);
        end
      end
      pe_vz = 100.0 * ((from_fx(res[2]) - xr[2]) / xr[2]);
      pe_wz = 100.0 * ((from_fx(res[5]) - xr[5]) / xr[5]);
      if (pe_vz < 0.0) pe_vz = -pe_vz;
      if (pe_wz < 0.0) pe_wz = -pe_wz;
      if (pe_vz > max_vz) max_vz = pe_vz;
      if (pe_wz > max_wz) max_wz = pe_wz;
      $display("t=%4.1f s  vz=%f (ref %f)  wz=%f (ref %f)", 0.5 * s,
               from_fx(res[2]), xr[2], from_fx(res[5]), xr[5]);
      // Writes outside SEND_DATA must be dropped: write junk while IDLE,
      // then run without loading; the result must not change.
      if (s == NS - 1) begin
        for (int n = 0; n < 78; n++) begin
          junk[n] = $urandom;
          ps.write('h200 + 4*n, junk[n]);
        end
        run_once(1'b0, junk, res2);
        checks++;
        if (res2 != res) begin failures++; $display("IDLE writes reached the buffer"); end
        else n_dropped++;
      end
    end
    $display("max |error| vs double precision: vz %f %%, wz %f %%", max_vz, max_wz);
    $display("cycles in COMPUTE: %0d", max_compute);
    checks++;
    if (max_compute > 710) begin failures++; $display("COMPUTE took %0d cycles > 710", max_compute); end
    $display("mechanisms: idle_hold=%0d send_hold=%0d compute_hold=%0d done_hold=%0d done_exit=%0d dropped=%0d tp||inv=%0d mm||mv=%0d resp_stall=%0d",
             n_idle_hold, n_send_hold, n_compute_hold, n_done_hold, n_done_exit, n_dropped, n_tp_inv, n_mm_mv, ps.stalled_resps);
    checks += 9;
    if (n_idle_hold == 0)    begin failures++; $display("IDLE hold never seen"); end
    if (n_send_hold == 0)    begin failures++; $display("SEND_DATA hold never seen"); end
    if (n_compute_hold == 0) begin failures++; $display("COMPUTE hold never seen"); end
    if (n_done_hold == 0)    begin failures++; $display("DONE hold never seen"); end
    if (n_done_exit == 0)    begin failures++; $display("DONE exit never seen"); end
    if (n_dropped == 0)      begin failures++; $display("dropped write never seen"); end
    if (n_tp_inv == 0)       begin failures++; $display("transpose/inverse overlap never seen"); end
    if (n_mm_mv == 0)        begin failures++; $display("multiply/mat-vec overlap never seen"); end
    if (ps.stalled_resps == 0) begin failures++; $display("response stall never seen"); end
    checks++;
    if (ps.bad_resps != 0) begin failures++; $display("error responses"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
