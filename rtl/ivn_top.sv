// ivn_top -- programmable-logic side of the iVisNav rate estimator.
//
// The processor (outside this module) writes the system matrix H, the
// measurement covariance R and the measurement vector y into the core over
// an AXI4-Lite port, and reads back the least-squares estimate of the six
// relative rates x = [vx vy vz wx wy wz] = (H' R^-1 H)^-1 H' R^-1 y. All
// words are 32-bit Q16.16 fixed point.
//
// Inside, the software-accessible register file (ivn_axi_regs) decodes the
// bus; the state machine (ivn_ctrl_fsm) walks IDLE -> SEND_DATA -> COMPUTE
// -> DONE; words written during SEND_DATA go into the block-memory input
// buffer (ivn_data_buffer); and on the SEND_DATA -> COMPUTE edge the
// least-squares core (ivn_core) reads the buffer and runs. The core's
// completion flag moves the state machine to DONE; the processor polls
// STATUS and reads the results.
//
// Processor protocol: write CTRL = ready|start (3); write the 78 data
// words to 0x200 + 4n; write CTRL = start|ready|send (7); poll STATUS until
// state = DONE; read x at 0x040..0x054; write CTRL = 0 to return to IDLE.
//
// The partition into these blocks and the state machine follow the paper;
// the register map, the AXI4-Lite subset and the buffer layout are this
// design's choices.
//
// The core's 'busy' output is left unread here: STATUS reports the state
// machine's state, which already shows COMPUTE for the same interval. The
// AXI response codes are constant OKAY. Lint reports rst_n as used both
// asynchronously and synchronously because the bus and sequencer assertions
// are disabled while it is low.
module ivn_top #(
  parameter int unsigned N      = 6,
  parameter int unsigned FRAC   = 16,
  parameter int unsigned ADDR_W = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready
);
  import ivn_pkg::*;

  localparam int unsigned BAW = $clog2(2*N*N + N);

  logic              ctl_start, ctl_ready, ctl_send;
  ivn_state_e        state;
  logic              load_en, compute_go;
  logic              core_busy, core_done;
  logic signed [31:0] x [N];
  logic [31:0]       x_u [N];
  logic              buf_we;
  logic [BAW-1:0] buf_waddr, buf_raddr;
  logic [31:0]       buf_wdata, buf_rdata;

  always_comb for (int i = 0; i < N; i++) x_u[i] = x[i];

  ivn_axi_regs #(.N(N), .ADDR_W(ADDR_W), .BUF_AW(BAW)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .ctl_start, .ctl_ready, .ctl_send,
    .state     (state),
    .load_en   (load_en),
    .core_done (core_done),
    .result    (x_u),
    .buf_we, .buf_waddr, .buf_wdata
  );

  ivn_ctrl_fsm u_fsm (
    .clk, .rst_n,
    .start (ctl_start),
    .ready (ctl_ready),
    .send  (ctl_send),
    .done  (core_done),
    .state, .load_en, .compute_go
  );

  ivn_data_buffer #(.DEPTH(1 << BAW), .W(32), .AW(BAW)) u_buf (
    .clk,
    .we    (buf_we),
    .waddr (buf_waddr),
    .wdata (buf_wdata),
    .raddr (buf_raddr),
    .rdata (buf_rdata)
  );

  ivn_core #(.N(N), .W(32), .FRAC(FRAC), .BUF_AW(BAW)) u_core (
    .clk, .rst_n,
    .go        (compute_go),
    .buf_raddr (buf_raddr),
    .buf_rdata (buf_rdata),
    .busy      (core_busy),
    .done      (core_done),
    .x         (x)
  );

endmodule
