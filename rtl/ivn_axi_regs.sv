// ivn_axi_regs -- software-accessible register file on an AXI4-Lite slave.
//
// The processor controls the PL only through these registers, as in the
// paper: it writes the control bits and the data words, and polls the state,
// the completion flag and the six estimated rates. The paper names the bus
// AXI4 and the registers "software-accessible"; the AXI4-Lite subset, the
// address map and the bit positions below are this design's choices.
//
//   byte addr        access  contents
//   0x000 CTRL       RW      bit0 start, bit1 ready, bit2 send
//   0x004 STATUS     RO      bits1:0 state (0 IDLE,1 SEND_DATA,2 COMPUTE,
//                            3 DONE), bit2 done
//   0x040..0x054     RO      x[0..5] = vx, vy, vz, wx, wy, wz (Q16.16)
//   0x200..0x3FC     WO      data window: word n goes to buffer word n
//                            (H at n = 0..35, R at 36..71, y at 72..77)
//
// Data-window writes reach the buffer only while 'load_en' is high (state
// SEND_DATA); at other times they are acknowledged and dropped. Unmapped
// reads return 0. All responses are OKAY.
//
// Timing: a write is taken in the cycle both AWVALID and WVALID are high and
// no response is pending; BVALID follows one cycle later and holds until
// BREADY. A read is taken when ARVALID is high and no read data is pending;
// RVALID follows one cycle later and holds until RREADY. The two response-hold
// rules are checked by concurrent assertions that are disabled while rst_n is
// low; that use of rst_n inside an assertion is why lint reports it as both
// an asynchronous reset and a synchronous signal. No circuit uses it so.
// The response codes are constant OKAY and the buffer write data and address
// are wires from the AXI write channel, so those outputs carry no logic here.
// Only write strobe 0 matters, since the three CTRL bits sit in byte 0.
module ivn_axi_regs #(
  parameter int unsigned N      = 6,
  parameter int unsigned ADDR_W = 10,
  parameter int unsigned BUF_AW = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
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
  input  logic              s_axi_rready,
  // to the state machine
  output logic              ctl_start,
  output logic              ctl_ready,
  output logic              ctl_send,
  input  logic [1:0]        state,
  input  logic              load_en,
  input  logic              core_done,
  input  logic [31:0]       result [N],
  // to the input buffer
  output logic              buf_we,
  output logic [BUF_AW-1:0] buf_waddr,
  output logic [31:0]       buf_wdata
);

  localparam logic [ADDR_W-1:0] A_CTRL   = ADDR_W'('h000);
  localparam logic [ADDR_W-1:0] A_STATUS = ADDR_W'('h004);
  localparam int unsigned       A_RES    = 'h040;
  localparam int unsigned       A_DATA   = 'h200;

  logic wr_take, rd_take;
  logic [2:0]  wmask;            // byte-0 strobe over the CTRL bits
  logic [2:0]  ctrl_q, ctrl_d;   // {send, ready, start}

  assign wr_take       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_take;
  assign s_axi_wready  = wr_take;
  assign s_axi_bresp   = 2'b00;
  assign rd_take       = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_take;
  assign s_axi_rresp   = 2'b00;

  assign wmask = {3{s_axi_wstrb[0]}};

  // CTRL after a byte-masked write
  assign ctrl_q = {ctl_send, ctl_ready, ctl_start};
  assign ctrl_d = (ctrl_q & ~wmask) | (s_axi_wdata[2:0] & wmask);

  // data window
  assign buf_we    = wr_take && load_en && (int'(s_axi_awaddr) >= A_DATA);
  assign buf_waddr = s_axi_awaddr[BUF_AW+1:2];
  assign buf_wdata = s_axi_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_start    <= 1'b0;
      ctl_ready    <= 1'b0;
      ctl_send     <= 1'b0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (wr_take) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_awaddr == A_CTRL) begin
          ctl_start <= ctrl_d[0];
          ctl_ready <= ctrl_d[1];
          ctl_send  <= ctrl_d[2];
        end
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end

      if (rd_take) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= '0;
        if (s_axi_araddr == A_CTRL)
          s_axi_rdata <= {29'd0, ctl_send, ctl_ready, ctl_start};
        else if (s_axi_araddr == A_STATUS)
          s_axi_rdata <= {29'd0, core_done, state};
        else
          for (int n = 0; n < N; n++)
            if (int'(s_axi_araddr) == A_RES + 4*n) s_axi_rdata <= result[n];
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI handshake rules: a response, once valid, holds until accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
