// ivn_ps_model -- behavioural model of the processor side of the AXI4-Lite
// link, for testbenches only. It stands in for the ARM processing system
// and offers two tasks, write(addr, data) and read(addr, data), each a
// complete single-beat AXI4-Lite transaction. Address and data are driven
// together; VALID is held until READY; BREADY / RREADY are held high except
// that 'stall_resp' keeps them low for a few cycles first, to exercise the
// slave's response hold. It counts the responses it had to wait for.
module ivn_ps_model #(
  parameter int unsigned ADDR_W = 10
) (
  input  logic              clk,
  output logic [ADDR_W-1:0] awaddr,
  output logic              awvalid,
  input  logic              awready,
  output logic [31:0]       wdata,
  output logic [3:0]        wstrb,
  output logic              wvalid,
  input  logic              wready,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready,
  output logic [ADDR_W-1:0] araddr,
  output logic              arvalid,
  input  logic              arready,
  input  logic [31:0]       rdata,
  input  logic [1:0]        rresp,
  input  logic              rvalid,
  output logic              rready
);
  bit stall_resp = 1'b0;
  int stalled_resps = 0;
  int bad_resps = 0;

  initial begin
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = 4'hf; wvalid = 1'b0; bready = 1'b0;
    araddr = '0; arvalid = 1'b0; rready = 1'b0;
  end

  task automatic write(input int unsigned addr, input logic [31:0] data, input logic [3:0] strb = 4'hf);
    @(negedge clk);
    awaddr = ADDR_W'(addr); awvalid = 1'b1; wdata = data; wstrb = strb; wvalid = 1'b1;
    bready = !stall_resp;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 1'b0; wvalid = 1'b0;
    if (stall_resp) begin
      repeat (3) @(negedge clk);
      if (bvalid) stalled_resps++;
      bready = 1'b1;
    end
    while (!bvalid) @(negedge clk);
    if (bresp != 2'b00) bad_resps++;
    @(posedge clk);
    @(negedge clk); bready = 1'b0;
  endtask

  task automatic read(input int unsigned addr, output logic [31:0] data);
    logic [31:0] first;
    @(negedge clk);
    araddr = ADDR_W'(addr); arvalid = 1'b1; rready = !stall_resp;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 1'b0;
    if (stall_resp) begin
      while (!rvalid) @(negedge clk);
      first = rdata;
      repeat (3) @(negedge clk);
      if (rvalid && rdata == first) stalled_resps++;
      rready = 1'b1;
    end
    while (!rvalid) @(negedge clk);
    data = rdata;
    if (rresp != 2'b00) bad_resps++;
    @(posedge clk);
    @(negedge clk); rready = 1'b0;
  endtask
endmodule
