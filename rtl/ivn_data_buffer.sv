// ivn_data_buffer -- block memory that buffers the incoming data stream.
//
// The paper buffers the data written by the processor "on the PL using block
// memory". This is a simple dual-port RAM: one synchronous write port, fed
// by the register file while the state machine is in SEND_DATA, and one
// synchronous read port used by the core. The word layout (H row-major at
// 0..35, R row-major at 36..71, y at 72..77) and the 128-word depth are
// this design's choices.
//
// Timing: a write lands on the clock edge with 'we' high; read data appears
// on 'rdata' one clock after 'raddr' is presented. A write and a read of the
// same address in one cycle return the old word.
module ivn_data_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned W     = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
