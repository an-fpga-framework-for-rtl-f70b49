// ivn_transpose -- streaming matrix transpose.
//
// An N x N matrix arrives one word per cycle in row-major order (in_valid /
// in_data) and is written into a local buffer. Once all N*N words are held,
// the buffer is read out in column-major order, one word per cycle
// (out_valid / out_data), which is the row-major order of the transpose.
// While it is emitting, in_ready is low and new input is not accepted. This
// "reshuffling of a buffered row-major stream into column-major order" is the
// paper's description; the single buffer and the ready signal are this
// design's choices.
//
// Timing: the first output word appears the cycle after the last input word
// is accepted; the N*N output words follow on consecutive cycles, with
// out_last on the final one.
module ivn_transpose #(
  parameter int unsigned N = 6,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic                out_last,
  output logic signed [W-1:0] out_data
);

  localparam int unsigned NN = N*N;
  localparam int unsigned IW = $clog2(N);

  logic signed [W-1:0] buf_q [NN];
  logic [IW-1:0]       in_row, in_col;     // write position
  logic [IW-1:0]       out_row, out_col;   // read position (of the source)
  logic                emitting;

  assign in_ready  = !emitting;
  assign out_valid = emitting;
  assign out_last  = emitting && out_row == IW'(N-1) && out_col == IW'(N-1);
  assign out_data  = buf_q[int'(out_row)*N + int'(out_col)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row   <= '0;
      in_col   <= '0;
      out_row  <= '0;
      out_col  <= '0;
      emitting <= 1'b0;
    end else if (!emitting) begin
      if (in_valid) begin
        if (in_col == IW'(N-1)) begin
          in_col <= '0;
          if (in_row == IW'(N-1)) begin
            in_row   <= '0;
            emitting <= 1'b1;
          end else begin
            in_row <= in_row + 1'b1;
          end
        end else begin
          in_col <= in_col + 1'b1;
        end
      end
    end else begin
      // column-major walk over the source: rows fastest
      if (out_row == IW'(N-1)) begin
        out_row <= '0;
        if (out_col == IW'(N-1)) begin
          out_col  <= '0;
          emitting <= 1'b0;
        end else begin
          out_col <= out_col + 1'b1;
        end
      end else begin
        out_row <= out_row + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!emitting && in_valid)
      buf_q[int'(in_row)*N + int'(in_col)] <= in_data;
  end

endmodule
