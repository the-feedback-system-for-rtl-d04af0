// reference_pattern: time pattern of the I/Q set point of one feedback block.
//
// A table of 2^DEPTH_LOG2 I/Q set points played out over the acceleration
// cycle. A pulse on start_i (the start of the cycle) returns to entry 0;
// after that the entry index advances once every step_i clocks and stops at
// the last entry, which is then held. A non-zero pattern excites the beam
// (open loop) or sets a non-zero target for the closed loop.
//
// Interface: write port (we_i, waddr_i, wdata_i) loads entries at any time;
// ref_o is registered and shows the current entry one clock after the index
// moves. step_i = 0 freezes the index. The table is not reset.
// The paper gives the reference I and Q patterns as inputs of the feedback;
// the table depth and the uniform time step are this design's choices.
module reference_pattern
  import lmbf_pkg::*;
#(
  parameter int unsigned DEPTH_LOG2 = 10
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  start_i,
  input  logic [31:0]           step_i,
  input  logic                  we_i,
  input  logic [DEPTH_LOG2-1:0] waddr_i,
  input  iq_t                   wdata_i,
  output iq_t                   ref_o,
  output logic [DEPTH_LOG2-1:0] index_o
);
  iq_t mem [1 << DEPTH_LOG2];
  logic [31:0] cnt;

  always_ff @(posedge clk) begin
    if (rst || start_i) begin
      cnt     <= '0;
      index_o <= '0;
    end else if (step_i != 0 && index_o != '1) begin
      if (cnt >= step_i - 1) begin
        cnt     <= '0;
        index_o <= index_o + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    ref_o <= mem[index_o];
  end
endmodule
