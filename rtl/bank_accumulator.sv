// bank_accumulator: the bank-level accumulator that sums LUT results across matrix segments.
//
// It keeps one ACC_W-bit signed register per output lane (one lane per MAT column group).
// LUT results arrive as row-buffer beats: beat b carries lanes b*LANES .. b*LANES+LANES-1.
// With in_accumulate = 1 each value is added to its lane; with 0 it overwrites the lane (used
// for unary-function results, which are not summed). clear zeroes every lane. A lane is read
// through rd_lane / rd_data (combinational). Sums over MATs and over successive queries build
// up a long dot product: lane j ends with sum over segments s of LUT_s[w_s,j].
// Timing: one beat per cycle, result visible the cycle after in_valid.
// The paper gives the accumulator's function and place (one per bank, fed by all its MATs);
// the width ACC_W = 32 and the beat interface are this design's choice.
module bank_accumulator #(
  parameter int unsigned GROUPS = 128,
  parameter int unsigned LANES  = 16,
  parameter int unsigned IN_W   = 9,
  parameter int unsigned ACC_W  = 32,
  localparam int unsigned BEATS = GROUPS / LANES,
  localparam int unsigned BTW   = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned LW    = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic                    in_accumulate,
  input  logic [BTW-1:0]          in_beat,
  input  logic signed [IN_W-1:0]  in_data [LANES],
  input  logic [LW-1:0]           rd_lane,
  output logic signed [ACC_W-1:0] rd_data
);

  logic signed [ACC_W-1:0] acc [GROUPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < GROUPS; g++) acc[g] <= '0;
    end else if (clear) begin
      for (int g = 0; g < GROUPS; g++) acc[g] <= '0;
    end else if (in_valid) begin
      for (int l = 0; l < LANES; l++) begin
        if (in_accumulate)
          acc[int'(in_beat)*LANES + l] <= acc[int'(in_beat)*LANES + l] + ACC_W'(in_data[l]);
        else
          acc[int'(in_beat)*LANES + l] <= ACC_W'(in_data[l]);
      end
    end
  end

  assign rd_data = acc[rd_lane];

  a_no_clear_and_data: assert property (@(posedge clk) disable iff (!rst_n) !(clear && in_valid));

endmodule
