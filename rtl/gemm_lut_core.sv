// gemm_lut_core: the GEMM core of a LUT generator. Given one activation segment (x1, x2) it
// enumerates every half-table entry w1c*x1 + w2c*x2 (w1c = 0..8, w2c = -8..8, see palute_pkg)
// in three clock cycles.
//
// How it works (the paper's MegaMultiplier / alignment buffer / MegaAdder structure):
//   * An operand flip-flop fed through a MUX and a sign inverter holds x1, then x2, then -x2.
//   * The MegaMultiplier multiplies the operand by every magnitude k = 1..8 at once
//     (k = 1 is a wire).
//   * Cycle 1: the products k*x1 are buffered (the |w1|*x1 side of the alignment buffer).
//   * Cycle 2: products k*x2. Nine MegaAdder rows, one per w1c = 0..8, each add their fixed
//     buffered w1c*x1 to every k*x2 and store the entries with w2c = +k; the w2c = 0 entries
//     are the buffered w1c*x1 themselves.
//   * Cycle 3: products k*(-x2); the same adders store the entries with w2c = -k.
// Timing: start is sampled on a rising edge; done is high for one cycle three edges later and
// lut[] then holds the complete table until the next start. busy is high in between.
// Entry r of lut[] is the table row offset r = w1c*17 + (w2c+8); VALUE_W-bit two's complement.
//
// Follows the paper: three-cycle schedule, multiplier array, sign inverter, replicated adders.
// This design's own choices: the w1c = 0 adder row and the w2c = +8 / 0 entries (needed so
// that a folded pair always finds its entry), one buffer stage instead of two.
module gemm_lut_core
  import palute_pkg::*;
#(
  parameter int unsigned VALUE_W = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic signed [ABITS-1:0]   x1,
  input  logic signed [ABITS-1:0]   x2,
  output logic                      busy,
  output logic                      done,
  output logic signed [VALUE_W-1:0] lut [HT_ROWS]
);

  typedef enum logic [1:0] {G_IDLE, G_C1, G_C2, G_C3} gstate_e;
  gstate_e state;

  logic signed [ABITS:0]   x2_r;
  logic signed [ABITS:0]   opnd;               // operand FF after MUX + inverter
  logic signed [VALUE_W-1:0] prod [1:8];       // MegaMultiplier outputs
  logic signed [VALUE_W-1:0] bufw1 [0:8];      // buffered w1c*x1, bufw1[0] = 0

  always_comb begin
    for (int k = 1; k <= 8; k++) prod[k] = VALUE_W'(opnd * signed'(6'(k)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE;
      done  <= 1'b0;
      opnd  <= '0;
      x2_r  <= '0;
      for (int i = 0; i <= 8; i++) bufw1[i] <= '0;
      for (int r = 0; r < HT_ROWS; r++) lut[r] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        G_IDLE: if (start) begin
          opnd  <= (ABITS+1)'(x1);            // MUX selects x1
          x2_r  <= (ABITS+1)'(x2);
          state <= G_C1;
        end
        G_C1: begin                          // cycle 1: |w1|*x1 into the buffer
          bufw1[0] <= '0;
          for (int k = 1; k <= 8; k++) bufw1[k] <= prod[k];
          opnd  <= x2_r;                       // MUX selects x2
          state <= G_C2;
        end
        G_C2: begin                          // cycle 2: w1c*x1 + k*x2
          for (int i = 0; i <= 8; i++) begin
            lut[i*HT_W2_SPAN + 8] <= bufw1[i];
            for (int k = 1; k <= 8; k++) lut[i*HT_W2_SPAN + 8 + k] <= bufw1[i] + prod[k];
          end
          opnd  <= -x2_r;                      // inverter on
          state <= G_C3;
        end
        G_C3: begin                          // cycle 3: w1c*x1 - k*x2
          for (int i = 0; i <= 8; i++)
            for (int k = 1; k <= 8; k++) lut[i*HT_W2_SPAN + 8 - k] <= bufw1[i] + prod[k];
          done  <= 1'b1;
          state <= G_IDLE;
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  assign busy = (state != G_IDLE);

endmodule
