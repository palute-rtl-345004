// lut_generator: one LUT-generator unit of the logic die, attached to one DRAM bank.
//
// It holds the two cores of the paper's LUT generator, the GEMM core (gemm_lut_core) and the
// element-wise unary core (unary_lut_core), and the FSM controller that runs them and writes
// the finished table back into the bank (steps 2 and 3 of the scheduling flow: build the LUT
// from incoming activations, write it into the DRAM array for in-situ queries).
//
// Interface: start with kind = 0 builds the GEMM half-table of (x1, x2); kind = 1 builds the
// unary table of func/scale. The table is written to rows lut_base .. lut_base+len-1 of MAT
// `mat` (or of every MAT if all_mats), one row per cycle on the wb_* port. Each row carries
// one VALUE_W-bit entry, which the bank replicates into every column group (the LUT copies of
// the paper's horizontal replication). done pulses after the last row.
// Timing (rising edges from the start edge to done): GEMM 157 = the core's 3-cycle build,
// one hand-off cycle, 153 write-back rows; unary 17 = one cycle build, 16 rows.
// This design's own choices: one row per cycle write-back and no back-pressure (the bank
// accepts a write every cycle while it is not querying; the controller keeps them apart).
module lut_generator
  import palute_pkg::*;
#(
  parameter int unsigned ROWS    = 768,
  parameter int unsigned MATS    = 1024,
  parameter int unsigned VALUE_W = 8,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned MW     = (MATS > 1) ? $clog2(MATS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 kind,       // 0: GEMM, 1: unary
  input  logic signed [ABITS-1:0] x1,
  input  logic signed [ABITS-1:0] x2,
  input  ufunc_e               func,
  input  logic [7:0]           scale,
  input  logic [MW-1:0]        mat,
  input  logic                 all_mats,
  input  logic [RW-1:0]        lut_base,
  output logic                 busy,
  output logic                 done,
  // write-back to the bank
  output logic                 wb_valid,
  output logic [MW-1:0]        wb_mat,
  output logic                 wb_all_mats,
  output logic [RW-1:0]        wb_row,
  output logic [VALUE_W-1:0]   wb_entry
);

  typedef enum logic [1:0] {L_IDLE, L_GEN, L_WB} lstate_e;
  lstate_e state;

  logic signed [VALUE_W-1:0] gemm_lut [HT_ROWS];
  logic signed [VALUE_W-1:0] un_lut   [UN_ROWS];
  logic gemm_done, un_done, gemm_busy;
  logic kind_r, all_r;
  logic [MW-1:0] mat_r;
  logic [RW-1:0] base_r;
  logic [7:0]    cnt, len;

  gemm_lut_core #(.VALUE_W(VALUE_W)) u_gemm (
    .clk, .rst_n, .start(start && state == L_IDLE && !kind), .x1, .x2,
    .busy(gemm_busy), .done(gemm_done), .lut(gemm_lut)
  );

  unary_lut_core #(.VALUE_W(VALUE_W)) u_unary (
    .clk, .rst_n, .start(start && state == L_IDLE && kind), .func, .scale,
    .done(un_done), .lut(un_lut)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= L_IDLE;
      kind_r <= 1'b0;
      all_r  <= 1'b0;
      mat_r  <= '0;
      base_r <= '0;
      cnt    <= '0;
      len    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        L_IDLE: if (start) begin
          kind_r <= kind;
          all_r  <= all_mats;
          mat_r  <= mat;
          base_r <= lut_base;
          len    <= kind ? 8'(UN_ROWS) : 8'(HT_ROWS);
          state  <= L_GEN;
        end
        L_GEN: if (kind_r ? un_done : gemm_done) begin
          cnt   <= '0;
          state <= L_WB;
        end
        L_WB: begin
          cnt <= cnt + 8'd1;
          if (cnt == len - 8'd1) begin
            done  <= 1'b1;
            state <= L_IDLE;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  assign busy        = (state != L_IDLE);
  assign wb_valid    = (state == L_WB);
  assign wb_mat      = mat_r;
  assign wb_all_mats = all_r;
  assign wb_row      = base_r + RW'(cnt);
  assign wb_entry    = kind_r ? un_lut[cnt[3:0]] : gemm_lut[(cnt < 8'(HT_ROWS)) ? cnt : 8'd0];

endmodule
