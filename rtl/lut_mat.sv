// lut_mat: one vertical M3D DRAM MAT with in-DRAM LUT query logic.
//
// What it does. The MAT is a ROWS x COLS cell array. A row is cut into GROUPS = COLS/VALUE_W
// column groups; each group holds one VALUE_W-bit word. The rows are split into three regions
// by address (the controller decides the bases): model weights / query indices at the bottom,
// LUTs in the middle, KV cache at the top. In a LUT region every row is one table index and a
// group holds one LUT replica, so one row stores one entry of GROUPS tables side by side.
//
// How a query works (follows the paper's MAT description: decoder with matching logic sweeps
// the rows, switches route matched columns into flip-flops, a MUX and sign-flip unit restore
// the half-table sign):
//   1. LOAD  : the index row (q_idx_row) is read; group g supplies its own index. In GEMM mode
//              the index is the weight pair {w1, w2} (bits [7:4] = w1, [3:0] = w2, two's
//              complement). The input sign-flip folds w1 < 0 onto (-w1, -w2) and remembers the
//              sign per group. In unary mode the index is x (bits [3:0]).
//   2. SWEEP : the decoder walks the LUT rows q_lut_base .. q_lut_base+len-1, one row per
//              cycle (len = 153 in GEMM mode, 16 in unary mode). Every group whose folded index
//              matches the current row offset closes its switch and latches the cell word.
//   3. OUT   : the latched words leave through the row-buffer interface, BW_BUF bits of stored
//              data per beat (LANES = BW_BUF/VALUE_W words), BEATS = GROUPS/LANES beats; the
//              output sign-flip negates words of folded groups. Values widen to VALUE_W+1 bits.
// Latency: start -> first beat valid = 1 + len cycles; then one beat per cycle while ready.
//
// Row port: wr_en writes wr_data into row wr_row for groups selected by wr_group_mask (used
// for LUT write-back with replication, weights and KV cache). rd_en returns row rd_row in
// rd_data one cycle later (rd_valid). Row access is refused (assertion) during a query.
//
// This design's own choices: the word width VALUE_W = 8 (the paper assumes 4-bit LUT words,
// which cannot hold the exact sum w1*x1 + w2*x2 of two INT4 products, range -128..120); one row
// swept per cycle; the cell array is written as a plain array (the DRAM cells and sense
// amplifiers are analog and are not modelled beyond their storage).
module lut_mat
  import palute_pkg::*;
#(
  parameter int unsigned ROWS    = 768,
  parameter int unsigned COLS    = 1024,
  parameter int unsigned VALUE_W = 8,
  parameter int unsigned BW_BUF  = 128,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned GROUPS = COLS / VALUE_W,
  localparam int unsigned LANES  = BW_BUF / VALUE_W,
  localparam int unsigned BEATS  = GROUPS / LANES,
  localparam int unsigned BTW    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned OUT_W  = VALUE_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // row port
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_row,
  input  logic [COLS-1:0]      wr_data,
  input  logic [GROUPS-1:0]    wr_group_mask,
  input  logic                 rd_en,
  input  logic [RW-1:0]        rd_row,
  output logic [COLS-1:0]      rd_data,
  output logic                 rd_valid,
  // query command
  input  logic                 q_start,
  input  qmode_e               q_mode,
  input  logic [RW-1:0]        q_idx_row,
  input  logic [RW-1:0]        q_lut_base,
  output logic                 q_busy,
  // result burst
  output logic                 res_valid,
  input  logic                 res_ready,
  output logic [BTW-1:0]       res_beat,
  output logic                 res_last,
  output logic signed [OUT_W-1:0] res_data [LANES]
);

  initial begin
    assert (VALUE_W >= WBITS * 2) else $error("VALUE_W must hold a weight pair index");
    assert (COLS % VALUE_W == 0 && GROUPS % LANES == 0) else $error("bad MAT geometry");
  end

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SWEEP, S_OUT} state_e;
  state_e state;

  logic [COLS-1:0]    cells [ROWS];            // the DRAM cell array
  logic [7:0]         tgt   [GROUPS];          // folded row offset each group waits for
  logic [GROUPS-1:0]  neg;                     // group was folded: negate its result
  logic [VALUE_W-1:0] ff    [GROUPS];          // capture flip-flops below the sense amps
  logic [7:0]         cnt;                     // sweep position
  logic [7:0]         len;
  logic [RW-1:0]      base, idx_row;
  qmode_e             mode;
  logic [BTW-1:0]     beat;

  // ---------------- row port ----------------
  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int g = 0; g < GROUPS; g++)
        if (wr_group_mask[g]) cells[wr_row][g*VALUE_W +: VALUE_W] <= wr_data[g*VALUE_W +: VALUE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) rd_data <= cells[rd_row];
    end
  end

  // ---------------- query sequencer ----------------
  // Input sign-flip: fold a pair onto the stored half of the table.
  function automatic logic [8:0] fold(input logic [7:0] word, input qmode_e m);
    logic signed [4:0] w1, w2, w1c, w2c;
    logic s;
    w1 = 5'(signed'(word[7:4]));
    w2 = 5'(signed'(word[3:0]));
    if (m == QM_UNARY) return {1'b0, 8'(unsigned'(w2 + 5'sd8))};
    s   = w1[4];
    w1c = s ? -w1 : w1;
    w2c = s ? -w2 : w2;
    return {s, 8'(unsigned'(w1c) * HT_W2_SPAN + unsigned'(w2c + 5'sd8))};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      len     <= '0;
      base    <= '0;
      idx_row <= '0;
      mode    <= QM_GEMM;
      beat    <= '0;
      neg     <= '0;
      for (int g = 0; g < GROUPS; g++) begin
        tgt[g] <= '0;
        ff[g]  <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (q_start) begin
          mode    <= q_mode;
          base    <= q_lut_base;
          idx_row <= q_idx_row;
          len     <= (q_mode == QM_GEMM) ? 8'(HT_ROWS) : 8'(UN_ROWS);
          state   <= S_LOAD;
        end
        S_LOAD: begin
          for (int g = 0; g < GROUPS; g++) begin
            logic [8:0] f;
            f = fold(cells[idx_row][g*VALUE_W +: 8], mode);
            neg[g] <= f[8];
            tgt[g] <= f[7:0];
          end
          cnt   <= '0;
          state <= S_SWEEP;
        end
        S_SWEEP: begin
          // matching logic: one LUT row per cycle, matched groups latch their word
          for (int g = 0; g < GROUPS; g++)
            if (tgt[g] == cnt) ff[g] <= cells[base + RW'(cnt)][g*VALUE_W +: VALUE_W];
          cnt <= cnt + 8'd1;
          if (cnt == len - 8'd1) begin
            beat  <= '0;
            state <= S_OUT;
          end
        end
        S_OUT: if (res_ready) begin
          if (beat == BTW'(BEATS - 1)) state <= S_IDLE;
          else beat <= beat + BTW'(1);
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- output MUX and sign-flip ----------------
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned g;
      logic signed [OUT_W-1:0] v;
      g = int'(beat) * LANES + l;
      v = OUT_W'(signed'(ff[g]));
      res_data[l] = neg[g] ? -v : v;
    end
  end

  assign res_valid = (state == S_OUT);
  assign res_beat  = beat;
  assign res_last  = (state == S_OUT) && (beat == BTW'(BEATS - 1));
  assign q_busy    = (state != S_IDLE);

  // row access and query must not overlap
  a_no_row_during_query: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_IDLE) |-> !wr_en);
  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    q_start |-> (state == S_IDLE));

endmodule
