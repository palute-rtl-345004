// palute_bank: one M3D DRAM bank with MATS vertical MATs, the bank-level accumulator and a
// small bank sequencer.
//
// Commands (cmd_t from palute_pkg, handshake cmd_valid/cmd_ready, one at a time):
//   OP_WRITE_ROW : cmd_data -> row cmd.row of MAT cmd.mat (weights, indices, KV cache)
//   OP_READ_ROW  : row cmd.row of MAT cmd.mat -> rsp_data (KV cache read)
//   OP_QUERY     : every selected MAT (all, or cmd.mat) looks up the indices in its row
//                  cmd.row against the LUT at cmd.lut_base, in parallel; their results are
//                  then drained MAT by MAT, one row-buffer beat per cycle, into the
//                  accumulator (added if cmd.accumulate, else written)
//   OP_READ_ACC  : accumulator lane cmd.lane -> rsp_data (sign-extended)
//   OP_CLEAR_ACC : zero the accumulator
// done pulses when a command has finished; rsp_valid marks read data.
// The gw_* port takes LUT write-back rows from the bank's LUT generator: one VALUE_W-bit
// entry per cycle, copied into every column group of the addressed MAT(s).
// Timing of OP_QUERY: 1 (start) + 1 (index row) + LUT length (sweep) + n_mats * BEATS.
// From the paper: 1024 MATs per bank, all MATs queried in parallel, one accumulator per bank.
// This design's own choices: the command set, the MAT-by-MAT drain order and that the
// accumulator takes one beat per cycle.
module palute_bank
  import palute_pkg::*;
#(
  parameter int unsigned MATS    = 1024,
  parameter int unsigned ROWS    = 768,
  parameter int unsigned COLS    = 1024,
  parameter int unsigned VALUE_W = 8,
  parameter int unsigned BW_BUF  = 128,
  parameter int unsigned ACC_W   = 32,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned MW     = (MATS > 1) ? $clog2(MATS) : 1,
  localparam int unsigned GROUPS = COLS / VALUE_W,
  localparam int unsigned LANES  = BW_BUF / VALUE_W,
  localparam int unsigned BEATS  = GROUPS / LANES,
  localparam int unsigned BTW    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned LW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned OUT_W  = VALUE_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  input  logic [COLS-1:0]      cmd_data,
  output logic                 rsp_valid,
  output logic [COLS-1:0]      rsp_data,
  output logic                 done,
  // LUT write-back from the LUT generator
  input  logic                 gw_valid,
  input  logic [MW-1:0]        gw_mat,
  input  logic                 gw_all_mats,
  input  logic [RW-1:0]        gw_row,
  input  logic [VALUE_W-1:0]   gw_entry
);

  typedef enum logic [2:0] {B_IDLE, B_WR, B_RD, B_RD2, B_QSTART, B_QWAIT, B_QDRAIN, B_ACC} bstate_e;
  bstate_e state;
  cmd_t    c;
  logic [COLS-1:0] c_data;

  // per-MAT wiring
  logic [MATS-1:0]        m_wr, m_rd, m_start, m_busy, m_valid, m_ready, m_last, m_rdv;
  logic [COLS-1:0]        m_rdata [MATS];
  logic [BTW-1:0]         m_beat  [MATS];
  logic signed [OUT_W-1:0] m_res  [MATS][LANES];
  logic [RW-1:0]          wrow;
  logic [COLS-1:0]        wdata;
  logic [MATS-1:0]        sel;     // MATs taking part in the current query
  logic [MW-1:0]          k;       // MAT being drained

  // accumulator
  logic                    acc_clear, acc_valid;
  logic signed [ACC_W-1:0] acc_rd;

  always_comb begin
    if (gw_valid) begin
      wrow  = gw_row;
      wdata = {GROUPS{gw_entry}};
    end else begin
      wrow  = RW'(c.row);
      wdata = c_data;
    end
    for (int m = 0; m < MATS; m++) begin
      m_wr[m]    = (gw_valid && (gw_all_mats || gw_mat == MW'(m))) ||
                   (!gw_valid && state == B_WR && c.mat[MW-1:0] == MW'(m));
      m_rd[m]    = (state == B_RD) && c.mat[MW-1:0] == MW'(m);
      m_start[m] = (state == B_QSTART) && sel[m];
      m_ready[m] = (state == B_QDRAIN) && k == MW'(m);
    end
  end

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    lut_mat #(.ROWS(ROWS), .COLS(COLS), .VALUE_W(VALUE_W), .BW_BUF(BW_BUF)) u_mat (
      .clk, .rst_n,
      .wr_en(m_wr[m]), .wr_row(wrow), .wr_data(wdata), .wr_group_mask({GROUPS{1'b1}}),
      .rd_en(m_rd[m]), .rd_row(RW'(c.row)), .rd_data(m_rdata[m]), .rd_valid(m_rdv[m]),
      .q_start(m_start[m]), .q_mode(c.mode), .q_idx_row(RW'(c.row)),
      .q_lut_base(RW'(c.lut_base)), .q_busy(m_busy[m]),
      .res_valid(m_valid[m]), .res_ready(m_ready[m]), .res_beat(m_beat[m]),
      .res_last(m_last[m]), .res_data(m_res[m])
    );
  end

  assign acc_valid = (state == B_QDRAIN) && m_valid[k];
  assign acc_clear = (state == B_ACC) && c.op == OP_CLEAR_ACC;

  bank_accumulator #(.GROUPS(GROUPS), .LANES(LANES), .IN_W(OUT_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .in_valid(acc_valid), .in_accumulate(c.accumulate),
    .in_beat(m_beat[k]), .in_data(m_res[k]), .rd_lane(LW'(c.lane)), .rd_data(acc_rd)
  );

  // next selected MAT after k (or MATS if none)
  function automatic int next_sel(input logic [MATS-1:0] s, input int from);
    for (int m = from; m < MATS; m++) if (s[m]) return m;
    return MATS;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= B_IDLE;
      c         <= '0;
      c_data    <= '0;
      sel       <= '0;
      k         <= '0;
      done      <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      done      <= 1'b0;
      rsp_valid <= 1'b0;
      unique case (state)
        B_IDLE: if (cmd_valid && cmd_ready) begin
          c      <= cmd;
          c_data <= cmd_data;
          unique case (cmd.op)
            OP_WRITE_ROW: state <= B_WR;
            OP_READ_ROW:  state <= B_RD;
            OP_QUERY: begin
              for (int m = 0; m < MATS; m++) sel[m] <= cmd.all_mats || cmd.mat[MW-1:0] == MW'(m);
              state <= B_QSTART;
            end
            default:      state <= B_ACC;  // READ_ACC, CLEAR_ACC (GEN_* are not bank ops)
          endcase
        end
        B_WR: begin
          done  <= 1'b1;
          state <= B_IDLE;
        end
        B_RD:  state <= B_RD2;
        B_RD2: begin
          rsp_data  <= m_rdata[c.mat[MW-1:0]];
          rsp_valid <= 1'b1;
          done      <= 1'b1;
          state     <= B_IDLE;
        end
        B_QSTART: begin
          k     <= MW'(next_sel(sel, 0));
          state <= B_QWAIT;
        end
        B_QWAIT: state <= B_QDRAIN;
        B_QDRAIN: if (m_valid[k] && m_last[k]) begin
          if (next_sel(sel, int'(k) + 1) >= MATS) begin
            done  <= 1'b1;
            state <= B_IDLE;
          end else begin
            k <= MW'(next_sel(sel, int'(k) + 1));
          end
        end
        B_ACC: begin
          if (c.op == OP_READ_ACC) begin
            rsp_data  <= COLS'(acc_rd);
            rsp_valid <= 1'b1;
          end
          done  <= 1'b1;
          state <= B_IDLE;
        end
        default: state <= B_IDLE;
      endcase
    end
  end

  assign cmd_ready = (state == B_IDLE) && !gw_valid;

  a_gw_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    gw_valid |-> (state == B_IDLE));

endmodule
