// palute_channel: one DRAM channel, a BANK_ROWS x BANK_COLS array of banks, each paired with
// its own LUT-generator unit on the logic die (the paper's 4 x 4 array of generator units,
// one per bank, joined to the bank by hybrid bonding).
//
// Each bank b has its own command handshake (cmd_valid[b] / cmd_ready[b]); the command word
// and row data are shared by all banks of the channel. A command for bank b is steered by its
// opcode: OP_GEN_GEMM and OP_GEN_UNARY start bank b's LUT generator, which then writes the
// table into the bank through the write-back port; every other opcode goes to the bank.
// done[b] pulses when bank b's command has finished, rsp_valid[b]/rsp_data[b] carry read data.
// Timing: that of the bank or generator that serves the command, no added cycles except the
// generator's one-cycle hand-off.
// From the paper: 4 x 4 banks per channel, one generator unit per bank. The steering and the
// per-bank handshake are this design's own.
module palute_channel
  import palute_pkg::*;
#(
  parameter int unsigned BANK_ROWS = 4,
  parameter int unsigned BANK_COLS = 4,
  parameter int unsigned MATS      = 1024,
  parameter int unsigned ROWS      = 768,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned VALUE_W   = 8,
  parameter int unsigned BW_BUF    = 128,
  parameter int unsigned ACC_W     = 32,
  localparam int unsigned NB       = BANK_ROWS * BANK_COLS,
  localparam int unsigned RW       = $clog2(ROWS),
  localparam int unsigned MW       = (MATS > 1) ? $clog2(MATS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NB-1:0]   cmd_valid,
  output logic [NB-1:0]   cmd_ready,
  input  cmd_t            cmd,
  input  logic [COLS-1:0] cmd_data,
  output logic [NB-1:0]   rsp_valid,
  output logic [COLS-1:0] rsp_data [NB],
  output logic [NB-1:0]   done
);

  wire is_gen = (cmd.op == OP_GEN_GEMM) || (cmd.op == OP_GEN_UNARY);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic               b_ready, b_done, g_busy, g_done;
    logic               gw_valid, gw_all;
    logic [MW-1:0]      gw_mat;
    logic [RW-1:0]      gw_row;
    logic [VALUE_W-1:0] gw_entry;

    lut_generator #(.ROWS(ROWS), .MATS(MATS), .VALUE_W(VALUE_W)) u_gen (
      .clk, .rst_n,
      .start(cmd_valid[b] && is_gen && !g_busy && b_ready),
      .kind(cmd.op == OP_GEN_UNARY), .x1(cmd.x1), .x2(cmd.x2), .func(cmd.func),
      .scale(cmd.scale), .mat(MW'(cmd.mat)), .all_mats(cmd.all_mats),
      .lut_base(RW'(cmd.row)), .busy(g_busy), .done(g_done),
      .wb_valid(gw_valid), .wb_mat(gw_mat), .wb_all_mats(gw_all), .wb_row(gw_row),
      .wb_entry(gw_entry)
    );

    palute_bank #(.MATS(MATS), .ROWS(ROWS), .COLS(COLS), .VALUE_W(VALUE_W), .BW_BUF(BW_BUF),
                  .ACC_W(ACC_W)) u_bank (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[b] && !is_gen && !g_busy), .cmd_ready(b_ready), .cmd, .cmd_data,
      .rsp_valid(rsp_valid[b]), .rsp_data(rsp_data[b]), .done(b_done),
      .gw_valid, .gw_mat, .gw_all_mats(gw_all), .gw_row, .gw_entry
    );

    assign cmd_ready[b] = b_ready && !g_busy;
    assign done[b]      = b_done || g_done;
  end

endmodule
