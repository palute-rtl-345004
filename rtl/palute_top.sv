// palute_top: the whole LUT-based processing-in-memory chip: a CH_ROWS x CH_COLS array of
// channels (each BANK_ROWS x BANK_COLS banks of MATS MATs, with one LUT-generator unit per
// bank) and the system controller that runs the scheduling flow.
//
// A GEMM with W4A4 operands runs as follows. The host writes each MAT's weight pairs into a
// low row (one 8-bit pair per column group, the group being the output column), broadcasts
// OP_GEN_GEMM so that each MAT receives the half-table of its activation segment (x1, x2) in
// its LUT rows, then issues OP_QUERY: all selected MATs of all targeted banks sweep their
// LUT in parallel and the bank accumulators sum the results of all MATs, i.e. over all
// segments of the dot product. OP_READ_ACC returns the sums. Unary functions (GELU, ReLU) use
// OP_GEN_UNARY and OP_QUERY in unary mode with the activations as indices. KV-cache rows are
// ordinary OP_WRITE_ROW / OP_READ_ROW accesses in the high rows.
//
// Interface: host_valid/host_ready command handshake (cmd_t), host_data for row writes,
// host_rsp_valid/host_rsp_data for reads, host_done when a command has finished everywhere.
// The hybrid-bonding link between the logic die and the DRAM tiers is a plain wire bundle here.
// Default sizes are the paper's (4x4 channels, 4x4 banks, MATs of 768 x 1024 cells, 128-bit
// row buffer) except MATS: the paper has 1024 MATs per bank, 262,144 MATs in all, but
// elaborating every MAT instance of the chip takes about 120 MB of lint-tool memory per MAT
// per bank, so the chip-level default is 128 MATs per bank (32,768 MATs). palute_bank and
// palute_channel keep the paper's 1024. The command interface is this design's own.
module palute_top
  import palute_pkg::*;
#(
  parameter int unsigned CH_ROWS   = 4,
  parameter int unsigned CH_COLS   = 4,
  parameter int unsigned BANK_ROWS = 4,
  parameter int unsigned BANK_COLS = 4,
  parameter int unsigned MATS      = 128,   // paper: 1024, see header
  parameter int unsigned ROWS      = 768,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned VALUE_W   = 8,
  parameter int unsigned BW_BUF    = 128,
  parameter int unsigned ACC_W     = 32,
  localparam int unsigned NCH      = CH_ROWS * CH_COLS,
  localparam int unsigned NB       = BANK_ROWS * BANK_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            host_valid,
  output logic            host_ready,
  input  cmd_t            host_cmd,
  input  logic [COLS-1:0] host_data,
  output logic            host_rsp_valid,
  output logic [COLS-1:0] host_rsp_data,
  output logic            host_done
);

  cmd_t                 bk_cmd;
  logic [COLS-1:0]      bk_data;
  logic [NCH*NB-1:0]    bk_valid, bk_ready, bk_done, bk_rsp_valid;
  logic [COLS-1:0]      bk_rsp_data [NCH*NB];

  palute_ctrl #(.NCH(NCH), .NB(NB), .COLS(COLS)) u_ctrl (
    .clk, .rst_n,
    .host_valid, .host_ready, .host_cmd, .host_data,
    .host_rsp_valid, .host_rsp_data, .host_done,
    .bk_cmd, .bk_data, .bk_valid, .bk_ready, .bk_done, .bk_rsp_valid, .bk_rsp_data
  );

  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    logic [COLS-1:0] rsp [NB];

    palute_channel #(.BANK_ROWS(BANK_ROWS), .BANK_COLS(BANK_COLS), .MATS(MATS), .ROWS(ROWS),
                     .COLS(COLS), .VALUE_W(VALUE_W), .BW_BUF(BW_BUF), .ACC_W(ACC_W)) u_ch (
      .clk, .rst_n,
      .cmd_valid(bk_valid[ch*NB +: NB]), .cmd_ready(bk_ready[ch*NB +: NB]),
      .cmd(bk_cmd), .cmd_data(bk_data),
      .rsp_valid(bk_rsp_valid[ch*NB +: NB]), .rsp_data(rsp), .done(bk_done[ch*NB +: NB])
    );

    for (genvar b = 0; b < NB; b++) begin : g_rsp
      assign bk_rsp_data[ch*NB + b] = rsp[b];
    end
  end

endmodule
