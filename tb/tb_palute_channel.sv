// tb_palute_channel: a channel of 2 banks, each with 2 small MATs and its own LUT generator.
// Both banks get their half-tables from their generators (OP_GEN_GEMM, different activations
// per MAT and per bank), weights by OP_WRITE_ROW, then query in parallel; every accumulator
// lane must equal the dot product computed here. A ReLU table (OP_GEN_UNARY) and a unary
// query are checked on bank 1.
module tb_palute_channel;
  import palute_pkg::*;
  localparam int NB = 2, K = 2, ROWS = 256, COLS = 128, VW = 8, BW = 32, G = COLS / VW;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] cmd_valid = 0, cmd_ready, rsp_valid, done;
  cmd_t cmd;
  logic [COLS-1:0] cmd_data = 0;
  logic [COLS-1:0] rsp_data [NB];
  int checks = 0, failures = 0;

  palute_channel #(.BANK_ROWS(1), .BANK_COLS(NB), .MATS(K), .ROWS(ROWS), .COLS(COLS),
                   .VALUE_W(VW), .BW_BUF(BW), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // send c to the banks in mask, wait until all have accepted and finished
  task automatic issue(input logic [NB-1:0] mask, input cmd_t c, input logic [COLS-1:0] d,
                       output logic [COLS-1:0] r [NB]);
    logic [NB-1:0] pend, fin;
    @(negedge clk);
    cmd = c; cmd_data = d; pend = mask; fin = mask;
    cmd_valid = pend;
    while (fin != 0) begin
      @(posedge clk);
      pend = pend & ~cmd_ready;
      for (int b = 0; b < NB; b++) if (rsp_valid[b]) r[b] = rsp_data[b];
      fin = fin & ~done;
      @(negedge clk);
      cmd_valid = pend;
    end
  endtask

  function automatic cmd_t mk(op_e op, int mat = 0, int row = 0);
    cmd_t c = '0;
    c.op = op; c.mat = 16'(mat); c.row = 16'(row);
    return c;
  endfunction

  int x1 [NB][K], x2 [NB][K], w1 [NB][K][G], w2 [NB][K][G], xs [G];

  initial begin
    logic [COLS-1:0] r [NB];
    logic [COLS-1:0] d;
    cmd_t c;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < K; k++) begin
        x1[b][k] = $urandom_range(0, 15) - 8; x2[b][k] = $urandom_range(0, 15) - 8;
        c = mk(OP_GEN_GEMM, k, 40); c.x1 = 4'(x1[b][k]); c.x2 = 4'(x2[b][k]);
        issue(NB'(1 << b), c, '0, r);
        for (int g = 0; g < G; g++) begin
          w1[b][k][g] = $urandom_range(0, 15) - 8; w2[b][k][g] = $urandom_range(0, 15) - 8;
          d[g*VW +: VW] = {4'(w1[b][k][g]), 4'(w2[b][k][g])};
        end
        issue(NB'(1 << b), mk(OP_WRITE_ROW, k, 0), d, r);
      end
    issue('1, mk(OP_CLEAR_ACC), '0, r);
    c = mk(OP_QUERY, 0, 0); c.all_mats = 1; c.accumulate = 1; c.lut_base = 40; c.mode = QM_GEMM;
    issue('1, c, '0, r);    // both banks query at the same time
    for (int b = 0; b < NB; b++)
      for (int g = 0; g < G; g++) begin
        automatic int exp = 0;
        for (int k = 0; k < K; k++) exp += w1[b][k][g] * x1[b][k] + w2[b][k][g] * x2[b][k];
        c = mk(OP_READ_ACC); c.lane = 16'(g);
        issue(NB'(1 << b), c, '0, r);
        checks++;
        if (int'(signed'(r[b][31:0])) != exp) begin
          failures++; $display("bank %0d lane %0d got %0d exp %0d", b, g, int'(signed'(r[b][31:0])), exp);
        end
      end
    // ReLU table into bank 1 MAT 0, activations in row 3
    c = mk(OP_GEN_UNARY, 0, 220); c.func = UF_RELU; c.scale = 16;
    issue(2'b10, c, '0, r);
    for (int g = 0; g < G; g++) begin
      xs[g] = $urandom_range(0, 15) - 8;
      d[g*VW +: VW] = {4'h0, 4'(xs[g])};
    end
    issue(2'b10, mk(OP_WRITE_ROW, 0, 3), d, r);
    c = mk(OP_QUERY, 0, 3); c.accumulate = 0; c.lut_base = 220; c.mode = QM_UNARY;
    issue(2'b10, c, '0, r);
    for (int g = 0; g < G; g++) begin
      c = mk(OP_READ_ACC); c.lane = 16'(g);
      issue(2'b10, c, '0, r);
      checks++;
      if (int'(signed'(r[1][31:0])) != ((xs[g] < 0) ? 0 : xs[g])) begin
        failures++; $display("relu lane %0d got %0d for x=%0d", g, int'(signed'(r[1][31:0])), xs[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
