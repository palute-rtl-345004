// tb_palute_bank: a bank of 4 small MATs (256 x 128 cells, 4-lane row buffer). The test acts
// as the LUT generator on the write-back port: MAT k gets the half-table of its own
// activation pair. Weight rows are written with OP_WRITE_ROW. A broadcast GEMM query must
// leave sum_k (w1*x1_k + w2*x2_k) in every accumulator lane, a second query must add to it,
// a single-MAT overwrite query and a unary query must replace it, and a KV row must read
// back. The query latency 2 + 153 + n_mats * BEATS is checked.
module tb_palute_bank;
  import palute_pkg::*;
  localparam int K = 4, ROWS = 256, COLS = 128, VW = 8, BW = 32;
  localparam int G = COLS / VW, L = BW / VW, NBEAT = G / L;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, rsp_valid, done;
  cmd_t cmd;
  logic [COLS-1:0] cmd_data = 0, rsp_data;
  logic gw_valid = 0, gw_all_mats = 0;
  logic [1:0] gw_mat = 0;
  logic [7:0] gw_row = 0, gw_entry = 0;
  int checks = 0, failures = 0;

  palute_bank #(.MATS(K), .ROWS(ROWS), .COLS(COLS), .VALUE_W(VW), .BW_BUF(BW), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one command, return the cycles from acceptance to done and the read data
  task automatic issue(input cmd_t c, input logic [COLS-1:0] d, output int cyc, output logic [COLS-1:0] r);
    @(negedge clk);
    cmd = c; cmd_data = d; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    cyc = 0;
    while (!done) begin
      if (rsp_valid) r = rsp_data;
      @(negedge clk); cyc++;
    end
    if (rsp_valid) r = rsp_data;
  endtask

  function automatic cmd_t mk(op_e op, int mat = 0, int row = 0);
    cmd_t c = '0;
    c.op = op; c.mat = 16'(mat); c.row = 16'(row);
    return c;
  endfunction

  int x1 [K], x2 [K], w1 [K][G], w2 [K][G], w1b [K][G], w2b [K][G];
  int acc [G];

  task automatic read_acc_check(input string what);
    int cyc;
    logic [COLS-1:0] r;
    for (int g = 0; g < G; g++) begin
      cmd_t c = mk(OP_READ_ACC);
      c.lane = 16'(g);
      issue(c, '0, cyc, r);
      checks++;
      if (int'(signed'(r[31:0])) != acc[g]) begin
        failures++;
        if (failures < 20) $display("%s lane %0d got %0d exp %0d", what, g, int'(signed'(r[31:0])), acc[g]);
      end
    end
  endtask

  initial begin
    int cyc;
    logic [COLS-1:0] d, r;
    cmd_t c;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // LUT write-back into every MAT (test drives the generator port), weights rows 0 and 1
    for (int k = 0; k < K; k++) begin
      x1[k] = $urandom_range(0, 15) - 8; x2[k] = $urandom_range(0, 15) - 8;
      for (int a = 0; a <= 8; a++)
        for (int b = -8; b <= 8; b++) begin
          @(negedge clk);
          gw_valid = 1; gw_mat = 2'(k); gw_row = 8'(40 + a * 17 + b + 8); gw_entry = 8'(a * x1[k] + b * x2[k]);
        end
      @(negedge clk);
      gw_valid = 0;
      for (int g = 0; g < G; g++) begin
        w1[k][g] = $urandom_range(0, 15) - 8; w2[k][g] = $urandom_range(0, 15) - 8;
        d[g*VW +: VW] = {4'(w1[k][g]), 4'(w2[k][g])};
      end
      issue(mk(OP_WRITE_ROW, k, 0), d, cyc, r);
      for (int g = 0; g < G; g++) begin
        w1b[k][g] = $urandom_range(0, 15) - 8; w2b[k][g] = $urandom_range(0, 15) - 8;
        d[g*VW +: VW] = {4'(w1b[k][g]), 4'(w2b[k][g])};
      end
      issue(mk(OP_WRITE_ROW, k, 1), d, cyc, r);
    end

    // query 1: all MATs, accumulate from zero
    issue(mk(OP_CLEAR_ACC), '0, cyc, r);
    c = mk(OP_QUERY, 0, 0); c.all_mats = 1; c.accumulate = 1; c.lut_base = 40; c.mode = QM_GEMM;
    issue(c, '0, cyc, r);
    checks++;
    if (cyc != 2 + 153 + K * NBEAT) begin failures++; $display("query took %0d cycles, exp %0d", cyc, 2 + 153 + K * NBEAT); end
    foreach (acc[g]) begin
      acc[g] = 0;
      for (int k = 0; k < K; k++) acc[g] += w1[k][g] * x1[k] + w2[k][g] * x2[k];
    end
    read_acc_check("q1");

    // query 2: second weight row accumulates on top
    c.row = 1;
    issue(c, '0, cyc, r);
    foreach (acc[g]) for (int k = 0; k < K; k++) acc[g] += w1b[k][g] * x1[k] + w2b[k][g] * x2[k];
    read_acc_check("q2");

    // query 3: MAT 2 alone, overwrite
    c = mk(OP_QUERY, 2, 0); c.all_mats = 0; c.accumulate = 0; c.lut_base = 40; c.mode = QM_GEMM;
    issue(c, '0, cyc, r);
    checks++;
    if (cyc != 2 + 153 + NBEAT) begin failures++; $display("single-MAT query took %0d cycles", cyc); end
    foreach (acc[g]) acc[g] = w1[2][g] * x1[2] + w2[2][g] * x2[2];
    read_acc_check("q3");

    // unary table (x -> 3x-1) in MAT 1 rows 200..215, activations in row 2
    for (int x = -8; x <= 7; x++) begin
      @(negedge clk);
      gw_valid = 1; gw_mat = 1; gw_row = 8'(200 + x + 8); gw_entry = 8'(3 * x - 1);
    end
    @(negedge clk);
    gw_valid = 0;
    for (int g = 0; g < G; g++) begin
      automatic int x = $urandom_range(0, 15) - 8;
      d[g*VW +: VW] = {4'h0, 4'(x)};
      acc[g] = 3 * x - 1;
    end
    issue(mk(OP_WRITE_ROW, 1, 2), d, cyc, r);
    c = mk(OP_QUERY, 1, 2); c.accumulate = 0; c.lut_base = 200; c.mode = QM_UNARY;
    issue(c, '0, cyc, r);
    read_acc_check("unary");

    // KV cache row
    d = {4{32'hDEAD_BEEF}} ^ COLS'($urandom);
    issue(mk(OP_WRITE_ROW, 3, 250), d, cyc, r);
    issue(mk(OP_READ_ROW, 3, 250), '0, cyc, r);
    checks++;
    if (r != d) begin failures++; $display("KV row read %h exp %h", r, d); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
