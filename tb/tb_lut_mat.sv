// tb_lut_mat: a small MAT (256 rows x 128 columns, 16 groups, 32-bit row buffer = 4 lanes).
// Every group gets its own GEMM half-table (its own random activation pair) written by the
// test, its own random weight pair as index; a GEMM query must return w1*x1 + w2*x2 for every
// group, including the folded pairs with w1 < 0, after 1 + 153 cycles, under random
// back-pressure. Then a unary-mode query, masked row writes and row reads are checked.
module tb_lut_mat;
  import palute_pkg::*;
  localparam int ROWS = 256, COLS = 128, VW = 8, BW = 32;
  localparam int G = COLS / VW, L = BW / VW, NBEAT = G / L;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, rd_valid, q_start = 0, q_busy, res_valid, res_ready = 0, res_last;
  logic [7:0] wr_row = 0, rd_row = 0, q_idx_row = 0, q_lut_base = 0;
  logic [COLS-1:0] wr_data = 0, rd_data;
  logic [G-1:0] wr_group_mask = 0;
  qmode_e q_mode = QM_GEMM;
  logic [1:0] res_beat;
  logic signed [VW:0] res_data [L];
  int checks = 0, failures = 0;

  lut_mat #(.ROWS(ROWS), .COLS(COLS), .VALUE_W(VW), .BW_BUF(BW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input int row, input logic [COLS-1:0] d, input logic [G-1:0] m);
    @(negedge clk);
    wr_en = 1; wr_row = 8'(row); wr_data = d; wr_group_mask = m;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic read_row(input int row, output logic [COLS-1:0] d);
    @(negedge clk);
    rd_en = 1; rd_row = 8'(row);
    @(negedge clk);
    rd_en = 0;
    if (!rd_valid) begin failures++; $display("rd_valid missing"); end
    d = rd_data;
  endtask

  // run a query and compare against exp[]
  task automatic query(input qmode_e m, input int idx_row, input int base, input int exp [G]);
    int lat, len, got_beats;
    len = (m == QM_GEMM) ? 153 : 16;
    @(negedge clk);
    q_start = 1; q_mode = m; q_idx_row = 8'(idx_row); q_lut_base = 8'(base);
    @(negedge clk);
    q_start = 0;
    lat = 0;
    while (!res_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 1 + len) begin failures++; $display("query latency %0d exp %0d", lat, 1 + len); end
    got_beats = 0;
    while (got_beats < NBEAT) begin
      res_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (res_valid && res_ready) begin
        checks++;
        if (int'(res_beat) != got_beats || res_last != (got_beats == NBEAT - 1)) begin
          failures++; $display("beat order: got %0d exp %0d", res_beat, got_beats);
        end
        for (int l = 0; l < L; l++) begin
          int g = got_beats * L + l;
          checks++;
          if (int'(res_data[l]) != exp[g]) begin
            failures++;
            if (failures < 20) $display("mode %0d group %0d got %0d exp %0d", m, g, res_data[l], exp[g]);
          end
        end
        got_beats++;
      end
      @(negedge clk);
    end
    res_ready = 0;
    checks++;
    if (q_busy || res_valid) begin failures++; $display("MAT still busy after burst"); end
  endtask

  initial begin
    int x1 [G], x2 [G], w1 [G], w2 [G], e [G], xu [G];
    int ut [G][16];
    logic [COLS-1:0] d, rb;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int rep = 0; rep < 4; rep++) begin
      // per-group activation pair and the half-table rows of all groups
      for (int g = 0; g < G; g++) begin
        x1[g] = $urandom_range(0, 15) - 8; x2[g] = $urandom_range(0, 15) - 8;
        w1[g] = $urandom_range(0, 15) - 8; w2[g] = $urandom_range(0, 15) - 8;
        if (rep == 0 && g < 2) begin w1[g] = -8; w2[g] = (g == 0) ? -8 : 7; end
      end
      for (int a = 0; a <= 8; a++)
        for (int b = -8; b <= 8; b++) begin
          for (int g = 0; g < G; g++) d[g*VW +: VW] = 8'(a * x1[g] + b * x2[g]);
          write_row(40 + a * 17 + b + 8, d, '1);
        end
      for (int g = 0; g < G; g++) begin
        d[g*VW +: VW] = {4'(w1[g]), 4'(w2[g])};
        e[g] = w1[g] * x1[g] + w2[g] * x2[g];
      end
      write_row(0, d, '1);
      query(QM_GEMM, 0, 40, e);
    end

    // unary mode: random table per group, random x per group
    for (int r = 0; r < 16; r++) begin
      for (int g = 0; g < G; g++) begin ut[g][r] = $urandom_range(0, 255) - 128; d[g*VW +: VW] = 8'(ut[g][r]); end
      write_row(200 + r, d, '1);
    end
    for (int g = 0; g < G; g++) begin
      xu[g] = $urandom_range(0, 15) - 8;
      d[g*VW +: VW] = {4'($urandom), 4'(xu[g])};
      e[g] = ut[g][xu[g] + 8];
    end
    write_row(1, d, '1);
    query(QM_UNARY, 1, 200, e);

    // masked writes and reads (KV-cache style row access)
    d = {COLS/32{32'hA5C3_0F1E}};
    write_row(250, d, '1);
    write_row(250, '0, 16'h00F0);
    read_row(250, rb);
    for (int g = 0; g < G; g++) begin
      checks++;
      if (rb[g*VW +: VW] != ((g >= 4 && g < 8) ? 8'h00 : d[g*VW +: VW])) begin
        failures++; $display("masked write group %0d: %h", g, rb[g*VW +: VW]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
