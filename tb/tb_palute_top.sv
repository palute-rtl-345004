// tb_palute_top: end-to-end run of the chip at reduced size (2 channels x 2 banks, 2 MATs
// per bank, 256 x 128-cell MATs, 32-bit row buffer) through the host command port only.
//   1. OP_GEN_GEMM broadcast: every bank's generator writes the half-table of activation
//      segment k into MAT k (the activation vector x is shared by all banks).
//   2. OP_WRITE_ROW: each bank gets its own weight slice, two weight rows per MAT.
//   3. OP_CLEAR_ACC + OP_QUERY broadcast, twice (second row accumulates): every lane of every
//      bank must equal the dot product of x with its weight column, computed here.
//   4. OP_GEN_UNARY (GELU) + unary-mode OP_QUERY: lanes must match x*Phi(x*s/16) within one code.
//   5. KV-cache row write and read-back.
// Each mechanism (broadcast, single-bank command, GEMM and unary generation, GEMM and unary
// query, folded negative-w1 lookups, accumulate and overwrite, KV access, controller busy)
// is counted; one that never happens is a failure.
module tb_palute_top;
  import palute_pkg::*;
  localparam int NCH = 2, NB = 2, NBT = NCH * NB, K = 2, ROWS = 256, COLS = 128, VW = 8, BW = 32;
  localparam int G = COLS / VW;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, host_rsp_valid, host_done;
  cmd_t host_cmd;
  logic [COLS-1:0] host_data = 0, host_rsp_data;
  int checks = 0, failures = 0;
  int n_bcast = 0, n_single = 0, n_gen_gemm = 0, n_gen_unary = 0, n_q_gemm = 0, n_q_unary = 0;
  int n_folded = 0, n_accum = 0, n_overwrite = 0, n_kv = 0, n_busy = 0;

  palute_top #(.CH_ROWS(NCH), .CH_COLS(1), .BANK_ROWS(1), .BANK_COLS(NB), .MATS(K),
               .ROWS(ROWS), .COLS(COLS), .VALUE_W(VW), .BW_BUF(BW), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && !host_ready) n_busy++;

  initial begin
    repeat (500000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real phi(real u);
    real s = 0.0, h, a;
    int n = 2000;
    a = (u < 0) ? -u : u;
    h = a / n;
    for (int i = 0; i < n; i++)
      s += 0.5 * h * ($exp(-0.5 * (i*h)**2) + $exp(-0.5 * ((i+1)*h)**2));
    s = s / $sqrt(2.0 * 3.141592653589793);
    return (u < 0) ? 0.5 - s : 0.5 + s;
  endfunction

  task automatic issue(input cmd_t c, input logic [COLS-1:0] d, output logic [COLS-1:0] r);
    @(negedge clk);
    while (!host_ready) @(negedge clk);
    host_cmd = c; host_data = d; host_valid = 1;
    @(negedge clk);
    host_valid = 0;
    while (!host_done) begin
      if (host_rsp_valid) r = host_rsp_data;
      @(negedge clk);
    end
    if (host_rsp_valid) r = host_rsp_data;
    if (c.bcast) n_bcast++; else n_single++;
  endtask

  function automatic cmd_t mk(op_e op, int bank = 0, int mat = 0, int row = 0, logic bc = 0);
    cmd_t c = '0;
    c.op = op; c.bcast = bc; c.chan = 8'(bank / NB); c.bank = 8'(bank % NB);
    c.mat = 16'(mat); c.row = 16'(row);
    return c;
  endfunction

  int x [2*K];
  int w [2][NBT][K][G][2];   // [weight row][bank][mat][lane][pair element]
  int xs [NBT][G];

  initial begin
    logic [COLS-1:0] d, r;
    cmd_t c;
    host_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. LUT generation, broadcast
    foreach (x[i]) x[i] = $urandom_range(0, 15) - 8;
    for (int k = 0; k < K; k++) begin
      c = mk(OP_GEN_GEMM, 0, k, 40, 1); c.x1 = 4'(x[2*k]); c.x2 = 4'(x[2*k+1]);
      issue(c, '0, r);
      n_gen_gemm++;
    end
    // 2. weights
    for (int wr = 0; wr < 2; wr++)
      for (int b = 0; b < NBT; b++)
        for (int k = 0; k < K; k++) begin
          for (int g = 0; g < G; g++) begin
            w[wr][b][k][g][0] = $urandom_range(0, 15) - 8;
            w[wr][b][k][g][1] = $urandom_range(0, 15) - 8;
            if (w[wr][b][k][g][0] < 0) n_folded++;
            d[g*VW +: VW] = {4'(w[wr][b][k][g][0]), 4'(w[wr][b][k][g][1])};
          end
          issue(mk(OP_WRITE_ROW, b, k, wr), d, r);
        end
    // 3. GEMM queries
    issue(mk(OP_CLEAR_ACC, 0, 0, 0, 1), '0, r);
    for (int wr = 0; wr < 2; wr++) begin
      c = mk(OP_QUERY, 0, 0, wr, 1); c.all_mats = 1; c.accumulate = 1; c.lut_base = 40; c.mode = QM_GEMM;
      issue(c, '0, r);
      n_q_gemm++;
      n_accum++;
    end
    for (int b = 0; b < NBT; b++)
      for (int g = 0; g < G; g++) begin
        automatic int exp = 0;
        for (int wr = 0; wr < 2; wr++)
          for (int k = 0; k < K; k++) exp += w[wr][b][k][g][0] * x[2*k] + w[wr][b][k][g][1] * x[2*k+1];
        c = mk(OP_READ_ACC, b); c.lane = 16'(g);
        issue(c, '0, r);
        checks++;
        if (int'(signed'(r[31:0])) != exp) begin
          failures++; $display("GEMM bank %0d lane %0d got %0d exp %0d", b, g, int'(signed'(r[31:0])), exp);
        end
      end
    // 4. GELU through MAT 1 of every bank
    c = mk(OP_GEN_UNARY, 0, 1, 200, 1); c.func = UF_GELU; c.scale = 8'd12;
    issue(c, '0, r);
    n_gen_unary++;
    for (int b = 0; b < NBT; b++) begin
      for (int g = 0; g < G; g++) begin
        xs[b][g] = $urandom_range(0, 15) - 8;
        d[g*VW +: VW] = {4'h0, 4'(xs[b][g])};
      end
      issue(mk(OP_WRITE_ROW, b, 1, 2), d, r);
    end
    c = mk(OP_QUERY, 0, 1, 2, 1); c.accumulate = 0; c.lut_base = 200; c.mode = QM_UNARY;
    issue(c, '0, r);
    n_q_unary++;
    n_overwrite++;
    for (int b = 0; b < NBT; b++)
      for (int g = 0; g < G; g++) begin
        real ref_v, diff;
        c = mk(OP_READ_ACC, b); c.lane = 16'(g);
        issue(c, '0, r);
        ref_v = xs[b][g] * phi(xs[b][g] * 12.0 / 16.0);
        diff = real'(int'(signed'(r[31:0]))) - ref_v;
        checks++;
        if (diff > 1.0 || diff < -1.0) begin
          failures++; $display("GELU bank %0d lane %0d x=%0d got %0d ref %f", b, g, xs[b][g], int'(signed'(r[31:0])), ref_v);
        end
      end
    // 5. KV cache
    d = {4{32'h1234_5678}} ^ COLS'($urandom);
    issue(mk(OP_WRITE_ROW, 3, 1, 250), d, r);
    r = '0;
    issue(mk(OP_READ_ROW, 3, 1, 250), '0, r);
    n_kv++;
    checks++;
    if (r != d) begin failures++; $display("KV row read %h exp %h", r, d); end

    $display("mechanisms: bcast=%0d single=%0d gen_gemm=%0d gen_unary=%0d q_gemm=%0d q_unary=%0d folded=%0d accum=%0d overwrite=%0d kv=%0d busy_cycles=%0d",
             n_bcast, n_single, n_gen_gemm, n_gen_unary, n_q_gemm, n_q_unary, n_folded, n_accum, n_overwrite, n_kv, n_busy);
    begin
      automatic int cnt [11] = '{n_bcast, n_single, n_gen_gemm, n_gen_unary, n_q_gemm, n_q_unary, n_folded, n_accum, n_overwrite, n_kv, n_busy};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
