// tb_lut_generator: one GEMM and one unary generation. The write-back rows are captured from
// the wb_* port into a model of the MAT rows and compared with tables computed here
// (w1c*x1 + w2c*x2 for the half-table, max(x,0) for ReLU); row addresses, MAT number,
// row count and the 157 / 17 cycle timing (table build, then one row per cycle) are checked too.
module tb_lut_generator;
  import palute_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, kind = 0, all_mats = 0, busy, done;
  logic signed [3:0] x1 = 0, x2 = 0;
  ufunc_e func = UF_RELU;
  logic [7:0] scale = 16;
  logic [1:0] mat = 0;
  logic [8:0] lut_base = 0;
  logic wb_valid, wb_all_mats;
  logic [1:0] wb_mat;
  logic [8:0] wb_row;
  logic [7:0] wb_entry;
  int checks = 0, failures = 0;
  int mem [512];
  int nwr;

  lut_generator #(.ROWS(512), .MATS(4), .VALUE_W(8)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (wb_valid) begin
    mem[wb_row] <= int'(signed'(wb_entry));
    nwr <= nwr + 1;
    if (wb_mat != mat || wb_all_mats != all_mats) begin failures++; $display("wrong MAT target"); end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gen(input logic k, input int base, input int exp_cycles);
    int cyc = 0;
    @(negedge clk);
    nwr = 0;
    start = 1; kind = k; lut_base = 9'(base);
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_cycles) begin failures++; $display("generation+write-back %0d cycles, exp %0d", cyc, exp_cycles); end
  endtask

  initial begin
    foreach (mem[i]) mem[i] = 9999;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      x1 = 4'($urandom); x2 = 4'($urandom); mat = 2'($urandom); all_mats = rep[0];
      gen(1'b0, 100 + rep, 3 + 1 + 153);
      checks++;
      if (nwr != 153) begin failures++; $display("%0d rows written", nwr); end
      for (int a = 0; a <= 8; a++)
        for (int b = -8; b <= 8; b++) begin
          checks++;
          if (mem[100 + rep + a * 17 + b + 8] != a * x1 + b * x2) begin
            failures++;
            if (failures < 10) $display("entry (%0d,%0d) got %0d exp %0d", a, b, mem[100 + rep + a*17 + b + 8], a*x1 + b*x2);
          end
        end
    end
    func = UF_RELU; mat = 1; all_mats = 0;
    gen(1'b1, 300, 1 + 16);
    for (int x = -8; x <= 7; x++) begin
      checks++;
      if (mem[300 + x + 8] != ((x < 0) ? 0 : x)) begin failures++; $display("relu entry %0d: %0d", x, mem[300 + x + 8]); end
    end
    checks++;
    if (mem[300 + 16] != 9999 || mem[299] != 9999) begin failures++; $display("write outside the table"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
