// tb_gemm_lut_core: drives every activation pair (x1, x2) in [-8,7]^2 into the GEMM core and
// checks all 153 half-table entries against w1c*x1 + w2c*x2 computed here, plus the
// three-cycle generation latency.
module tb_gemm_lut_core;
  import palute_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [3:0] x1, x2;
  logic signed [7:0] lut [HT_ROWS];
  int checks = 0, failures = 0;

  gemm_lut_core #(.VALUE_W(8)) dut (.clk, .rst_n, .start, .x1, .x2, .busy, .done, .lut);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x1 = 0; x2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = -8; a <= 7; a++) begin
      for (int b = -8; b <= 7; b++) begin
        int lat;
        @(negedge clk);
        x1 = 4'(a); x2 = 4'(b); start = 1;
        @(negedge clk);
        start = 0;
        x1 = 4'($urandom); x2 = 4'($urandom);   // inputs need only be valid with start
        lat = 0;
        while (!done) begin @(negedge clk); lat++; end
        checks++;
        if (lat != 3) begin failures++; $display("latency %0d != 3", lat); end
        for (int w1 = 0; w1 <= 8; w1++)
          for (int w2 = -8; w2 <= 8; w2++) begin
            int exp, got;
            exp = w1 * a + w2 * b;
            got = lut[w1 * 17 + w2 + 8];
            checks++;
            if (got != exp) begin
              failures++;
              if (failures < 10) $display("x=(%0d,%0d) w=(%0d,%0d) got %0d exp %0d", a, b, w1, w2, got, exp);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
