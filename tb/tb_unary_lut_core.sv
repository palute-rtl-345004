// tb_unary_lut_core: checks the ReLU table exactly and the GELU table against a reference
// x*Phi(x*s/16) computed here by numerical integration of the normal density (trapezoid
// rule), over a sweep of scales. GELU entries may differ from the rounded exact value by one
// code (piecewise-linear Phi and rounding). Also checks the one-cycle latency.
module tb_unary_lut_core;
  import palute_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  ufunc_e func;
  logic [7:0] scale;
  logic signed [7:0] lut [UN_ROWS];
  int checks = 0, failures = 0;

  unary_lut_core #(.VALUE_W(8)) dut (.clk, .rst_n, .start, .func, .scale, .done, .lut);

  always #5 clk = ~clk;

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

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input ufunc_e f, input int s);
    @(negedge clk);
    func = f; scale = 8'(s); start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!done) begin failures++; $display("done not after one cycle"); end
    for (int x = -8; x <= 7; x++) begin
      int got, exp;
      real ref_v;
      got = lut[x + 8];
      checks++;
      if (f == UF_RELU) begin
        exp = (x < 0) ? 0 : x;
        if (got != exp) begin failures++; $display("relu x=%0d got %0d", x, got); end
      end else begin
        ref_v = x * phi(x * s / 16.0);
        if (real'(got) - ref_v > 1.0 || ref_v - real'(got) > 1.0) begin
          failures++;
          $display("gelu x=%0d s=%0d got %0d ref %f", x, s, got, ref_v);
        end
      end
    end
  endtask

  initial begin
    func = UF_RELU; scale = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(UF_RELU, 16);
    for (int s = 0; s < 256; s += 5) run(UF_GELU, s);
    run(UF_GELU, 255);
    // a GELU table must not equal plain ReLU for a moderate scale
    run(UF_GELU, 4);   // v = x/4: GELU(1) = 0.841 -> x=4 gives round(3.37) = 3
    checks++;
    if (lut[8 + 4] != 3) begin failures++; $display("gelu s=4: x=4 -> %0d (exp 3)", lut[12]); end
    run(UF_GELU, 2);   // x=-8: -8*Phi(-1) = -1.27 -> -1
    checks++;
    if (lut[0] != -1) begin failures++; $display("gelu s=2: x=-8 -> %0d (exp -1)", lut[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
