// unary_lut_core: the element-wise unary core of a LUT generator. It produces the 16-entry
// table f(x) for every 4-bit activation x = -8..7, entry r = x + 8, for f = ReLU or GELU.
//
// Number format (this design's own choice; the paper only names the function): x is an INT4
// code of the real value v = x * s / 16, where s is the unsigned Q4.4 scale input. The table
// stores f(v) in the same scale, rounded: y = round(f(v) * 16 / s). For GELU,
// f(v) = v * Phi(v), so y = round(x * Phi(v)); since 0 <= Phi <= 1, y stays within [-8, 7].
// Phi, the standard normal CDF, is a piecewise-linear fit through Phi(0), Phi(0.5), ... Phi(3)
// in units of 1/256, and 1 beyond 3; Phi(-u) = 1 - Phi(u). ReLU is exact: y = max(x, 0).
// Timing: start is sampled on a rising edge, the whole table is computed in parallel and done
// is high the next cycle; lut[] holds until the next start.
module unary_lut_core
  import palute_pkg::*;
#(
  parameter int unsigned VALUE_W = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  ufunc_e                    func,
  input  logic [7:0]                scale,
  output logic                      done,
  output logic signed [VALUE_W-1:0] lut [UN_ROWS]
);

  // Phi(0.5*i) * 256, i = 0..6 (rounded), Phi(3) taken as 1.
  localparam int PHI_Q8 [7] = '{128, 177, 215, 239, 250, 254, 256};

  // Phi(u) * 256 for u = t/16, t >= 0, linear between the 0.5-spaced knots.
  function automatic int phi_pos(input int t);
    int seg, frac;
    seg  = t / 8;
    frac = t % 8;
    if (seg >= 6) return 256;
    return PHI_Q8[seg] + ((PHI_Q8[seg+1] - PHI_Q8[seg]) * frac + 4) / 8;
  endfunction

  function automatic logic signed [VALUE_W-1:0] entry(input int x, input ufunc_e f, input int s);
    int t, phi, p;
    if (f == UF_RELU) return VALUE_W'((x < 0) ? 0 : x);
    t   = x * s;                                  // v in units of 1/16
    phi = (t >= 0) ? phi_pos(t) : 256 - phi_pos(-t);
    p   = x * phi + 128;                          // round half up
    return VALUE_W'(p >>> 8);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int r = 0; r < UN_ROWS; r++) lut[r] <= '0;
    end else begin
      done <= start;
      if (start)
        for (int r = 0; r < UN_ROWS; r++) lut[r] <= entry(r - 8, func, int'(scale));
    end
  end

endmodule
