// tb_bank_accumulator: random accumulate / overwrite beats and clears against a reference
// array kept here; every lane is read back and compared after each step.
module tb_bank_accumulator;
  localparam int G = 32, L = 4, IW = 9, AW = 32, NBEAT = G / L;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_accumulate = 0;
  logic [2:0] in_beat = 0;
  logic signed [IW-1:0] in_data [L];
  logic [4:0] rd_lane = 0;
  logic signed [AW-1:0] rd_data;
  int checks = 0, failures = 0;
  int model [G];

  bank_accumulator #(.GROUPS(G), .LANES(L), .IN_W(IW), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int g = 0; g < G; g++) begin
      rd_lane = 5'(g);
      #1;
      checks++;
      if (rd_data != model[g]) begin
        failures++;
        if (failures < 10) $display("lane %0d got %0d exp %0d", g, rd_data, model[g]);
      end
    end
  endtask

  initial begin
    foreach (in_data[l]) in_data[l] = 0;
    foreach (model[g]) model[g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int step = 0; step < 400; step++) begin
      automatic int kind = $urandom_range(0, 19);
      @(negedge clk);
      if (kind == 0) begin
        clear = 1;
        foreach (model[g]) model[g] = 0;
      end else begin
        automatic int b = $urandom_range(0, NBEAT - 1);
        in_valid = 1; in_beat = 3'(b); in_accumulate = (kind > 3);
        for (int l = 0; l < L; l++) begin
          automatic int v = $urandom_range(0, 511) - 256;
          in_data[l] = IW'(v);
          model[b * L + l] = in_accumulate ? model[b * L + l] + v : v;
        end
      end
      @(negedge clk);
      clear = 0; in_valid = 0;
      if (step % 8 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
