// tb_palute_ctrl: the system controller against 2 x 2 bank models kept here. Each model
// accepts after a random delay, finishes after another and answers reads with its own tag.
// Single-bank commands must reach only their bank and return its data; broadcast commands
// must reach every bank exactly once, and host_done must wait for the slowest bank.
module tb_palute_ctrl;
  import palute_pkg::*;
  localparam int NCH = 2, NB = 2, NBT = NCH * NB, COLS = 32;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, host_rsp_valid, host_done;
  cmd_t host_cmd, bk_cmd;
  logic [COLS-1:0] host_data = 0, host_rsp_data, bk_data;
  logic [NBT-1:0] bk_valid, bk_ready, bk_done, bk_rsp_valid;
  logic [COLS-1:0] bk_rsp_data [NBT];
  int checks = 0, failures = 0;
  int accepts [NBT];
  int finish_at [NBT];
  int busy_left [NBT], wait_left [NBT];
  logic [NBT-1:0] busy;
  int cycle = 0;

  palute_ctrl #(.NCH(NCH), .NB(NB), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // bank models
  for (genvar b = 0; b < NBT; b++) begin : g_bm
    assign bk_ready[b] = !busy[b] && wait_left[b] == 0;
    always @(posedge clk) begin
      bk_done[b] <= 1'b0;
      bk_rsp_valid[b] <= 1'b0;
      if (!rst_n) begin
        busy[b] <= 0; wait_left[b] <= 0;
      end else if (!busy[b]) begin
        if (bk_valid[b] && bk_ready[b]) begin
          accepts[b]++;
          busy[b] <= 1;
          busy_left[b] <= $urandom_range(0, 12);
          wait_left[b] <= $urandom_range(0, 3);
        end else if (wait_left[b] > 0) wait_left[b] <= wait_left[b] - 1;
      end else if (busy_left[b] > 0) busy_left[b] <= busy_left[b] - 1;
      else begin
        busy[b] <= 0;
        bk_done[b] <= 1'b1;
        finish_at[b] <= cycle;
        bk_rsp_valid[b] <= (bk_cmd.op == OP_READ_ROW);
        bk_rsp_data[b] <= COLS'(32'hB000 + b) ^ bk_data;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_cmd = '0;
    foreach (accepts[b]) accepts[b] = 0;
    foreach (bk_rsp_data[b]) bk_rsp_data[b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int prev_acc [NBT];
      int t, done_cycle;
      logic [COLS-1:0] got;
      automatic logic got_rsp = 0;
      prev_acc = accepts;
      @(negedge clk);
      host_cmd = '0;
      host_cmd.op = (n % 3 == 0) ? OP_READ_ROW : OP_QUERY;
      host_cmd.bcast = (n % 4 == 1);
      host_cmd.chan = 8'($urandom_range(0, NCH - 1));
      host_cmd.bank = 8'($urandom_range(0, NB - 1));
      host_data = COLS'($urandom);
      t = int'(host_cmd.chan) * NB + int'(host_cmd.bank);
      host_valid = 1;
      @(posedge clk);
      @(negedge clk);
      host_valid = 0;
      while (!host_done) begin
        if (host_rsp_valid) begin got = host_rsp_data; got_rsp = 1; end
        @(negedge clk);
      end
      if (host_rsp_valid) begin got = host_rsp_data; got_rsp = 1; end
      done_cycle = cycle;
      for (int b = 0; b < NBT; b++) begin
        automatic int exp = (host_cmd.bcast || b == t) ? 1 : 0;
        checks++;
        if (accepts[b] - prev_acc[b] != exp) begin
          failures++; $display("cmd %0d bank %0d accepted %0d times, exp %0d", n, b, accepts[b] - prev_acc[b], exp);
        end
        if (exp == 1) begin
          checks++;
          if (finish_at[b] >= done_cycle) begin failures++; $display("host_done before bank %0d finished", b); end
        end
      end
      if (host_cmd.op == OP_READ_ROW && !host_cmd.bcast) begin
        checks++;
        if (!got_rsp || got != (COLS'(32'hB000 + t) ^ host_data)) begin
          failures++; $display("read data %h from bank %0d wrong", got, t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
