// palute_ctrl: the system controller of the logic die. It takes the commands of the
// scheduling flow from the host and hands them to the banks:
//   (1) weights and tokens arrive             -> OP_WRITE_ROW (weights in the low rows)
//   (2) build LUTs from the incoming tokens   -> OP_GEN_GEMM / OP_GEN_UNARY
//   (3) write them into the DRAM array        -> done by the bank's LUT generator
//   (4) query with the weights as indices     -> OP_QUERY, results into the bank accumulator
//   (5) KV cache read/write                   -> OP_WRITE_ROW / OP_READ_ROW (high rows)
// A command goes to one bank (cmd.chan, cmd.bank) or, with cmd.bcast, to every bank of the
// chip at once, which is how all banks query in parallel. The controller holds the command,
// raises bk_valid for every target until it is accepted, waits for every target's done, then
// pulses host_done; for a single-bank read it returns that bank's data with host_rsp_valid.
// One host command is in flight at a time (host_ready is low meanwhile).
// The paper names the controller and the flow; this command set and the handshake are this
// design's own.
module palute_ctrl
  import palute_pkg::*;
#(
  parameter int unsigned NCH  = 16,
  parameter int unsigned NB   = 16,
  parameter int unsigned COLS = 1024,
  localparam int unsigned NBT = NCH * NB
) (
  input  logic             clk,
  input  logic             rst_n,
  // host side
  input  logic             host_valid,
  output logic             host_ready,
  input  cmd_t             host_cmd,
  input  logic [COLS-1:0]  host_data,
  output logic             host_rsp_valid,
  output logic [COLS-1:0]  host_rsp_data,
  output logic             host_done,
  // bank side (bank index = chan * NB + bank)
  output cmd_t             bk_cmd,
  output logic [COLS-1:0]  bk_data,
  output logic [NBT-1:0]   bk_valid,
  input  logic [NBT-1:0]   bk_ready,
  input  logic [NBT-1:0]   bk_done,
  input  logic [NBT-1:0]   bk_rsp_valid,
  input  logic [COLS-1:0]  bk_rsp_data [NBT]
);

  logic [NBT-1:0] to_issue, to_finish;
  logic           active;
  int unsigned    tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active         <= 1'b0;
      to_issue       <= '0;
      to_finish      <= '0;
      tgt            <= 0;
      bk_cmd         <= '0;
      bk_data        <= '0;
      host_done      <= 1'b0;
      host_rsp_valid <= 1'b0;
      host_rsp_data  <= '0;
    end else begin
      host_done      <= 1'b0;
      host_rsp_valid <= 1'b0;
      if (!active) begin
        if (host_valid) begin
          int unsigned t;
          t = int'(host_cmd.chan) * NB + int'(host_cmd.bank);
          bk_cmd  <= host_cmd;
          bk_data <= host_data;
          tgt     <= t;
          if (host_cmd.bcast) begin
            to_issue  <= '1;
            to_finish <= '1;
          end else begin
            to_issue  <= NBT'(1) << t;
            to_finish <= NBT'(1) << t;
          end
          active <= 1'b1;
        end
      end else begin
        to_issue  <= to_issue & ~bk_ready;
        to_finish <= to_finish & ~bk_done;
        if (!bk_cmd.bcast && bk_rsp_valid[tgt]) begin
          host_rsp_valid <= 1'b1;
          host_rsp_data  <= bk_rsp_data[tgt];
        end
        if ((to_finish & ~bk_done) == '0 && (to_issue & ~bk_ready) == '0) begin
          host_done <= 1'b1;
          active    <= 1'b0;
        end
      end
    end
  end

  assign bk_valid   = active ? to_issue : '0;
  assign host_ready = !active;

  a_target_exists: assert property (@(posedge clk) disable iff (!rst_n)
    (host_valid && host_ready && !host_cmd.bcast) |->
      (int'(host_cmd.chan) * NB + int'(host_cmd.bank) < NBT));

endmodule
