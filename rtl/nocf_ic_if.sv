// nocf_ic_if -- integrity core interface of one interposer.
//
// Terminates the two directions of the policy configuration link (one
// nocf_fsl_fifo each way). Incoming 32-bit commands (layout in nocf_pkg) are
// taken from the head of the inbound FIFO one per cycle:
//   new rule / flush  -> a one-cycle update strobe to the PDP; policy_busy is
//                        high in that cycle so no decision is made on a policy
//                        that is changing.
//   enforce read/write -> a one-cycle enforce pulse to that channel.
// Outbound, the two channels' fault reports are merged into the outbound FIFO,
// the read channel first when both are pending. irq is high while the
// outbound FIFO holds a report; it is the interposer's interrupt line.
//
// Link side: the integrity core writes commands with fsl_in_write (blocked
// while fsl_in_full) and reads reports with fsl_out_read when fsl_out_exists.
//
// The command set, the buffering of both directions and one interrupt line per
// interposer follow the paper; the read-first arbitration and the use of the
// FIFO's exists flag as interrupt are this design's choices.
module nocf_ic_if
  import nocf_pkg::*;
#(
  parameter int unsigned FSL_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // policy configuration link, integrity core -> interposer
  input  logic             fsl_in_write,
  input  logic [FSL_W-1:0] fsl_in_data,
  output logic             fsl_in_full,
  // policy configuration link, interposer -> integrity core
  input  logic             fsl_out_read,
  output logic [FSL_W-1:0] fsl_out_data,
  output logic             fsl_out_exists,
  output logic             irq,
  // to the PDP
  output logic             upd_valid,
  output logic             upd_flush,
  output rule_t            upd_rule,
  output logic             policy_busy,
  // to the channels
  output logic             enforce_rd,
  output logic             enforce_wr,
  input  logic             rep_rd_valid,
  output logic             rep_rd_ready,
  input  logic [FSL_W-1:0] rep_rd_data,
  input  logic             rep_wr_valid,
  output logic             rep_wr_ready,
  input  logic [FSL_W-1:0] rep_wr_data
);
  logic [FSL_W-1:0] cmd_word;
  logic             cmd_exists;
  cmd_t             cmd;
  logic             out_full, out_wr;
  logic [FSL_W-1:0] out_data;

  nocf_fsl_fifo #(.WIDTH(FSL_W), .DEPTH(FSL_DEPTH)) u_in (
    .clk, .rst_n,
    .wr_en(fsl_in_write), .wr_data(fsl_in_data), .full(fsl_in_full),
    .rd_en(cmd_exists), .rd_data(cmd_word), .exists(cmd_exists)
  );

  assign cmd = cmd_t'(cmd_word);

  always_comb begin
    upd_valid  = 1'b0;
    upd_flush  = 1'b0;
    enforce_rd = 1'b0;
    enforce_wr = 1'b0;
    if (cmd_exists) begin
      unique case (cmd.op)
        CMD_NEW_RULE:      upd_valid = 1'b1;
        CMD_FLUSH:         begin upd_valid = 1'b1; upd_flush = 1'b1; end
        CMD_ENFORCE_READ:  enforce_rd = 1'b1;
        CMD_ENFORCE_WRITE: enforce_wr = 1'b1;
        default: ;
      endcase
    end
  end
  assign policy_busy    = upd_valid;
  assign upd_rule.valid = 1'b1;
  assign upd_rule.rd    = cmd.rd;
  assign upd_rule.wr    = cmd.wr;
  assign upd_rule.size  = cmd.size;
  assign upd_rule.base  = cmd.base;

  assign rep_rd_ready = !out_full;
  assign rep_wr_ready = !out_full && !rep_rd_valid;
  assign out_wr       = !out_full && (rep_rd_valid || rep_wr_valid);
  assign out_data     = rep_rd_valid ? rep_rd_data : rep_wr_data;

  nocf_fsl_fifo #(.WIDTH(FSL_W), .DEPTH(FSL_DEPTH)) u_out (
    .clk, .rst_n,
    .wr_en(out_wr), .wr_data(out_data), .full(out_full),
    .rd_en(fsl_out_read), .rd_data(fsl_out_data), .exists(fsl_out_exists)
  );
  assign irq = fsl_out_exists;
endmodule
