// tb_nocf_ic_if -- self-checking test of the integrity core interface.
//
// Writes command words into the inbound link and checks the decoded strobes
// one cycle later: new rule (with its fields), flush, enforce read, enforce
// write, and policy_busy only in update cycles. On the outbound side it offers
// fault reports from both channels at once and checks read-first ordering, the
// ready handshakes, irq and back-pressure when the outbound FIFO is full.
module tb_nocf_ic_if;
  import nocf_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  logic fsl_in_write, fsl_in_full, fsl_out_read, fsl_out_exists, irq;
  logic [31:0] fsl_in_data, fsl_out_data;
  logic upd_valid, upd_flush, policy_busy, enforce_rd, enforce_wr;
  rule_t upd_rule;
  logic rep_rd_valid, rep_rd_ready, rep_wr_valid, rep_wr_ready;
  logic [31:0] rep_rd_data, rep_wr_data;
  int checks = 0, failures = 0;

  nocf_ic_if #(.FSL_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  task automatic step; @(posedge clk); @(negedge clk); #1; endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [31:0] w);
    fsl_in_write = 1; fsl_in_data = w; step(); fsl_in_write = 0; #1;
  endtask

  initial begin
    fsl_in_write = 0; fsl_in_data = 0; fsl_out_read = 0;
    rep_rd_valid = 0; rep_wr_valid = 0; rep_rd_data = 0; rep_wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1; #1;
    check(!upd_valid && !enforce_rd && !enforce_wr && !irq && !policy_busy, "idle after reset");
    // new rule: base 0x8400_0000, read+write, size code 9
    send(32'h3984_0000);
    check(upd_valid && !upd_flush && policy_busy, "new rule strobe");
    check(upd_rule.valid && upd_rule.rd && upd_rule.wr && upd_rule.size == 4'd9 && upd_rule.base == 24'h840000,
          "new rule fields");
    step();
    check(!upd_valid && !policy_busy, "one command per word");
    send(make_rule_cmd(32'h0000_1200, 1'b1, 1'b0, 4'd1));
    check(upd_valid && upd_rule.rd && !upd_rule.wr && upd_rule.size == 4'd1 && upd_rule.base == 24'h000012,
          "make_rule_cmd encoding");
    step();
    send(make_op_cmd(CMD_FLUSH));
    check(upd_valid && upd_flush && policy_busy, "flush strobe");
    step();
    send(make_op_cmd(CMD_ENFORCE_READ));
    check(enforce_rd && !enforce_wr && !policy_busy, "enforce read");
    step();
    send(make_op_cmd(CMD_ENFORCE_WRITE));
    check(enforce_wr && !enforce_rd && !upd_valid, "enforce write");
    step();
    // back-to-back commands: consumed one per cycle in order
    fsl_in_write = 1; fsl_in_data = make_op_cmd(CMD_ENFORCE_WRITE); step();
    fsl_in_data = make_op_cmd(CMD_FLUSH); #1;
    check(enforce_wr, "back-to-back 1");
    step(); fsl_in_write = 0; #1;
    check(upd_flush, "back-to-back 2");
    step();
    check(!upd_valid && !enforce_wr, "inbound drained");

    // outbound: both channels report in the same cycle
    rep_rd_valid = 1; rep_rd_data = 32'h1111_1111;
    rep_wr_valid = 1; rep_wr_data = 32'h2222_2220; #1;
    check(rep_rd_ready && !rep_wr_ready, "read report first");
    step(); rep_rd_valid = 0; #1;
    check(rep_wr_ready && irq && fsl_out_exists && fsl_out_data == 32'h1111_1111, "irq with read report at head");
    step(); rep_wr_valid = 0; #1;
    // fill to full
    rep_wr_valid = 1; rep_wr_data = 32'h3333_3330; step(); step(); rep_wr_valid = 1; #1;
    check(!rep_wr_ready && !rep_rd_ready, "no report accepted while outbound FIFO full");
    rep_wr_valid = 0;
    // drain in order
    begin
      static logic [31:0] exp[4] = '{32'h1111_1111, 32'h2222_2220, 32'h3333_3330, 32'h3333_3330};
      for (int i = 0; i < 4; i++) begin
        check(fsl_out_exists && fsl_out_data == exp[i], $sformatf("outbound word %0d", i));
        fsl_out_read = 1; step(); fsl_out_read = 0; #1;
      end
    end
    check(!irq && !fsl_out_exists, "irq drops when reports are read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
