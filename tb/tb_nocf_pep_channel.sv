// tb_nocf_pep_channel -- self-checking test of the PEP channel controller.
//
// Three instances: a read channel, a write channel and a read channel reset
// into the debug permit state. The testbench plays the address filter, the PDP
// and the integrity core link. It walks each channel through
// enforce -> request -> wait -> check -> respond/resume -> enforce, checks the
// decisions passed to the filter, the fault report word, that an enforce
// command is needed to leave wait, that no decision is made while the policy
// is being updated, and the DECERR responses: ARLEN+1 R beats with RLAST on
// the last (with back-pressure) and a single B beat. Cycle counts of the
// request, resume and respond phases are checked against the state sequence.
module tb_nocf_pep_channel;
  import nocf_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic      policy_busy, pdp_allow, cur_valid, rep_ready, enforce_cmd, err_ready;
  axi_addr_t cur_req;
  // read instance
  logic r_dec_valid, r_dec_allow, r_rep_valid, r_err_active, r_err_valid, r_err_last;
  logic [31:0] r_rep_data; logic [3:0] r_err_id; ch_state_t r_state;
  // write instance
  logic w_dec_valid, w_dec_allow, w_rep_valid, w_err_active, w_err_valid, w_err_last;
  logic [31:0] w_rep_data; logic [3:0] w_err_id; ch_state_t w_state;
  // permit instance
  logic p_dec_valid, p_dec_allow, p_rep_valid, p_err_active, p_err_valid, p_err_last;
  logic [31:0] p_rep_data; logic [3:0] p_err_id; ch_state_t p_state;

  nocf_pep_channel #(.IS_READ(1'b1)) u_rd (
    .clk, .rst_n, .policy_busy, .pdp_allow, .cur_valid, .cur_req,
    .dec_valid(r_dec_valid), .dec_allow(r_dec_allow),
    .rep_valid(r_rep_valid), .rep_ready, .rep_data(r_rep_data), .enforce_cmd,
    .err_active(r_err_active), .err_valid(r_err_valid), .err_ready, .err_id(r_err_id),
    .err_last(r_err_last), .state(r_state));
  nocf_pep_channel #(.IS_READ(1'b0)) u_wr (
    .clk, .rst_n, .policy_busy, .pdp_allow, .cur_valid, .cur_req,
    .dec_valid(w_dec_valid), .dec_allow(w_dec_allow),
    .rep_valid(w_rep_valid), .rep_ready, .rep_data(w_rep_data), .enforce_cmd,
    .err_active(w_err_active), .err_valid(w_err_valid), .err_ready, .err_id(w_err_id),
    .err_last(w_err_last), .state(w_state));
  nocf_pep_channel #(.IS_READ(1'b1), .START_PERMIT(1'b1)) u_pm (
    .clk, .rst_n, .policy_busy, .pdp_allow, .cur_valid, .cur_req,
    .dec_valid(p_dec_valid), .dec_allow(p_dec_allow),
    .rep_valid(p_rep_valid), .rep_ready, .rep_data(p_rep_data), .enforce_cmd,
    .err_active(p_err_active), .err_valid(p_err_valid), .err_ready, .err_id(p_err_id),
    .err_last(p_err_last), .state(p_state));

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

  // One denied request through the read channel (is_read=1) or write channel.
  task automatic deny_flow(bit rd, bit grant, logic [7:0] len, bit backpressure);
    int n_beats, cyc;
    cur_req = '0;
    cur_req.addr = 32'h4000_1235; cur_req.id = 4'hB; cur_req.len = len;
    cur_valid = 1; pdp_allow = 0; policy_busy = 0; rep_ready = 0; enforce_cmd = 0; err_ready = 0;
    #1;
    check(!(rd ? r_dec_valid : w_dec_valid), "deny is not sent to the filter in enforce");
    step();
    check((rd ? r_state : w_state) == CH_REQUEST, "deny -> request");
    check((rd ? r_rep_valid : w_rep_valid), "report offered");
    check((rd ? r_rep_data : w_rep_data) == {31'h2000_091A, rd}, "report word = {addr[31:1], is_read}");
    step();
    check((rd ? r_state : w_state) == CH_REQUEST, "request held while link full");
    rep_ready = 1; step(); rep_ready = 0;
    check((rd ? r_state : w_state) == CH_WAIT, "request -> wait");
    repeat (5) step();
    check((rd ? r_state : w_state) == CH_WAIT, "wait until enforce command");
    // the integrity core may update the policy; the next enforce re-checks
    pdp_allow = grant;
    enforce_cmd = 1; step(); enforce_cmd = 0;
    check((rd ? r_state : w_state) == CH_CHECK, "wait -> check");
    policy_busy = 1; #1;
    check(!(rd ? r_dec_valid : w_dec_valid), "no decision while policy busy");
    step();
    check((rd ? r_state : w_state) == CH_CHECK, "check waits for a decision");
    policy_busy = 0; #1;
    check((rd ? r_dec_valid : w_dec_valid) && (rd ? r_dec_allow : w_dec_allow) == grant,
          "check forwards the decision, allow or deny");
    step();
    cur_valid = 0;
    if (grant) begin
      check((rd ? r_state : w_state) == CH_RESUME, "allow -> resume");
      step();
      check((rd ? r_state : w_state) == CH_ENFORCE, "resume -> enforce");
      return;
    end
    check((rd ? r_state : w_state) == CH_RESPOND && (rd ? r_err_active : w_err_active), "deny -> respond");
    n_beats = 0; cyc = 0;
    while ((rd ? r_state : w_state) == CH_RESPOND && cyc < 600) begin
      err_ready = backpressure ? (cyc % 3 != 1) : 1'b1;
      #1;
      check((rd ? r_err_valid : w_err_valid) && (rd ? r_err_id : w_err_id) == 4'hB, "error beat id");
      if (err_ready) begin
        n_beats++;
        check((rd ? r_err_last : w_err_last) == (rd ? (n_beats == int'(len) + 1) : 1'b1), "RLAST/BLAST position");
      end
      step(); cyc++;
    end
    err_ready = 0;
    check(n_beats == (rd ? int'(len) + 1 : 1), $sformatf("number of error beats %0d", n_beats));
    if (rd) begin
      check(r_state == CH_RESUME, "read respond -> resume");
      step();
    end
    check((rd ? r_state : w_state) == CH_ENFORCE, "back to enforce");
  endtask

  initial begin
    policy_busy = 0; pdp_allow = 0; cur_valid = 0; cur_req = '0; rep_ready = 0;
    enforce_cmd = 0; err_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1; #1;
    check(r_state == CH_ENFORCE && w_state == CH_ENFORCE && p_state == CH_PERMIT, "reset states");
    // allowed request: decision passed through, no state change
    cur_valid = 1; pdp_allow = 1; #1;
    check(r_dec_valid && r_dec_allow && w_dec_valid && w_dec_allow, "allow decision to filter");
    policy_busy = 1; #1;
    check(!r_dec_valid && !w_dec_valid, "no decision while policy is updated");
    policy_busy = 0; pdp_allow = 0; #1;
    check(p_dec_valid && p_dec_allow, "permit state allows everything");
    step();
    check(p_state == CH_PERMIT && !p_rep_valid, "permit state never reports");
    cur_valid = 0; step();
    // fresh channels for each flow (the other channel sees the same inputs)
    rst_n = 0; step(); rst_n = 1; step();
    deny_flow(1, 0, 8'd3, 1);
    rst_n = 0; step(); rst_n = 1; step();
    deny_flow(0, 0, 8'd7, 1);
    rst_n = 0; step(); rst_n = 1; step();
    deny_flow(1, 1, 8'd0, 0);
    rst_n = 0; step(); rst_n = 1; step();
    deny_flow(1, 0, 8'd255, 0);
    rst_n = 0; step(); rst_n = 1; step();
    deny_flow(0, 1, 8'd0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
