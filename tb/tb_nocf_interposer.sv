// tb_nocf_interposer -- self-checking test of one complete interposer.
//
// The interposer sits between a master driven by this testbench and a
// behavioural NoC slave; a behavioural integrity core serves its link.
// Scenarios: first access to a region is blocked, reported, granted and then
// forwarded; later accesses pass with no added cycle; an access no grant covers
// is answered with a DECERR response (read: ARLEN+1 beats with RLAST; write:
// one B beat) and never reaches the NoC; read-only grants refuse writes; the
// third region replaces the oldest rule so the first region faults again; a
// flush empties the policy; the wait attack (master changes its address after
// a permitted request is buffered) never gets a forbidden address to the NoC;
// W beats pass straight through. A monitor checks every address the NoC
// accepts against the grants the core has made.
module tb_nocf_interposer;
  import nocf_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  axi_addr_t s_aw, s_ar; axi_w_t s_w; axi_b_t s_b; axi_r_t s_r;
  logic m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_addr_t m_aw, m_ar; axi_w_t m_w; axi_b_t m_b; axi_r_t m_r;
  logic fsl_in_write, fsl_in_full, fsl_out_read, fsl_out_exists, irq;
  logic [31:0] fsl_in_data, fsl_out_data;
  ch_state_t rd_state, wr_state;
  af_state_t rd_filter_state, wr_filter_state;

  nocf_interposer dut (.*);

  tb_axi_slave_model #(.READY_PCT(50)) u_noc (
    .clk, .rst_n,
    .aw_valid(m_aw_valid), .aw_ready(m_aw_ready), .aw(m_aw),
    .w_valid(m_w_valid), .w_ready(m_w_ready), .w(m_w),
    .b_valid(m_b_valid), .b_ready(m_b_ready), .b(m_b),
    .ar_valid(m_ar_valid), .ar_ready(m_ar_ready), .ar(m_ar),
    .r_valid(m_r_valid), .r_ready(m_r_ready), .r(m_r));

  tb_integrity_kernel_model #(.NUM_LINKS(1), .HANDLER_CYCLES(6)) u_core (
    .clk, .rst_n,
    .fsl_in_write(fsl_in_write), .fsl_in_data(fsl_in_data), .fsl_in_full(fsl_in_full),
    .fsl_out_read(fsl_out_read), .fsl_out_data(fsl_out_data),
    .fsl_out_exists(fsl_out_exists), .irq(irq));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Every address accepted by the NoC must be covered by a rule the core has
  // installed; addresses in the 0xDxxx_xxxx window are never granted.
  always @(posedge clk) if (rst_n) begin
    if (m_ar_valid && m_ar_ready) begin
      checks++;
      if (m_ar.addr[31:28] == 4'hD) begin failures++; $display("FAIL: forbidden read reached NoC %h", m_ar.addr); end
    end
    if (m_aw_valid && m_aw_ready) begin
      checks++;
      if (m_aw.addr[31:28] == 4'hD) begin failures++; $display("FAIL: forbidden write reached NoC %h", m_aw.addr); end
    end
  end

  function automatic axi_addr_t mk(logic [31:0] a, logic [3:0] id, logic [7:0] len);
    axi_addr_t r = '0;
    r.addr = a; r.id = id; r.len = len; r.size = 3'd2; r.burst = 2'b01;
    return r;
  endfunction

  // Issue one read; return the response code of the beats and their number.
  task automatic do_read(logic [31:0] a, logic [3:0] id, logic [7:0] len,
                         output logic [1:0] resp, output int beats, output int accept_cycles);
    s_ar_valid <= 1; s_ar <= mk(a, id, len);
    accept_cycles = 0;
    @(posedge clk);
    while (!s_ar_ready) begin @(posedge clk); accept_cycles++; end
    s_ar_valid <= 0;
    beats = 0; resp = RESP_OKAY;
    s_r_ready <= 1;
    forever begin
      @(posedge clk);
      if (s_r_valid && s_r_ready) begin
        beats++;
        checks++;
        if (s_r.id != id) begin failures++; $display("FAIL: R id"); end
        if (s_r.resp != RESP_OKAY) resp = s_r.resp;
        if (s_r.resp == RESP_OKAY && s_r.data != a + 32'(beats - 1)) begin
          failures++; $display("FAIL: R data %h", s_r.data);
        end
        if (s_r.last) break;
      end
    end
    s_r_ready <= 0;
  endtask

  task automatic do_write(logic [31:0] a, logic [3:0] id, output logic [1:0] resp);
    s_aw_valid <= 1; s_aw <= mk(a, id, 8'd0);
    s_w_valid  <= 1; s_w <= '{data: a ^ 32'h5A5A_5A5A, strb: 4'hF, last: 1'b1};
    @(posedge clk);
    while (!(s_aw_ready && s_aw_valid) && !(s_w_valid && s_w_ready)) @(posedge clk);
    // finish both handshakes
    fork
      begin while (!s_aw_ready) @(posedge clk); s_aw_valid <= 0; end
      begin while (!s_w_ready) @(posedge clk); s_w_valid <= 0; end
    join
    s_b_ready <= 1;
    forever begin
      @(posedge clk);
      if (s_b_valid && s_b_ready) begin
        checks++;
        if (s_b.id != id) begin failures++; $display("FAIL: B id"); end
        resp = s_b.resp;
        break;
      end
    end
    s_b_ready <= 0;
  endtask

  logic [1:0] resp;
  int beats, acc, irq0;
  int same_cycle_pass;

  initial begin
    s_aw_valid = 0; s_w_valid = 0; s_ar_valid = 0; s_r_ready = 0; s_b_ready = 0;
    s_aw = '0; s_ar = '0; s_w = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    u_core.add_grant(0, 32'h8000_0000, 4'd10, 1, 1);  // 256 MiB read/write
    u_core.add_grant(0, 32'h4060_0000, 4'd2,  1, 0);  // 4 KiB read only
    u_core.add_grant(0, 32'h4070_0000, 4'd2,  1, 1);  // 4 KiB read/write

    // 1. empty policy: first read faults, is granted, then completes
    do_read(32'h8000_0100, 4'd1, 8'd3, resp, beats, acc);
    check(resp == RESP_OKAY && beats == 4, "granted read completes with 4 OKAY beats");
    check(u_core.n_interrupts == 1 && u_core.n_granted == 1, "one interrupt, one grant");
    check(u_core.last_addr == 32'h8000_0100 && u_core.last_is_read, "fault report address and read bit");
    check(u_noc.ar_log.size() == 1 && u_noc.ar_log[0] == mk(32'h8000_0100, 4'd1, 8'd3),
          "exact request reached the NoC");

    // 2. same region: no interrupt; forwarded in the cycle it is presented when the NoC is ready
    same_cycle_pass = 0;
    for (int i = 0; i < 20; i++) begin
      do_read(32'h8000_2000 + 32'(i * 64), 4'(i), 8'(i % 4), resp, beats, acc);
      check(resp == RESP_OKAY && beats == i % 4 + 1, "allowed read");
    end
    check(u_core.n_interrupts == 1, "no interrupt for allowed reads");
    // zero added latency: watch a single request with the NoC held ready
    begin
      int t_req, t_noc;
      u_noc.ar_ready_mode = 1;
      repeat (2) @(negedge clk);
      s_ar_valid = 1; s_ar = mk(32'h8000_3000, 4'd2, 8'd0);
      t_req = $time;
      #1;
      check(m_ar_valid && m_ar.addr == 32'h8000_3000, "allowed request on the NoC in the same cycle");
      @(posedge clk); #1;
      s_ar_valid = 0;
      u_noc.ar_ready_mode = 0;
      s_r_ready = 1;
      while (!(s_r_valid && s_r.last)) @(posedge clk);
      @(posedge clk); #1;
      s_r_ready = 0;
    end

    // 3. write to the granted region: the rule was read/write
    do_write(32'h8000_0040, 4'd3, resp);
    check(resp == RESP_OKAY && u_core.n_interrupts == 1, "write allowed by existing rule");

    // 4. forbidden read: DECERR, ARLEN+1 beats, never on the NoC
    irq0 = u_core.n_interrupts;
    do_read(32'hD000_0000, 4'd5, 8'd7, resp, beats, acc);
    check(resp == RESP_DECERR && beats == 8, "denied read gets 8 DECERR beats");
    check(u_core.n_interrupts == irq0 + 1 && u_core.n_denied == 1, "denied read interrupts once");
    // 5. forbidden write: one DECERR B
    do_write(32'hD000_1000, 4'd6, resp);
    check(resp == RESP_DECERR && u_core.n_denied == 2, "denied write gets DECERR");
    check(!u_core.last_is_read, "write fault reported as write");

    // 6. read-only grant: read ok, write refused (new region replaces oldest rule)
    do_read(32'h4060_0010, 4'd7, 8'd0, resp, beats, acc);
    check(resp == RESP_OKAY, "read-only region read");
    do_write(32'h4060_0010, 4'd7, resp);
    check(resp == RESP_DECERR, "read-only region write refused");
    // 7. FIFO replacement: third region evicts the first
    do_read(32'h4070_0000, 4'd8, 8'd0, resp, beats, acc);
    check(resp == RESP_OKAY, "third region granted");
    irq0 = u_core.n_interrupts;
    do_read(32'h8000_0100, 4'd9, 8'd0, resp, beats, acc);
    check(resp == RESP_OKAY && u_core.n_interrupts == irq0 + 1, "evicted region faults again and is re-granted");

    // 8. wait attack: NoC not ready, permitted request buffered, then wires swapped
    begin
      int n_ar;
      n_ar = u_noc.ar_log.size();
      u_noc.ar_ready_mode = 2;
      repeat (2) @(negedge clk);
      s_ar_valid = 1; s_ar = mk(32'h8000_0200, 4'd10, 8'd0);
      @(negedge clk);
      check(rd_filter_state == AF_WAITING, "permitted request waiting for the NoC");
      s_ar = mk(32'hD000_0200, 4'd11, 8'd0);     // protocol violation: change before acceptance
      repeat (3) @(negedge clk);
      check(m_ar_valid && m_ar.addr == 32'h8000_0200, "NoC still sees the checked request");
      s_ar_valid = 0;
      u_noc.ar_ready_mode = 0;
      while (u_noc.ar_log.size() != n_ar + 1) @(posedge clk);
      check(u_noc.ar_log[n_ar].addr == 32'h8000_0200, "checked request is the one accepted");
      s_r_ready = 1;
      while (!(s_r_valid && s_r.last)) @(posedge clk);
      @(posedge clk); #1;
      s_r_ready = 0;
    end

    // 9. flush: everything faults again
    u_core.send(0, make_op_cmd(CMD_FLUSH));
    repeat (3) @(posedge clk);
    irq0 = u_core.n_interrupts;
    do_read(32'h4070_0004, 4'd12, 8'd1, resp, beats, acc);
    check(resp == RESP_OKAY && u_core.n_interrupts == irq0 + 1, "flushed policy faults and re-grants");

    // 10. W passes straight through
    check(u_noc.w_beats == 3, "W beats of all three writes forwarded unchanged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
