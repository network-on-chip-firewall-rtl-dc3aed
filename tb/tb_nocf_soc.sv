// tb_nocf_soc -- end-to-end test of the nine-port firewall at full size.
//
// Builds the two-core prototype around nocf_soc with every parameter at its
// default: nine interposers (2 rules each, 4 on the two peripheral data
// ports), nine behavioural NoC slave ports and one behavioural integrity core
// serving all nine links and interrupt lines. The integrity core's grant table
// isolates the two cores:
//   core 0  memory 0x8000_0000 (256 MiB, r/w), UART 0x4060_0000, Ethernet
//           0x40E0_0000, timer 0x41C0_0000, interrupt controller 0x4120_0000
//   core 1  memory 0x9000_0000 (256 MiB, r/w), UART 0x4061_0000, timer
//           0x41C1_0000, interrupt controller 0x4121_0000
//   both    boot memory 0x4400_0000 (64 KiB, read only) on peripheral
//           instruction ports
//   GPU     framebuffer 0xA000_0000 (4 MiB, r/w) only
// Phase 1 runs all nine masters at once with random traffic, mostly inside
// their own regions and sometimes into the other core's (which must end in a
// decode error, like an access to missing memory). Phase 2 replays the
// malicious GPU: it reads its framebuffer, finds the trigger, and tries to
// write a hook into core 0's kernel text; the write must be refused and never
// reach the NoC. Phase 3 forces the rarer mechanisms: the wait attack, a
// request arriving while the policy is being updated, a flush. A monitor on
// every NoC port checks that each accepted address lies in a region granted to
// that port, and counts how often each mechanism happened; a mechanism that
// never happened counts as a failure.
module tb_nocf_soc;
  import nocf_pkg::*;
  localparam int P = 9;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic      [P-1:0] s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic      [P-1:0] s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  axi_addr_t [P-1:0] s_aw, s_ar;
  axi_w_t    [P-1:0] s_w;
  axi_b_t    [P-1:0] s_b;
  axi_r_t    [P-1:0] s_r;
  logic      [P-1:0] m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic      [P-1:0] m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_addr_t [P-1:0] m_aw, m_ar;
  axi_w_t    [P-1:0] m_w;
  axi_b_t    [P-1:0] m_b;
  axi_r_t    [P-1:0] m_r;
  logic      [P-1:0] fsl_in_write, fsl_in_full, fsl_out_read, fsl_out_exists, irq;
  logic      [P-1:0][31:0] fsl_in_data, fsl_out_data;
  ch_state_t [P-1:0] rd_state, wr_state;
  af_state_t [P-1:0] rd_filter_state, wr_filter_state;

  nocf_soc dut (.*);

  for (genvar p = 0; p < P; p++) begin : g_noc
    tb_axi_slave_model #(.READY_PCT(40 + 5 * p)) u_noc (
      .clk, .rst_n,
      .aw_valid(m_aw_valid[p]), .aw_ready(m_aw_ready[p]), .aw(m_aw[p]),
      .w_valid(m_w_valid[p]), .w_ready(m_w_ready[p]), .w(m_w[p]),
      .b_valid(m_b_valid[p]), .b_ready(m_b_ready[p]), .b(m_b[p]),
      .ar_valid(m_ar_valid[p]), .ar_ready(m_ar_ready[p]), .ar(m_ar[p]),
      .r_valid(m_r_valid[p]), .r_ready(m_r_ready[p]), .r(m_r[p]));
  end

  tb_integrity_kernel_model #(.NUM_LINKS(P), .HANDLER_CYCLES(8)) u_core (
    .clk, .rst_n, .fsl_in_write, .fsl_in_data, .fsl_in_full,
    .fsl_out_read, .fsl_out_data, .fsl_out_exists, .irq);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- region map (testbench's own) ----------------
  typedef struct { logic [31:0] base; logic [3:0] size; bit rd, wr; } region_t;
  region_t grants[P][$];

  function automatic longint unsigned rsize(logic [3:0] s);
    int lg = 8 + 2 * int'(s);
    return 64'd1 << ((lg > 32) ? 32 : lg);
  endfunction

  function automatic bit granted(int p, logic [31:0] a, bit is_read);
    foreach (grants[p][i]) begin
      longint unsigned lo = {32'd0, grants[p][i].base};
      if (longint'(a) >= lo && longint'(a) < lo + rsize(grants[p][i].size) &&
          (is_read ? grants[p][i].rd : grants[p][i].wr)) return 1;
    end
    return 0;
  endfunction

  task automatic give(int p, logic [31:0] base, logic [3:0] size, bit rd, bit wr);
    grants[p].push_back('{base, size, rd, wr});
    u_core.add_grant(p, base, size, rd, wr);
  endtask

  // ---------------- monitors and mechanism counters ----------------
  int n_pass, n_waiting, n_committed, n_fault_rd, n_fault_wr, n_decerr_rd, n_decerr_wr;
  int n_busy_block, n_forward_after_grant, n_wait_attack, n_flush;

  // a request is waiting for a decision in a cycle in which the policy changes
  logic [P-1:0] busy_req;
  for (genvar p = 0; p < P; p++) begin : g_busy
    assign busy_req[p] = dut.g_port[p].u_interposer.policy_busy &&
                         (dut.g_port[p].u_interposer.ar_cur_valid || dut.g_port[p].u_interposer.aw_cur_valid);
  end

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < P; p++) begin
      if (m_ar_valid[p] && m_ar_ready[p]) begin
        check(granted(p, m_ar[p].addr, 1), $sformatf("port %0d read %h reached NoC unGranted", p, m_ar[p].addr));
        if (rd_filter_state[p] == AF_IDLE) n_pass++;
        if (rd_filter_state[p] == AF_COMMITTED) n_forward_after_grant++;
      end
      if (m_aw_valid[p] && m_aw_ready[p]) begin
        check(granted(p, m_aw[p].addr, 0), $sformatf("port %0d write %h reached NoC unGranted", p, m_aw[p].addr));
        if (wr_filter_state[p] == AF_IDLE) n_pass++;
        if (wr_filter_state[p] == AF_COMMITTED) n_forward_after_grant++;
      end
      if (rd_filter_state[p] == AF_WAITING || wr_filter_state[p] == AF_WAITING) n_waiting++;
      if (rd_state[p] == CH_REQUEST && fsl_out_exists[p] == 1'b0) n_fault_rd++;
      if (wr_state[p] == CH_REQUEST && fsl_out_exists[p] == 1'b0) n_fault_wr++;
      if (s_r_valid[p] && s_r_ready[p] && s_r[p].resp == RESP_DECERR && s_r[p].last) n_decerr_rd++;
      if (s_b_valid[p] && s_b_ready[p] && s_b[p].resp == RESP_DECERR) n_decerr_wr++;
      if (busy_req[p]) n_busy_block++;
      if (rd_filter_state[p] == AF_COMMITTED || wr_filter_state[p] == AF_COMMITTED) n_committed++;
    end
  end

  // ---------------- master-side drivers ----------------
  function automatic axi_addr_t mk(logic [31:0] a, logic [3:0] id, logic [7:0] len);
    axi_addr_t r = '0;
    r.addr = a; r.id = id; r.len = len; r.size = 3'd2; r.burst = 2'b01;
    return r;
  endfunction

  task automatic do_read(int p, logic [31:0] a, logic [7:0] len, output logic [1:0] resp, output int beats);
    logic [3:0] id = 4'($urandom);
    s_ar_valid[p] <= 1'b1; s_ar[p] <= mk(a, id, len);
    @(posedge clk);
    while (!s_ar_ready[p]) @(posedge clk);
    s_ar_valid[p] <= 1'b0;
    s_r_ready[p] <= 1'b1;
    beats = 0; resp = RESP_OKAY;
    forever begin
      @(posedge clk);
      if (s_r_valid[p] && s_r_ready[p]) begin
        beats++;
        if (s_r[p].id != id) begin failures++; $display("FAIL: port %0d R id", p); end
        if (s_r[p].resp != RESP_OKAY) resp = s_r[p].resp;
        else if (s_r[p].data != a + 32'(beats - 1)) begin failures++; $display("FAIL: port %0d R data", p); end
        if (s_r[p].last) break;
      end
    end
    s_r_ready[p] <= 1'b0;
  endtask

  task automatic do_write(int p, logic [31:0] a, logic [31:0] d, output logic [1:0] resp);
    logic [3:0] id = 4'($urandom);
    s_aw_valid[p] <= 1'b1; s_aw[p] <= mk(a, id, 8'd0);
    s_w_valid[p]  <= 1'b1; s_w[p] <= '{data: d, strb: 4'hF, last: 1'b1};
    @(posedge clk);
    fork
      begin while (!s_aw_ready[p]) @(posedge clk); s_aw_valid[p] <= 1'b0; end
      begin while (!s_w_ready[p])  @(posedge clk); s_w_valid[p]  <= 1'b0; end
    join
    s_b_ready[p] <= 1'b1;
    forever begin
      @(posedge clk);
      if (s_b_valid[p] && s_b_ready[p]) begin
        if (s_b[p].id != id) begin failures++; $display("FAIL: port %0d B id", p); end
        resp = s_b[p].resp;
        break;
      end
    end
    s_b_ready[p] <= 1'b0;
  endtask

  // Random traffic of one master: 85% inside its grants, 15% elsewhere.
  task automatic traffic(int p, int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] a;
      logic [1:0] resp;
      int beats;
      bit is_read, expect_ok;
      logic [7:0] len;
      is_read = (p == 0 || p == 2 || p == 4 || p == 6) ? 1'b1 : ($urandom_range(0, 2) != 0);
      if ($urandom_range(0, 99) < 85 && grants[p].size() > 0) begin
        region_t g = grants[p][$urandom_range(0, grants[p].size() - 1)];
        a = g.base + 32'($urandom_range(0, 63)) * 4;
        if (p == 5) a = g.base + 32'($urandom_range(0, 1023)) * 32'h1_0000;
      end else begin
        a = (p < 4) ? 32'h9000_0000 + 32'($urandom_range(0, 4095)) * 4     // core 1's memory
                    : 32'h8000_0000 + 32'($urandom_range(0, 4095)) * 4;    // core 0's memory
      end
      a[1:0] = 2'b00;
      expect_ok = granted(p, a, is_read);
      len = 8'($urandom_range(0, 3));
      if (is_read) begin
        do_read(p, a, len, resp, beats);
        check(beats == int'(len) + 1, $sformatf("port %0d beats", p));
      end else do_write(p, a, $urandom, resp);
      check(resp == (expect_ok ? RESP_OKAY : RESP_DECERR),
            $sformatf("port %0d %s %h resp %0d", p, is_read ? "read" : "write", a, resp));
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
  endtask

  int n_regrants_before;

  initial begin
    s_aw_valid = '0; s_w_valid = '0; s_ar_valid = '0; s_r_ready = '0; s_b_ready = '0;
    s_aw = '0; s_ar = '0; s_w = '0;
    n_pass = 0; n_waiting = 0; n_committed = 0; n_fault_rd = 0; n_fault_wr = 0;
    n_decerr_rd = 0; n_decerr_wr = 0; n_busy_block = 0; n_forward_after_grant = 0;
    n_wait_attack = 0; n_flush = 0;
    // core 0: ports 0..3, core 1: ports 4..7, GPU: port 8
    give(0, 32'h8000_0000, 4'd10, 1, 0);  give(1, 32'h8000_0000, 4'd10, 1, 1);
    give(4, 32'h9000_0000, 4'd10, 1, 0);
    // core 1's data port sees its memory as four 64 MiB regions but holds only two rules,
    // so its rules are replaced often (first in, first out)
    give(5, 32'h9000_0000, 4'd9, 1, 1);   give(5, 32'h9400_0000, 4'd9, 1, 1);
    give(5, 32'h9800_0000, 4'd9, 1, 1);   give(5, 32'h9C00_0000, 4'd9, 1, 1);
    give(2, 32'h4400_0000, 4'd4, 1, 0);   give(6, 32'h4400_0000, 4'd4, 1, 0);
    give(3, 32'h4060_0000, 4'd2, 1, 1);   give(3, 32'h40E0_0000, 4'd4, 1, 1);
    give(3, 32'h41C0_0000, 4'd2, 1, 1);   give(3, 32'h4120_0000, 4'd2, 1, 1);
    give(7, 32'h4061_0000, 4'd2, 1, 1);   give(7, 32'h41C1_0000, 4'd2, 1, 1);
    give(7, 32'h4121_0000, 4'd2, 1, 1);
    give(8, 32'hA000_0000, 4'd7, 1, 1);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // ---- phase 1: all masters at once ----
    fork
      traffic(0, 60); traffic(1, 60); traffic(2, 30); traffic(3, 80); traffic(4, 60);
      traffic(5, 60); traffic(6, 30); traffic(7, 80); traffic(8, 30);
    join
    // four-rule peripheral data port: once its four regions are installed, no more refaults
    n_regrants_before = u_core.n_regrants;
    begin
      logic [1:0] resp; int beats;
      foreach (grants[3][i]) do_read(3, grants[3][i].base, 8'd0, resp, beats);
      foreach (grants[3][i]) begin
        int irq_before;
        irq_before = u_core.n_interrupts;
        do_read(3, grants[3][i].base + 32'h10, 8'd0, resp, beats);
        check(resp == RESP_OKAY && u_core.n_interrupts == irq_before, $sformatf("four rules hold four regions (resp %0d, irq %0d->%0d)", resp, irq_before, u_core.n_interrupts));
      end
    end

    // ---- phase 2: malicious GPU ----
    begin
      logic [1:0] resp; int beats;
      logic [31:0] hook_addr;
      int n_aw_before;
      // read the framebuffer; the trigger is found in the pixels' low bytes
      do_read(8, 32'hA000_0000, 8'd15, resp, beats);
      check(resp == RESP_OKAY && beats == 16, "GPU reads its framebuffer");
      // embedded command: write a 20-byte hook over core 0's kernel text
      hook_addr = 32'h8010_2000;
      n_aw_before = g_noc[8].u_noc.aw_log.size();
      for (int i = 0; i < 5; i++) begin
        do_write(8, hook_addr + 32'(4 * i), 32'hDEAD_BEEF, resp);
        check(resp == RESP_DECERR, "GPU write into kernel text refused");
      end
      check(g_noc[8].u_noc.aw_log.size() == n_aw_before, "no GPU write reached the memory NoC");
      do_write(8, 32'hA000_1000, 32'h1234_5678, resp);
      check(resp == RESP_OKAY, "GPU may still write its framebuffer");
    end

    // ---- phase 3a: wait attack on the GPU port ----
    begin
      int n_ar_before;
      n_ar_before = g_noc[8].u_noc.ar_log.size();
      g_noc[8].u_noc.ar_ready_mode = 2;
      repeat (2) @(negedge clk);
      s_ar_valid[8] = 1'b1; s_ar[8] = mk(32'hA000_0100, 4'd1, 8'd0);
      @(negedge clk);
      if (rd_filter_state[8] == AF_WAITING) n_wait_attack++;
      s_ar[8] = mk(32'h8010_2000, 4'd2, 8'd0);   // swap to a forbidden address before acceptance
      repeat (4) @(negedge clk);
      check(m_ar_valid[8] && m_ar[8].addr == 32'hA000_0100, "wait attack: NoC sees the checked request");
      s_ar_valid[8] = 1'b0;
      g_noc[8].u_noc.ar_ready_mode = 0;
      while (g_noc[8].u_noc.ar_log.size() != n_ar_before + 1) @(posedge clk);
      check(g_noc[8].u_noc.ar_log[n_ar_before].addr == 32'hA000_0100, "wait attack: forbidden address never accepted");
      s_r_ready[8] = 1'b1;
      while (!(s_r_valid[8] && s_r[8].last)) @(posedge clk);
      @(posedge clk); #1;
      s_r_ready[8] = 1'b0;
    end

    // ---- phase 3b: request arrives while the policy is being updated ----
    begin
      logic [1:0] resp; int beats;
      int busy_before;
      busy_before = n_busy_block;
      fork
        u_core.send(5, make_rule_cmd(32'h9000_0000, 1'b1, 1'b1, 4'd10));
        begin @(posedge clk); do_read(5, 32'h9000_0040, 8'd0, resp, beats); end
      join
      check(resp == RESP_OKAY, "request during policy update completes");
      check(n_busy_block > busy_before, "request seen while policy busy");
    end

    // ---- phase 3c: flush core 1's memory-data interposer; the next access faults again ----
    begin
      logic [1:0] resp; int beats;
      int irq_before;
      u_core.send(5, make_op_cmd(CMD_FLUSH));
      n_flush++;
      repeat (2) @(posedge clk);
      irq_before = u_core.n_interrupts;
      do_read(5, 32'h9000_0080, 8'd1, resp, beats);
      check(resp == RESP_OKAY && u_core.n_interrupts == irq_before + 1, "access after flush faults and is re-granted");
    end

    // ---- mechanism coverage ----
    $display("pass-through %0d, waiting cycles %0d, committed cycles %0d, forwarded after grant %0d",
             n_pass, n_waiting, n_committed, n_forward_after_grant);
    $display("read faults %0d, write faults %0d, DECERR reads %0d, DECERR writes %0d",
             n_fault_rd, n_fault_wr, n_decerr_rd, n_decerr_wr);
    $display("interrupts %0d, grants %0d, re-grants after eviction %0d, denials %0d",
             u_core.n_interrupts, u_core.n_granted, u_core.n_regrants, u_core.n_denied);
    $display("policy-busy cycles with a request %0d, wait attacks %0d, flushes %0d",
             n_busy_block, n_wait_attack, n_flush);
    check(n_pass > 0, "same-cycle pass-through happened");
    check(n_waiting > 0, "waiting state happened");
    check(n_committed > 0, "committed state happened");
    check(n_forward_after_grant > 0, "forward after integrity core grant happened");
    check(n_fault_rd > 0 && n_fault_wr > 0, "read and write faults reported");
    check(n_decerr_rd > 0 && n_decerr_wr > 0, "read and write DECERR responses happened");
    check(u_core.n_regrants > 1, "FIFO rule replacement happened");
    check(n_busy_block > 0, "decision suppressed during policy update");
    check(n_wait_attack > 0, "wait attack replayed");
    check(n_flush > 0, "flush happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
