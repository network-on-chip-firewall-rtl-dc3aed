// tb_nocf_gpu_attack -- workload test: a malicious GPU against one interposer.
//
// Self-checking testbench. A behavioural GPU (tb_mal_gpu_model) reads its
// framebuffer from a memory model through a nocf_interposer. A picture whose
// pixels carry a hidden command makes it write attacker data to any address.
// The integrity core is tb_integrity_kernel_model. Memory map of this test:
// framebuffer 0xA000_0000 (64 KiB), core 0 kernel text 0x8010_0000, free
// memory for the payload 0x87F0_0000.
//
// Run A, no isolation: the kernel grants the GPU all of memory. The 20-byte
//   hook lands in kernel text and the 360-byte payload lands in free memory.
// Run B, NoCF policy: after a reset, the kernel grants the GPU only its
//   framebuffer. The same pictures now produce only decode errors and memory
//   is unchanged. A third picture then tells the GPU to write inside its
//   framebuffer, which must still work after the long run of denials.
// The attack and its 20 + 360 byte sizes follow the paper's scenario; the
// trigger word, command layout and addresses are this test's own choices.
module tb_nocf_gpu_attack;
  import nocf_pkg::*;

  localparam logic [31:0] FB     = 32'hA000_0000;
  localparam logic [31:0] KTEXT  = 32'h8010_0000;
  localparam logic [31:0] HOOK   = 32'h8010_2000;
  localparam logic [31:0] PAYLD  = 32'h87F0_0000;
  localparam int          HOOK_N = 20;
  localparam int          PAY_N  = 360;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // GPU <-> interposer
  logic      s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  logic      s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  axi_addr_t s_aw, s_ar;
  axi_w_t    s_w;
  axi_b_t    s_b;
  axi_r_t    s_r;
  // interposer <-> memory
  logic      m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic      m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_addr_t m_aw, m_ar;
  axi_w_t    m_w;
  axi_b_t    m_b;
  axi_r_t    m_r;
  // policy link
  logic [0:0]            fsl_in_write, fsl_in_full, fsl_out_read, fsl_out_exists, irq;
  logic [0:0][FSL_W-1:0] fsl_in_data, fsl_out_data;
  ch_state_t rd_state, wr_state;
  af_state_t rd_fs, wr_fs;

  logic start, done;

  tb_mal_gpu_model #(.FB_BASE(FB)) u_gpu (
    .clk, .rst_n, .start, .done,
    .aw_valid(s_aw_valid), .aw_ready(s_aw_ready), .aw(s_aw),
    .w_valid(s_w_valid), .w_ready(s_w_ready), .w(s_w),
    .b_valid(s_b_valid), .b_ready(s_b_ready), .b(s_b),
    .ar_valid(s_ar_valid), .ar_ready(s_ar_ready), .ar(s_ar),
    .r_valid(s_r_valid), .r_ready(s_r_ready), .r(s_r)
  );

  nocf_interposer u_dut (
    .clk, .rst_n,
    .s_aw_valid, .s_aw_ready, .s_aw, .s_w_valid, .s_w_ready, .s_w,
    .s_b_valid, .s_b_ready, .s_b, .s_ar_valid, .s_ar_ready, .s_ar,
    .s_r_valid, .s_r_ready, .s_r,
    .m_aw_valid, .m_aw_ready, .m_aw, .m_w_valid, .m_w_ready, .m_w,
    .m_b_valid, .m_b_ready, .m_b, .m_ar_valid, .m_ar_ready, .m_ar,
    .m_r_valid, .m_r_ready, .m_r,
    .fsl_in_write(fsl_in_write[0]), .fsl_in_data(fsl_in_data[0]), .fsl_in_full(fsl_in_full[0]),
    .fsl_out_read(fsl_out_read[0]), .fsl_out_data(fsl_out_data[0]),
    .fsl_out_exists(fsl_out_exists[0]), .irq(irq[0]),
    .rd_state, .wr_state, .rd_filter_state(rd_fs), .wr_filter_state(wr_fs)
  );

  tb_axi_mem_model u_mem (
    .clk, .rst_n,
    .aw_valid(m_aw_valid), .aw_ready(m_aw_ready), .aw(m_aw),
    .w_valid(m_w_valid), .w_ready(m_w_ready), .w(m_w),
    .b_valid(m_b_valid), .b_ready(m_b_ready), .b(m_b),
    .ar_valid(m_ar_valid), .ar_ready(m_ar_ready), .ar(m_ar),
    .r_valid(m_r_valid), .r_ready(m_r_ready), .r(m_r)
  );

  tb_integrity_kernel_model #(.NUM_LINKS(1), .HANDLER_CYCLES(6)) u_kernel (
    .clk, .rst_n, .fsl_in_write, .fsl_in_data, .fsl_in_full,
    .fsl_out_read, .fsl_out_data, .fsl_out_exists, .irq
  );

  // Original contents of the kernel text: a pattern derived from the address.
  function automatic logic [31:0] ktext_word(logic [31:0] a);
    return a ^ 32'h5A5A_0000;
  endfunction

  // Paint a picture whose pixels hide "write these bytes to target".
  // Each pixel is 32 bits; only the least significant byte carries data.
  task automatic paint(logic [31:0] target, logic [7:0] data[$]);
    logic [7:0] s[$];
    s = '{8'hDE, 8'hAD, 8'hBE, 8'hEF};
    for (int k = 0; k < 4; k++) s.push_back(target[8*k +: 8]);
    s.push_back(8'(data.size()));
    s.push_back(8'(data.size() >> 8));
    foreach (data[i]) s.push_back(data[i]);
    for (int i = 0; i < 16 * 66; i++)
      u_mem.poke(FB + 32'(4 * i), {8'h40, 8'h80, 8'hC0, (i < s.size()) ? s[i] : 8'h00});
  endtask

  task automatic show_picture(logic [31:0] target, logic [7:0] data[$]);
    paint(target, data);
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic restore_memory();
    for (int i = 0; i < 1024; i++) u_mem.poke(KTEXT + 32'(4 * i), ktext_word(KTEXT + 32'(4 * i)));
    for (int i = 0; i < PAY_N / 4; i++) u_mem.poke(PAYLD + 32'(4 * i), 32'h0);
  endtask

  function automatic bit region_has(logic [31:0] base, logic [7:0] data[$]);
    for (int i = 0; i < data.size(); i++) begin
      logic [31:0] word;
      word = u_mem.peek(base + 32'(4 * (i / 4)));
      if (word[8*(i%4) +: 8] != data[i]) return 0;
    end
    return 1;
  endfunction

  function automatic bit ktext_intact();
    for (int i = 0; i < 1024; i++)
      if (u_mem.peek(KTEXT + 32'(4 * i)) != ktext_word(KTEXT + 32'(4 * i))) return 0;
    return 1;
  endfunction

  function automatic bit payload_absent();
    for (int i = 0; i < PAY_N / 4; i++)
      if (u_mem.peek(PAYLD + 32'(4 * i)) != 32'h0) return 0;
    return 1;
  endfunction

  initial begin
    logic [7:0] hq[$], pq[$], benign[$];
    int wr_err0, wr_ok0, denied0, mem_wr0;
    start = 1'b0;
    for (int i = 0; i < HOOK_N; i++) hq.push_back(8'(8'hE9 + 7 * i));
    for (int i = 0; i < PAY_N; i++) pq.push_back(8'($urandom));
    benign = '{8'h11, 8'h22, 8'h33, 8'h44, 8'h55, 8'h66, 8'h77, 8'h88};

    // ---------------- Run A: GPU trusted with all memory ----------------
    restore_memory();
    u_kernel.add_grant(0, 32'h0, 4'd12, 1'b1, 1'b1);
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    show_picture(HOOK, hq);
    check(u_gpu.triggered, "run A: trigger not recognised");
    show_picture(PAYLD, pq);
    check(region_has(HOOK, hq), "run A: hook not written into kernel text");
    check(region_has(PAYLD, pq), "run A: payload not written");
    check(u_gpu.n_write_err == 0, "run A: unexpected write errors");
    check(u_gpu.n_write_ok == HOOK_N / 4 + PAY_N / 4, "run A: write count");
    check(u_kernel.n_granted == 1, "run A: one grant should cover everything");
    $display("run A (no isolation): hook in kernel text=%0d, payload=%0d, writes=%0d",
             region_has(HOOK, hq), region_has(PAYLD, pq), u_gpu.n_write_ok);

    // ---------------- Run B: NoCF policy, framebuffer only ----------------
    rst_n <= 1'b0;
    restore_memory();
    u_kernel.clear_grants();
    u_kernel.add_grant(0, FB, 4'd4, 1'b1, 1'b1);
    wr_err0 = u_gpu.n_write_err;
    wr_ok0  = u_gpu.n_write_ok;
    denied0 = u_kernel.n_denied;
    mem_wr0 = u_mem.n_writes;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    check(ktext_intact() && payload_absent(), "run B: memory not restored");
    show_picture(HOOK, hq);
    check(u_gpu.triggered, "run B: trigger not recognised");
    show_picture(PAYLD, pq);
    check(ktext_intact(), "run B: kernel text modified");
    check(payload_absent(), "run B: payload written");
    check(u_gpu.n_read_err == 0, "run B: framebuffer reads refused");
    check(u_gpu.n_write_err - wr_err0 == HOOK_N / 4 + PAY_N / 4, "run B: every attack write refused");
    check(u_gpu.n_write_ok == wr_ok0, "run B: an attack write succeeded");
    check(u_kernel.n_denied - denied0 == HOOK_N / 4 + PAY_N / 4, "run B: kernel denials");
    check(u_kernel.last_addr == PAYLD + 32'(PAY_N - 4) && !u_kernel.last_is_read,
          "run B: last fault report");
    check(u_mem.n_writes == mem_wr0, "run B: a write reached memory");
    $display("run B (NoCF): kernel text intact=%0d, payload absent=%0d, refused writes=%0d",
             ktext_intact(), payload_absent(), u_gpu.n_write_err - wr_err0);

    // The GPU keeps working in its own framebuffer.
    show_picture(FB + 32'h8000, benign);
    check(region_has(FB + 32'h8000, benign), "run B: framebuffer write lost");
    check(u_gpu.n_write_ok == wr_ok0 + 2, "run B: framebuffer writes");
    check(rd_state == CH_ENFORCE && wr_state == CH_ENFORCE, "run B: channels not back in enforce");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
