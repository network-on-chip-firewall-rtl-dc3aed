// tb_nocf_fsl_fifo -- self-checking test of the policy configuration link FIFO.
//
// Drives random enqueues and dequeues for a few thousand cycles and compares
// the head word, the exists flag and the full flag with a queue kept by the
// testbench. Also fills the FIFO to its depth and checks that further writes
// are refused and that the words come out in order.
module tb_nocf_fsl_fifo;
  localparam int W = 32;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, full, exists;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  nocf_fsl_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!exists && !full, "empty after reset");
    // fill completely
    for (int i = 0; i < D + 3; i++) begin
      wr_en = 1; wr_data = 32'hA000_0000 + i;
      check(full == (i >= D), $sformatf("full flag at fill %0d", i));
      if (i < D) model.push_back(wr_data);
      @(negedge clk);
    end
    wr_en = 0;
    check(full && exists, "full after depth writes");
    // drain
    while (model.size() > 0) begin
      rd_en = 1;
      check(exists && rd_data == model[0], "drain order");
      void'(model.pop_front());
      @(negedge clk);
    end
    rd_en = 0;
    check(!exists, "empty after drain");
    // random traffic
    for (int c = 0; c < 5000; c++) begin
      wr_en   = ($urandom_range(0, 99) < 55);
      rd_en   = ($urandom_range(0, 99) < 50);
      wr_data = $urandom;
      check(exists == (model.size() > 0), "exists flag");
      check(full == (model.size() == D), "full flag");
      if (model.size() > 0) check(rd_data == model[0], "head word");
      begin
        bit f, e;
        f = full; e = exists;
        @(posedge clk);
        if (rd_en && e) void'(model.pop_front());
        if (wr_en && !f) model.push_back(wr_data);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
