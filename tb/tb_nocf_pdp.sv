// tb_nocf_pdp -- self-checking test of the Policy Decision Point.
//
// Keeps its own copy of the rule table and decides every access with an
// interval test (base <= addr < base + 2^(8+2s)), independent of the mask
// arithmetic in the package. Checks: nothing is allowed after reset; read and
// write permission bits act separately; the oldest rule is replaced when a new
// one is inserted into a full table (first-in first-out); flush empties the
// table; region sizes from 256 bytes to 4 GiB. A random phase inserts random
// rules and probes random addresses, many of them near region edges.
module tb_nocf_pdp;
  import nocf_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic upd_valid, upd_flush, rd_allow, wr_allow;
  rule_t upd_rule;
  logic [31:0] rd_addr, wr_addr;
  rule_t rules [N];
  int checks = 0, failures = 0;

  nocf_pdp #(.NUM_RULES(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // reference table, oldest first
  rule_t ref_q[$];

  function automatic bit ref_allow(logic [31:0] a, bit is_read);
    foreach (ref_q[i]) begin
      longint unsigned sz, lo;
      int lg;
      lg = 8 + 2 * int'(ref_q[i].size);
      if (lg > 32) lg = 32;
      sz = 64'd1 << lg;
      lo = ({32'd0, ref_q[i].base, 8'd0}) / sz * sz;
      if (longint'(a) >= lo && longint'(a) < lo + sz && (is_read ? ref_q[i].rd : ref_q[i].wr))
        return 1;
    end
    return 0;
  endfunction

  task automatic insert(logic [31:0] base, bit rd, bit wr, logic [3:0] size);
    @(negedge clk);
    upd_valid = 1; upd_flush = 0;
    upd_rule = '{valid: 1'b1, rd: rd, wr: wr, size: size, base: base[31:8]};
    @(negedge clk);
    upd_valid = 0;
    if (ref_q.size() == N) void'(ref_q.pop_front());
    ref_q.push_back(upd_rule);
  endtask

  task automatic flush;
    @(negedge clk);
    upd_valid = 1; upd_flush = 1;
    @(negedge clk);
    upd_valid = 0; upd_flush = 0;
    ref_q.delete();
  endtask

  task automatic probe(logic [31:0] a, string what);
    rd_addr = a; wr_addr = a; #1;
    check(rd_allow == ref_allow(a, 1), $sformatf("%s read %h", what, a));
    check(wr_allow == ref_allow(a, 0), $sformatf("%s write %h", what, a));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; upd_flush = 0; upd_rule = '0; rd_addr = 0; wr_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rd_addr = 32'h0; wr_addr = 32'hFFFF_FFF0; #1;
    check(!rd_allow && !wr_allow, "empty policy allows nothing");

    // 4 KiB region (s=2), read only
    insert(32'h8000_1000, 1, 0, 4'd2);
    rd_addr = 32'h8000_1FFC; wr_addr = 32'h8000_1000; #1;
    check(rd_allow && !wr_allow, "read-only rule: read yes, write no");
    rd_addr = 32'h8000_2000; #1;
    check(!rd_allow, "one past the 4 KiB region is denied");
    rd_addr = 32'h8000_0FFF; #1;
    check(!rd_allow, "one below the 4 KiB region is denied");
    // write-only 256 B region
    insert(32'h4060_0000, 0, 1, 4'd0);
    wr_addr = 32'h4060_00FF; rd_addr = 32'h4060_0000; #1;
    check(wr_allow && !rd_allow, "write-only rule");
    wr_addr = 32'h4060_0100; #1;
    check(!wr_allow, "256 B region end");
    // 4 GiB region
    insert(32'h0000_0000, 1, 1, 4'd12);
    insert(32'h1000_0000, 1, 1, 4'd10);   // 256 MiB, table now full
    probe(32'h1234_5678, "full table");
    // fifth insert replaces the oldest (the 4 KiB read-only rule)
    flush();
    probe(32'h1234_5678, "after flush");
    insert(32'h8000_1000, 1, 0, 4'd2);
    insert(32'h9000_0000, 1, 1, 4'd2);
    insert(32'hA000_0000, 1, 1, 4'd2);
    insert(32'hB000_0000, 1, 1, 4'd2);
    rd_addr = 32'h8000_1004; #1;
    check(rd_allow, "oldest rule present before replacement");
    insert(32'hC000_0000, 1, 1, 4'd2);
    rd_addr = 32'h8000_1004; #1;
    check(!rd_allow, "oldest rule replaced first");
    rd_addr = 32'h9000_0004; #1;
    check(rd_allow, "second-oldest rule kept");
    rd_addr = 32'hC000_0FFC; #1;
    check(rd_allow, "new rule installed");
    check(rules[0].base == 24'hC00000 && rules[0].valid, "new rule in the oldest slot");

    // random
    for (int c = 0; c < 3000; c++) begin
      automatic int op = $urandom_range(0, 99);
      if (op < 3) flush();
      else if (op < 30) insert($urandom, $urandom_range(0, 1), $urandom_range(0, 1), 4'($urandom_range(0, 13)));
      else begin
        logic [31:0] a;
        if (ref_q.size() > 0 && $urandom_range(0, 1)) begin
          automatic rule_t r = ref_q[$urandom_range(0, ref_q.size() - 1)];
          automatic int lg = 8 + 2 * int'(r.size);
          if (lg > 32) lg = 32;
          a = {r.base, 8'd0} + ((lg >= 32) ? $urandom : ($urandom_range(0, 1) ? (32'd1 << lg) : 32'd0))
              - 32'($urandom_range(0, 2));
        end else a = $urandom;
        probe(a, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
