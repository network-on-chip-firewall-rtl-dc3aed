// tb_nocf_addr_filter -- self-checking test of the PEP address filter.
//
// Inputs are driven on the falling edge and outputs checked before the next
// rising edge. Directed cases cover each state transition: same-cycle pass
// through, allow while the NoC is busy (waiting), deny then allow (committed ->
// idle and committed -> waiting) and deny then deny (drop). The wait attack is
// replayed: after a permitted request has been buffered the master swaps its
// wires to a forbidden address, and the filter must still forward exactly the
// buffered request. A random phase compares every output with a reference
// model of the three-state machine written in the testbench.
module tb_nocf_addr_filter;
  import nocf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic up_valid, up_ready, dn_valid, dn_ready, cur_valid, dec_valid, dec_allow, forwarded;
  axi_addr_t up_req, dn_req, cur_req;
  af_state_t state;
  int checks = 0, failures = 0;

  nocf_addr_filter dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic axi_addr_t req(logic [31:0] a, logic [3:0] id);
    axi_addr_t r = '0;
    r.addr = a; r.id = id; r.len = 8'd3; r.size = 3'd2; r.burst = 2'b01;
    return r;
  endfunction

  task automatic drive(bit uv, axi_addr_t ur, bit dr, bit dv, bit da);
    up_valid = uv; up_req = ur; dn_ready = dr; dec_valid = dv; dec_allow = da;
    #1;
  endtask

  task automatic step; @(posedge clk); @(negedge clk); endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  af_state_t m_state;
  axi_addr_t m_buf;

  initial begin
    axi_addr_t good, bad;
    good = req(32'h1000_0040, 4'd1);
    bad  = req(32'hDEAD_0000, 4'd2);
    drive(0, '0, 0, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == AF_IDLE && up_ready, "idle after reset");

    // 1. allowed and NoC ready: same-cycle pass-through
    drive(1, good, 1, 1, 1);
    check(dn_valid && dn_req == good && forwarded && cur_valid && cur_req == good, "pass-through");
    step();
    check(state == AF_IDLE, "stays idle after pass-through");

    // 2. allowed, NoC busy: waiting, then the wait attack
    drive(1, good, 0, 1, 1);
    check(dn_valid && !forwarded, "offered while NoC busy");
    step();
    check(state == AF_WAITING && !up_ready, "waiting");
    drive(1, bad, 0, 0, 0);        // master swaps its wires to a forbidden address
    check(dn_valid && dn_req == good, "waiting forwards the buffered request, not the wires");
    step();
    drive(1, bad, 1, 0, 0);
    check(dn_valid && dn_req == good && forwarded, "buffered request accepted by NoC");
    step();
    check(state == AF_IDLE, "idle after waiting");

    // 3. denied: committed, master swaps wires, allow -> buffered request forwarded
    drive(1, bad, 1, 1, 0);
    check(!dn_valid, "denied request not forwarded");
    step();
    check(state == AF_COMMITTED && cur_valid && cur_req == bad, "committed holds denied request");
    drive(1, good, 1, 0, 0);
    check(!dn_valid && cur_req == bad, "committed ignores master wires");
    step();
    drive(1, good, 1, 1, 1);
    check(dn_valid && dn_req == bad && forwarded, "committed + allow forwards buffered request");
    step();
    check(state == AF_IDLE, "idle after committed allow");

    // 4. no decision in the cycle (policy busy) -> committed; allow with NoC busy -> waiting
    drive(1, good, 1, 0, 0);
    step();
    check(state == AF_COMMITTED, "no decision -> committed");
    drive(0, '0, 0, 1, 1);
    step();
    check(state == AF_WAITING && dn_valid && dn_req == good, "committed + allow + busy -> waiting");
    drive(0, '0, 1, 0, 0);
    step();
    check(state == AF_IDLE, "waiting -> idle");

    // 5. deny in committed: dropped
    drive(1, bad, 1, 0, 0);
    step();
    drive(0, '0, 1, 1, 0);
    check(!dn_valid, "deny decision never forwards");
    step();
    check(state == AF_IDLE && !dn_valid, "dropped, back to idle");

    // 6. random traffic against the reference model
    m_state = AF_IDLE; m_buf = '0;
    for (int c = 0; c < 20000; c++) begin
      bit e_dn_valid;
      axi_addr_t e_dn_req;
      drive($urandom_range(0, 1), req($urandom, 4'($urandom)), $urandom_range(0, 1),
            $urandom_range(0, 1), $urandom_range(0, 1));
      case (m_state)
        AF_IDLE:      begin e_dn_valid = up_valid && dec_valid && dec_allow; e_dn_req = up_req; end
        AF_COMMITTED: begin e_dn_valid = dec_valid && dec_allow;             e_dn_req = m_buf;  end
        default:      begin e_dn_valid = 1'b1;                               e_dn_req = m_buf;  end
      endcase
      check(state == m_state, "state");
      check(up_ready == (m_state == AF_IDLE), "up_ready");
      check(dn_valid == e_dn_valid, "dn_valid");
      if (e_dn_valid) check(dn_req == e_dn_req, "dn_req");
      // next model state
      case (m_state)
        AF_IDLE: if (up_valid) begin
          m_buf = up_req;
          m_state = (dec_valid && dec_allow) ? (dn_ready ? AF_IDLE : AF_WAITING) : AF_COMMITTED;
        end
        AF_COMMITTED: if (dec_valid) m_state = dec_allow ? (dn_ready ? AF_IDLE : AF_WAITING) : AF_IDLE;
        default: if (dn_ready) m_state = AF_IDLE;
      endcase
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
