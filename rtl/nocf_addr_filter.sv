// nocf_addr_filter -- address filter of one Policy Enforcement Point (PEP).
//
// Sits on one AXI4 address channel (AR or AW) between the regulated master
// (up_*) and the NoC (dn_*). It is always in one of three states:
//   idle      ready for a new request (up_ready = 1). If the request gets an
//             allow decision in the same cycle and the NoC is ready, it is passed
//             straight through and the filter stays idle. If allowed but the NoC
//             is not ready, it is buffered and the filter goes to waiting.
//             Otherwise (deny, or no decision this cycle) it is buffered and the
//             filter goes to committed.
//   committed waits for a decision on the buffered request. Allow: forward the
//             buffered request (idle if the NoC takes it now, else waiting).
//             Deny: drop it and return to idle.
//   waiting   presents the buffered request to the NoC until it is accepted.
// Once a request is buffered, only the buffered copy is checked and forwarded,
// whatever the master does to its wires afterwards. This closes the attack in
// which a master swaps a permitted pending request for a forbidden one after
// the check (the paper found it by model checking and added this buffering).
//
// cur_valid/cur_req present the request that the policy must judge this cycle:
// the master's live request when idle, the buffered one when committed. The
// decision comes back combinationally on dec_valid/dec_allow. forwarded pulses
// in every cycle in which a request is handed to the NoC.
//
// The three states and their transitions follow the paper; holding up_ready
// high whenever the filter is idle is this design's choice.
module nocf_addr_filter
  import nocf_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // from the regulated master
  input  logic      up_valid,
  output logic      up_ready,
  input  axi_addr_t up_req,
  // to the NoC
  output logic      dn_valid,
  input  logic      dn_ready,
  output axi_addr_t dn_req,
  // to/from the policy side
  output logic      cur_valid,
  output axi_addr_t cur_req,
  input  logic      dec_valid,
  input  logic      dec_allow,
  output logic      forwarded,
  output af_state_t state
);
  axi_addr_t buf_q;
  af_state_t state_d;
  logic      allow_now;

  assign allow_now = dec_valid && dec_allow;
  assign up_ready  = (state == AF_IDLE);
  assign cur_valid = (state == AF_IDLE) ? up_valid : (state == AF_COMMITTED);
  assign cur_req   = (state == AF_IDLE) ? up_req : buf_q;
  assign dn_req    = (state == AF_IDLE) ? up_req : buf_q;

  always_comb begin
    unique case (state)
      AF_IDLE:      dn_valid = up_valid && allow_now;
      AF_COMMITTED: dn_valid = allow_now;
      AF_WAITING:   dn_valid = 1'b1;
      default:      dn_valid = 1'b0;
    endcase
  end
  assign forwarded = dn_valid && dn_ready;

  always_comb begin
    state_d = state;
    unique case (state)
      AF_IDLE:
        if (up_valid) begin
          if (allow_now) state_d = dn_ready ? AF_IDLE : AF_WAITING;
          else           state_d = AF_COMMITTED;
        end
      AF_COMMITTED:
        if (dec_valid) begin
          if (dec_allow) state_d = dn_ready ? AF_IDLE : AF_WAITING;
          else           state_d = AF_IDLE;
        end
      AF_WAITING:
        if (dn_ready) state_d = AF_IDLE;
      default: state_d = AF_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= AF_IDLE;
      buf_q <= '0;
    end else begin
      state <= state_d;
      if (state == AF_IDLE && up_valid) buf_q <= up_req;
    end
  end

  // AXI: once the filter offers a request to the NoC it must hold it until taken.
  a_dn_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dn_valid && !dn_ready |=> dn_valid && $stable(dn_req));
endmodule
