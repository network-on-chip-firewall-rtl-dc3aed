// nocf_pep_channel -- channel controller of one Policy Enforcement Point.
//
// One instance regulates the read (IS_READ=1) or write (IS_READ=0) address
// channel of an interposer, working with that channel's nocf_addr_filter and
// the PDP. States:
//   permit   (debug only, entered from reset when START_PERMIT=1) every request
//            is allowed.
//   enforce  normal operation. If the filter has a request and the PDP allows
//            it, the allow decision goes to the filter. On a deny the channel
//            goes to request (the filter has committed the request).
//   request  offers a fault report {addr[31:1], is_read} to the integrity core
//            link; moves to wait once the link has accepted it.
//   wait     waits for the integrity core's enforce command for this channel.
//   check    re-checks the buffered request against the (possibly updated)
//            policy and forwards the decision, allow or deny, to the filter.
//            Captures the request's AXI ID (and, for reads, its length). Allow
//            goes to resume, deny to respond.
//   respond  sends a DECERR response to the master for the dropped request:
//            one B beat for a write (then enforce), ARLEN+1 R beats with RLAST
//            on the last for a read (then resume).
//   resume   one cycle, then enforce.
// No decision is issued in a cycle in which the policy is being updated
// (policy_busy). Decisions are combinational: the filter acts on them in the
// cycle they are made.
//
// States, their order and the DECERR response follow the paper. How permit is
// entered, holding the report until the link accepts it, holding the B/R beat
// until the master takes it and ignoring an enforce command outside the wait
// state are this design's choices.
module nocf_pep_channel
  import nocf_pkg::*;
#(
  parameter bit IS_READ      = 1'b1,
  parameter bit START_PERMIT = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  // policy side
  input  logic             policy_busy,
  input  logic             pdp_allow,
  // address filter
  input  logic             cur_valid,
  input  axi_addr_t        cur_req,
  output logic             dec_valid,
  output logic             dec_allow,
  // integrity core link
  output logic             rep_valid,
  input  logic             rep_ready,
  output logic [FSL_W-1:0] rep_data,
  input  logic             enforce_cmd,
  // error response towards the master (B for writes, R for reads)
  output logic             err_active,
  output logic             err_valid,
  input  logic             err_ready,
  output logic [ID_W-1:0]  err_id,
  output logic             err_last,
  output ch_state_t        state
);
  ch_state_t   state_d;
  logic        issued, allow;
  logic [ID_W-1:0] id_q;
  logic [7:0]  beats_q;

  assign issued = !policy_busy && cur_valid &&
                  (state == CH_PERMIT || state == CH_ENFORCE || state == CH_CHECK);
  assign allow  = (state == CH_PERMIT) ? 1'b1 : pdp_allow;

  always_comb begin
    dec_valid = 1'b0;
    dec_allow = allow;
    if (issued) begin
      if (state == CH_CHECK) dec_valid = 1'b1;
      else                   dec_valid = allow;
    end
  end

  assign rep_valid  = (state == CH_REQUEST);
  assign rep_data   = fault_report(cur_req.addr, IS_READ);
  assign err_active = (state == CH_RESPOND);
  assign err_valid  = (state == CH_RESPOND);
  assign err_id     = id_q;
  assign err_last   = IS_READ ? (beats_q == '0) : 1'b1;

  always_comb begin
    state_d = state;
    unique case (state)
      CH_PERMIT:  state_d = CH_PERMIT;
      CH_ENFORCE: if (issued && !allow) state_d = CH_REQUEST;
      CH_REQUEST: if (rep_ready) state_d = CH_WAIT;
      CH_WAIT:    if (enforce_cmd) state_d = CH_CHECK;
      CH_CHECK:   if (issued) state_d = allow ? CH_RESUME : CH_RESPOND;
      CH_RESPOND:
        if (err_ready) begin
          if (!IS_READ)           state_d = CH_ENFORCE;
          else if (beats_q == '0) state_d = CH_RESUME;
        end
      CH_RESUME:  state_d = CH_ENFORCE;
      default:    state_d = CH_ENFORCE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= START_PERMIT ? CH_PERMIT : CH_ENFORCE;
      id_q    <= '0;
      beats_q <= '0;
    end else begin
      state <= state_d;
      if (state == CH_CHECK && issued) begin
        id_q    <= cur_req.id;
        beats_q <= IS_READ ? cur_req.len : 8'd0;
      end else if (state == CH_RESPOND && err_ready && beats_q != '0) begin
        beats_q <= beats_q - 1'b1;
      end
    end
  end

  a_report_held: assert property (@(posedge clk) disable iff (!rst_n)
    rep_valid && !rep_ready |=> rep_valid && $stable(rep_data));
  a_err_held: assert property (@(posedge clk) disable iff (!rst_n)
    err_valid && !err_ready |=> err_valid && $stable(err_id) && $stable(err_last));
endmodule
