// nocf_interposer -- one NoC firewall interposer on one AXI4 master port.
//
// Placed between a master IP's AXI4 port and the NoC port it would otherwise
// use. Its slave port (s_*) faces the master IP, its master port (m_*) faces
// the NoC. Inside are a PDP (nocf_pdp), an integrity core interface
// (nocf_ic_if) and two PEPs, one per address channel, each made of an address
// filter (nocf_addr_filter) and a channel controller (nocf_pep_channel).
//
// AR and AW pass through their filters: an allowed request goes to the NoC in
// the cycle it is presented (if the NoC is ready). A denied request is held,
// reported to the integrity core over the outbound link (raising irq), and
// stays blocked until the core sends an enforce command for that channel,
// possibly after installing new rules. The request is then re-checked and
// either forwarded or dropped; a dropped request is answered with a DECERR
// response generated here. While that response is sent, the interposer owns
// the master-side B (or R) channel and holds BREADY (RREADY) low towards the
// NoC. The W channel is wired straight through.
//
// Latency: zero added cycles for an allowed request. A denied request waits
// for the integrity core's round trip.
//
// The structure and behaviour follow the paper. Passing W through unchanged
// even for a write that is later dropped is what the paper describes (all
// channels but the address and response ones are direct connections); a NoC
// that needs W beats to follow an accepted AW must be given a write data
// filter, which this design does not have.
module nocf_interposer
  import nocf_pkg::*;
#(
  parameter int unsigned NUM_RULES    = 2,
  parameter int unsigned FSL_DEPTH    = 16,
  parameter bit          START_PERMIT = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  // slave port: from the regulated master IP
  input  logic             s_aw_valid,
  output logic             s_aw_ready,
  input  axi_addr_t        s_aw,
  input  logic             s_w_valid,
  output logic             s_w_ready,
  input  axi_w_t           s_w,
  output logic             s_b_valid,
  input  logic             s_b_ready,
  output axi_b_t           s_b,
  input  logic             s_ar_valid,
  output logic             s_ar_ready,
  input  axi_addr_t        s_ar,
  output logic             s_r_valid,
  input  logic             s_r_ready,
  output axi_r_t           s_r,
  // master port: to the NoC
  output logic             m_aw_valid,
  input  logic             m_aw_ready,
  output axi_addr_t        m_aw,
  output logic             m_w_valid,
  input  logic             m_w_ready,
  output axi_w_t           m_w,
  input  logic             m_b_valid,
  output logic             m_b_ready,
  input  axi_b_t           m_b,
  output logic             m_ar_valid,
  input  logic             m_ar_ready,
  output axi_addr_t        m_ar,
  input  logic             m_r_valid,
  output logic             m_r_ready,
  input  axi_r_t           m_r,
  // policy configuration link to the integrity core
  input  logic             fsl_in_write,
  input  logic [FSL_W-1:0] fsl_in_data,
  output logic             fsl_in_full,
  input  logic             fsl_out_read,
  output logic [FSL_W-1:0] fsl_out_data,
  output logic             fsl_out_exists,
  output logic             irq,
  // observation
  output ch_state_t        rd_state,
  output ch_state_t        wr_state,
  output af_state_t        rd_filter_state,
  output af_state_t        wr_filter_state
);
  // PDP <-> ic_if
  logic  upd_valid, upd_flush, policy_busy;
  rule_t upd_rule;
  rule_t rules [NUM_RULES];
  logic  rd_allow, wr_allow;
  // channels
  logic             enforce_rd, enforce_wr;
  logic             rep_rd_valid, rep_rd_ready, rep_wr_valid, rep_wr_ready;
  logic [FSL_W-1:0] rep_rd_data, rep_wr_data;
  // filters
  logic      ar_cur_valid, aw_cur_valid;
  axi_addr_t ar_cur, aw_cur;
  logic      ar_dec_valid, ar_dec_allow, aw_dec_valid, aw_dec_allow;
  logic      ar_fwd, aw_fwd;
  // error responses
  logic            rerr_active, rerr_valid, rerr_last;
  logic            berr_active, berr_valid, berr_last;
  logic [ID_W-1:0] rerr_id, berr_id;

  nocf_ic_if #(.FSL_DEPTH(FSL_DEPTH)) u_ic_if (
    .clk, .rst_n,
    .fsl_in_write, .fsl_in_data, .fsl_in_full,
    .fsl_out_read, .fsl_out_data, .fsl_out_exists, .irq,
    .upd_valid, .upd_flush, .upd_rule, .policy_busy,
    .enforce_rd, .enforce_wr,
    .rep_rd_valid, .rep_rd_ready, .rep_rd_data,
    .rep_wr_valid, .rep_wr_ready, .rep_wr_data
  );

  nocf_pdp #(.NUM_RULES(NUM_RULES)) u_pdp (
    .clk, .rst_n,
    .upd_valid, .upd_flush, .upd_rule,
    .rd_addr(ar_cur.addr), .rd_allow,
    .wr_addr(aw_cur.addr), .wr_allow,
    .rules
  );

  // ---------------- read channel PEP ----------------
  nocf_addr_filter u_ar_filter (
    .clk, .rst_n,
    .up_valid(s_ar_valid), .up_ready(s_ar_ready), .up_req(s_ar),
    .dn_valid(m_ar_valid), .dn_ready(m_ar_ready), .dn_req(m_ar),
    .cur_valid(ar_cur_valid), .cur_req(ar_cur),
    .dec_valid(ar_dec_valid), .dec_allow(ar_dec_allow),
    .forwarded(ar_fwd), .state(rd_filter_state)
  );

  nocf_pep_channel #(.IS_READ(1'b1), .START_PERMIT(START_PERMIT)) u_rd_ch (
    .clk, .rst_n,
    .policy_busy, .pdp_allow(rd_allow),
    .cur_valid(ar_cur_valid), .cur_req(ar_cur),
    .dec_valid(ar_dec_valid), .dec_allow(ar_dec_allow),
    .rep_valid(rep_rd_valid), .rep_ready(rep_rd_ready), .rep_data(rep_rd_data),
    .enforce_cmd(enforce_rd),
    .err_active(rerr_active), .err_valid(rerr_valid), .err_ready(s_r_ready),
    .err_id(rerr_id), .err_last(rerr_last),
    .state(rd_state)
  );

  // ---------------- write channel PEP ----------------
  nocf_addr_filter u_aw_filter (
    .clk, .rst_n,
    .up_valid(s_aw_valid), .up_ready(s_aw_ready), .up_req(s_aw),
    .dn_valid(m_aw_valid), .dn_ready(m_aw_ready), .dn_req(m_aw),
    .cur_valid(aw_cur_valid), .cur_req(aw_cur),
    .dec_valid(aw_dec_valid), .dec_allow(aw_dec_allow),
    .forwarded(aw_fwd), .state(wr_filter_state)
  );

  nocf_pep_channel #(.IS_READ(1'b0), .START_PERMIT(START_PERMIT)) u_wr_ch (
    .clk, .rst_n,
    .policy_busy, .pdp_allow(wr_allow),
    .cur_valid(aw_cur_valid), .cur_req(aw_cur),
    .dec_valid(aw_dec_valid), .dec_allow(aw_dec_allow),
    .rep_valid(rep_wr_valid), .rep_ready(rep_wr_ready), .rep_data(rep_wr_data),
    .enforce_cmd(enforce_wr),
    .err_active(berr_active), .err_valid(berr_valid), .err_ready(s_b_ready),
    .err_id(berr_id), .err_last(berr_last),
    .state(wr_state)
  );

  // ---------------- W: direct connection ----------------
  assign m_w_valid = s_w_valid;
  assign m_w       = s_w;
  assign s_w_ready = m_w_ready;

  // ---------------- R and B: taken over during an error response ----------------
  always_comb begin
    if (rerr_active) begin
      s_r_valid = rerr_valid;
      s_r       = '{id: rerr_id, data: '0, resp: RESP_DECERR, last: rerr_last};
      m_r_ready = 1'b0;
    end else begin
      s_r_valid = m_r_valid;
      s_r       = m_r;
      m_r_ready = s_r_ready;
    end
    if (berr_active) begin
      s_b_valid = berr_valid;
      s_b       = '{id: berr_id, resp: RESP_DECERR};
      m_b_ready = 1'b0;
    end else begin
      s_b_valid = m_b_valid;
      s_b       = m_b;
      m_b_ready = s_b_ready;
    end
  end

  // Critical security invariant: a request reaches the NoC only if the policy
  // allowed it in the cycle it was decided. Checked where the decision is made.
  a_ar_allowed: assert property (@(posedge clk) disable iff (!rst_n)
    m_ar_valid && rd_filter_state != AF_WAITING |-> ar_dec_valid && ar_dec_allow);
  a_aw_allowed: assert property (@(posedge clk) disable iff (!rst_n)
    m_aw_valid && wr_filter_state != AF_WAITING |-> aw_dec_valid && aw_dec_allow);
endmodule
