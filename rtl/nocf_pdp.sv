// nocf_pdp -- Policy Decision Point of one interposer.
//
// Holds NUM_RULES policy rules. Each rule grants read and/or write access to a
// naturally aligned power-of-two region (see nocf_pkg::rule_allows). The address
// on each channel is checked against every rule in parallel; an access is
// allowed if any valid rule covers it with the matching permission bit. The
// checks are purely combinational, so a decision is available in the same cycle
// as the address.
//
// Updates arrive on upd_valid. With upd_flush set every rule is invalidated;
// otherwise upd_rule is written into the oldest slot. Slots are replaced in
// first-in first-out order: a pointer to the oldest slot advances on each
// insert and is reset by a flush. After reset no rule allows anything.
//
// From the paper: parallel checking of all rules, the base-plus-size rule form,
// FIFO replacement of the oldest rule, the empty default policy and the rule
// count of two (four on the peripheral data ports). Tracking age with a single
// pointer is this design's choice.
module nocf_pdp
  import nocf_pkg::*;
#(
  parameter int unsigned NUM_RULES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              upd_valid,
  input  logic              upd_flush,
  input  rule_t             upd_rule,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_allow,
  input  logic [ADDR_W-1:0] wr_addr,
  output logic              wr_allow,
  output rule_t             rules [NUM_RULES]
);
  localparam int unsigned PW = (NUM_RULES > 1) ? $clog2(NUM_RULES) : 1;

  logic [PW-1:0] oldest;

  always_comb begin
    rd_allow = 1'b0;
    wr_allow = 1'b0;
    for (int i = 0; i < NUM_RULES; i++) begin
      rd_allow = rd_allow | rule_allows(rules[i], rd_addr, 1'b1);
      wr_allow = wr_allow | rule_allows(rules[i], wr_addr, 1'b0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oldest <= '0;
      for (int i = 0; i < NUM_RULES; i++) rules[i] <= '0;
    end else if (upd_valid) begin
      if (upd_flush) begin
        oldest <= '0;
        for (int i = 0; i < NUM_RULES; i++) rules[i] <= '0;
      end else begin
        rules[oldest]       <= upd_rule;
        rules[oldest].valid <= 1'b1;
        oldest <= (oldest == PW'(NUM_RULES - 1)) ? '0 : oldest + 1'b1;
      end
    end
  end
endmodule
