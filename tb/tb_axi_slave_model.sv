// tb_axi_slave_model -- behavioural AXI4 slave standing in for a NoC port.
//
// Not synthesizable; testbench use only. Accepts AR and AW with a ready that
// is high with probability READY_PCT percent, always accepts W beats, answers
// each read with ARLEN+1 OKAY beats whose data is the request address plus the
// beat number, and each write with one OKAY B beat, in order, one response at
// a time. Every accepted address request is logged in ar_log / aw_log so that
// a testbench can see exactly what reached the NoC. ar_ready_mode lets it
// hold AR ready high or low.
module tb_axi_slave_model
  import nocf_pkg::*;
#(
  parameter int READY_PCT = 60
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      aw_valid,
  output logic      aw_ready,
  input  axi_addr_t aw,
  input  logic      w_valid,
  output logic      w_ready,
  input  axi_w_t    w,
  output logic      b_valid,
  input  logic      b_ready,
  output axi_b_t    b,
  input  logic      ar_valid,
  output logic      ar_ready,
  input  axi_addr_t ar,
  output logic      r_valid,
  input  logic      r_ready,
  output axi_r_t    r
);
  axi_addr_t ar_log[$];
  axi_addr_t aw_log[$];
  axi_addr_t ar_pend[$];
  axi_addr_t aw_pend[$];
  int        w_beats = 0;
  int        beat    = 0;
  int        ar_ready_mode = 0;   // 0: random, 1: always ready, 2: never ready

  assign w_ready = 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      aw_ready <= 1'b0; ar_ready <= 1'b0;
      b_valid  <= 1'b0; r_valid  <= 1'b0;
      b <= '0; r <= '0;
      beat = 0;
    end else begin
      if (ar_valid && ar_ready) begin ar_log.push_back(ar); ar_pend.push_back(ar); end
      if (aw_valid && aw_ready) begin aw_log.push_back(aw); aw_pend.push_back(aw); end
      if (w_valid && w_ready) w_beats++;
      aw_ready <= ($urandom_range(0, 99) < READY_PCT);
      ar_ready <= (ar_ready_mode == 1) ||
                  (ar_ready_mode == 0 && $urandom_range(0, 99) < READY_PCT);
      // read data
      if (r_valid && r_ready) begin
        if (r.last) begin void'(ar_pend.pop_front()); beat = 0; end
        else beat++;
        r_valid <= 1'b0;
      end else if (!r_valid && ar_pend.size() > 0 && $urandom_range(0, 3) != 0) begin
        r_valid <= 1'b1;
        r <= '{id: ar_pend[0].id, data: ar_pend[0].addr + 32'(beat), resp: RESP_OKAY,
               last: (beat == int'(ar_pend[0].len))};
      end
      // write response
      if (b_valid && b_ready) begin
        void'(aw_pend.pop_front());
        b_valid <= 1'b0;
      end else if (!b_valid && aw_pend.size() > 0 && $urandom_range(0, 3) != 0) begin
        b_valid <= 1'b1;
        b <= '{id: aw_pend[0].id, resp: RESP_OKAY};
      end
    end
  end
endmodule
