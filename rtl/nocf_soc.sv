// nocf_soc -- the NoC firewall layer of the two-core prototype system.
//
// One nocf_interposer per master port that enters a NoC, NUM_PORTS in all
// (nine in the prototype: two main cores with instruction and data ports on
// both the memory NoC and the peripheral NoC, plus the GPU's port on the memory
// NoC). The interposers are independent of each other; what they share is the
// integrity core, which owns every interposer's policy configuration link and
// interrupt line. The master IP, the NoCs and the integrity core are outside
// this module, so their sides of every interposer are ports here:
//   s_*  [NUM_PORTS]  AXI4 slave ports facing the master IPs
//   m_*  [NUM_PORTS]  AXI4 master ports facing the NoC slave ports
//   fsl_* / irq       one link pair and one interrupt line per interposer
// Port numbering: 0..3 core 0 (memory instruction, memory data, peripheral
// instruction, peripheral data), 4..7 core 1 in the same order, 8 GPU.
//
// The port count and the rule counts (two per interposer, four on the two
// peripheral data ports) follow the paper. The numbering is this design's.
module nocf_soc
  import nocf_pkg::*;
#(
  parameter int unsigned NUM_PORTS             = 9,
  parameter int unsigned PORT_RULES[NUM_PORTS] = '{2, 2, 2, 4, 2, 2, 2, 4, 2},
  parameter int unsigned FSL_DEPTH             = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // master IP side
  input  logic      [NUM_PORTS-1:0]       s_aw_valid,
  output logic      [NUM_PORTS-1:0]       s_aw_ready,
  input  axi_addr_t [NUM_PORTS-1:0]       s_aw,
  input  logic      [NUM_PORTS-1:0]       s_w_valid,
  output logic      [NUM_PORTS-1:0]       s_w_ready,
  input  axi_w_t    [NUM_PORTS-1:0]       s_w,
  output logic      [NUM_PORTS-1:0]       s_b_valid,
  input  logic      [NUM_PORTS-1:0]       s_b_ready,
  output axi_b_t    [NUM_PORTS-1:0]       s_b,
  input  logic      [NUM_PORTS-1:0]       s_ar_valid,
  output logic      [NUM_PORTS-1:0]       s_ar_ready,
  input  axi_addr_t [NUM_PORTS-1:0]       s_ar,
  output logic      [NUM_PORTS-1:0]       s_r_valid,
  input  logic      [NUM_PORTS-1:0]       s_r_ready,
  output axi_r_t    [NUM_PORTS-1:0]       s_r,
  // NoC side
  output logic      [NUM_PORTS-1:0]       m_aw_valid,
  input  logic      [NUM_PORTS-1:0]       m_aw_ready,
  output axi_addr_t [NUM_PORTS-1:0]       m_aw,
  output logic      [NUM_PORTS-1:0]       m_w_valid,
  input  logic      [NUM_PORTS-1:0]       m_w_ready,
  output axi_w_t    [NUM_PORTS-1:0]       m_w,
  input  logic      [NUM_PORTS-1:0]       m_b_valid,
  output logic      [NUM_PORTS-1:0]       m_b_ready,
  input  axi_b_t    [NUM_PORTS-1:0]       m_b,
  output logic      [NUM_PORTS-1:0]       m_ar_valid,
  input  logic      [NUM_PORTS-1:0]       m_ar_ready,
  output axi_addr_t [NUM_PORTS-1:0]       m_ar,
  input  logic      [NUM_PORTS-1:0]       m_r_valid,
  output logic      [NUM_PORTS-1:0]       m_r_ready,
  input  axi_r_t    [NUM_PORTS-1:0]       m_r,
  // integrity core side
  input  logic      [NUM_PORTS-1:0]       fsl_in_write,
  input  logic      [NUM_PORTS-1:0][FSL_W-1:0] fsl_in_data,
  output logic      [NUM_PORTS-1:0]       fsl_in_full,
  input  logic      [NUM_PORTS-1:0]       fsl_out_read,
  output logic      [NUM_PORTS-1:0][FSL_W-1:0] fsl_out_data,
  output logic      [NUM_PORTS-1:0]       fsl_out_exists,
  output logic      [NUM_PORTS-1:0]       irq,
  // observation
  output ch_state_t [NUM_PORTS-1:0]       rd_state,
  output ch_state_t [NUM_PORTS-1:0]       wr_state,
  output af_state_t [NUM_PORTS-1:0]       rd_filter_state,
  output af_state_t [NUM_PORTS-1:0]       wr_filter_state
);
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    nocf_interposer #(
      .NUM_RULES (PORT_RULES[p]),
      .FSL_DEPTH (FSL_DEPTH)
    ) u_interposer (
      .clk, .rst_n,
      .s_aw_valid(s_aw_valid[p]), .s_aw_ready(s_aw_ready[p]), .s_aw(s_aw[p]),
      .s_w_valid (s_w_valid[p]),  .s_w_ready (s_w_ready[p]),  .s_w (s_w[p]),
      .s_b_valid (s_b_valid[p]),  .s_b_ready (s_b_ready[p]),  .s_b (s_b[p]),
      .s_ar_valid(s_ar_valid[p]), .s_ar_ready(s_ar_ready[p]), .s_ar(s_ar[p]),
      .s_r_valid (s_r_valid[p]),  .s_r_ready (s_r_ready[p]),  .s_r (s_r[p]),
      .m_aw_valid(m_aw_valid[p]), .m_aw_ready(m_aw_ready[p]), .m_aw(m_aw[p]),
      .m_w_valid (m_w_valid[p]),  .m_w_ready (m_w_ready[p]),  .m_w (m_w[p]),
      .m_b_valid (m_b_valid[p]),  .m_b_ready (m_b_ready[p]),  .m_b (m_b[p]),
      .m_ar_valid(m_ar_valid[p]), .m_ar_ready(m_ar_ready[p]), .m_ar(m_ar[p]),
      .m_r_valid (m_r_valid[p]),  .m_r_ready (m_r_ready[p]),  .m_r (m_r[p]),
      .fsl_in_write  (fsl_in_write[p]),
      .fsl_in_data   (fsl_in_data[p]),
      .fsl_in_full   (fsl_in_full[p]),
      .fsl_out_read  (fsl_out_read[p]),
      .fsl_out_data  (fsl_out_data[p]),
      .fsl_out_exists(fsl_out_exists[p]),
      .irq           (irq[p]),
      .rd_state       (rd_state[p]),
      .wr_state       (wr_state[p]),
      .rd_filter_state(rd_filter_state[p]),
      .wr_filter_state(wr_filter_state[p])
    );
  end
endmodule
