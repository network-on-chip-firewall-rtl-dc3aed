// nocf_fsl_fifo -- one direction of a policy configuration link (Fast Simplex Link).
//
// A synchronous first-in first-out buffer of WIDTH-bit words. The writer enqueues
// with wr_en while full is low; the reader sees the head word on rd_data whenever
// exists is high and dequeues it with rd_en (show-ahead). Enqueue and dequeue may
// happen in the same cycle. A write while full or a read while empty is ignored.
// Both flags come straight from registers, so a word written in cycle t is
// visible to the reader in cycle t+1.
//
// The paper buffers both directions of the link with FIFOs and sends fixed-size
// 32-bit words; the depth of 16 words is this design's choice.
module nocf_fsl_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             exists
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  logic do_wr, do_rd;
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && exists;
  assign full    = (count == (AW+1)'(DEPTH));
  assign exists  = (count != '0);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end
endmodule
