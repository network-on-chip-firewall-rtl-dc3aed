// tb_axi_mem_model -- behavioural AXI4 memory behind a NoC port.
//
// Not synthesizable; testbench use only. A sparse byte-addressed memory with
// one transaction at a time. Reads: after AR is accepted, returns ARLEN+1
// incrementing 32-bit words with OKAY. Writes: after AW is accepted, takes
// AWLEN+1 W beats (W is accepted only while an accepted AW is waiting for its
// data, as many slaves do), applies the byte strobes, then answers with one
// OKAY B beat. Words never written read as zero. The testbench reads and
// writes the array directly through peek() and poke().
module tb_axi_mem_model
  import nocf_pkg::*;
(
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
  logic [7:0] mem[logic [31:0]];
  int n_writes = 0, n_reads = 0;

  function automatic logic [31:0] peek(logic [31:0] a);
    logic [31:0] v;
    for (int i = 0; i < 4; i++) v[8*i +: 8] = mem.exists(a + 32'(i)) ? mem[a + 32'(i)] : 8'h00;
    return v;
  endfunction

  function automatic void poke(logic [31:0] a, logic [31:0] v);
    for (int i = 0; i < 4; i++) mem[a + 32'(i)] = v[8*i +: 8];
  endfunction

  typedef enum {IDLE, RD, WR, WRESP} st_t;
  st_t st;
  axi_addr_t cur;
  int beat;

  assign ar_ready = rst_n && (st == IDLE);
  assign aw_ready = rst_n && (st == IDLE) && !ar_valid;
  assign w_ready  = (st == WR);

  always @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; r_valid <= 1'b0; b_valid <= 1'b0; r <= '0; b <= '0; beat = 0;
    end else begin
      case (st)
        IDLE:
          if (ar_valid && ar_ready) begin
            cur = ar; beat = 0; st <= RD; n_reads++;
            r_valid <= 1'b1;
            r <= '{id: ar.id, data: peek({ar.addr[31:2], 2'b00}), resp: RESP_OKAY, last: (ar.len == 0)};
          end else if (aw_valid && aw_ready) begin
            cur = aw; beat = 0; st <= WR; n_writes++;
          end
        RD:
          if (r_ready) begin
            if (beat == int'(cur.len)) begin
              r_valid <= 1'b0; st <= IDLE;
            end else begin
              beat++;
              r <= '{id: cur.id, data: peek({cur.addr[31:2], 2'b00} + 32'(4 * beat)), resp: RESP_OKAY,
                     last: (beat == int'(cur.len))};
            end
          end
        WR:
          if (w_valid) begin
            for (int i = 0; i < 4; i++)
              if (w.strb[i]) mem[{cur.addr[31:2], 2'b00} + 32'(4 * beat + i)] = w.data[8*i +: 8];
            beat++;
            if (w.last || beat > int'(cur.len)) begin
              st <= WRESP; b_valid <= 1'b1; b <= '{id: cur.id, resp: RESP_OKAY};
            end
          end
        WRESP:
          if (b_ready) begin b_valid <= 1'b0; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
