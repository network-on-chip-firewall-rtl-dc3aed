// tb_mal_gpu_model -- behavioural malicious GPU, an AXI4 master.
//
// Not synthesizable; testbench use only. When start pulses, it reads the first
// pixels of its framebuffer (32-bit pixels) and looks at the least significant
// byte of each. If the first four such bytes are the trigger DE AD BE EF, the
// following bytes form a command: a 4-byte target address, a 2-byte length N,
// then N bytes of data, all least significant byte first. The GPU then writes
// the data to the target address in 32-bit words. Error responses are counted,
// not retried. A write refused before its data was taken is abandoned (this
// master does not care about protocol rules). done pulses at the end.
module tb_mal_gpu_model
  import nocf_pkg::*;
#(
  parameter logic [31:0] FB_BASE = 32'hA000_0000
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  output logic      done,
  output logic      aw_valid,
  input  logic      aw_ready,
  output axi_addr_t aw,
  output logic      w_valid,
  input  logic      w_ready,
  output axi_w_t    w,
  input  logic      b_valid,
  output logic      b_ready,
  input  axi_b_t    b,
  output logic      ar_valid,
  input  logic      ar_ready,
  output axi_addr_t ar,
  input  logic      r_valid,
  output logic      r_ready,
  input  axi_r_t    r
);
  int n_read_err = 0, n_write_err = 0, n_write_ok = 0;
  bit triggered = 0;
  logic [31:0] target;
  int length;

  function automatic axi_addr_t mk(logic [31:0] a, logic [7:0] len);
    axi_addr_t q = '0;
    q.addr = a; q.len = len; q.size = 3'd2; q.burst = 2'b01; q.id = 4'd8;
    return q;
  endfunction

  // The GPU drives and samples on the falling edge, when every signal is
  // settled; a transfer seen there completes on the following rising edge.

  // Read 16 pixels starting at pixel index p; returns their low bytes.
  task automatic read_pixels(int p, output logic [7:0] lsb[16]);
    bit hs;
    @(negedge clk);
    ar_valid = 1'b1; ar = mk(FB_BASE + 32'(4 * p), 8'd15);
    do begin
      hs = ar_ready;
      @(negedge clk);
    end while (!hs);
    ar_valid = 1'b0;
    r_ready  = 1'b1;
    for (int i = 0; i < 16; ) begin
      if (r_valid) begin
        if (r.resp != RESP_OKAY) n_read_err++;
        lsb[i] = r.data[7:0];
        i++;
      end
      @(negedge clk);
    end
    r_ready = 1'b0;
  endtask

  task automatic write_word(logic [31:0] a, logic [31:0] d);
    bit b_seen, aw_hs, w_hs;
    @(negedge clk);
    aw_valid = 1'b1; aw = mk(a, 8'd0);
    w_valid  = 1'b1; w = '{data: d, strb: 4'hF, last: 1'b1};
    b_ready  = 1'b1;
    b_seen = 0;
    while (!b_seen) begin
      aw_hs = aw_valid && aw_ready;
      w_hs  = w_valid && w_ready;
      if (b_valid) begin
        b_seen = 1;
        if (b.resp == RESP_OKAY) n_write_ok++; else n_write_err++;
      end
      @(negedge clk);
      if (aw_hs) aw_valid = 1'b0;
      if (w_hs) w_valid = 1'b0;
    end
    aw_valid = 1'b0; w_valid = 1'b0; b_ready = 1'b0;
  endtask

  initial begin
    aw_valid = 0; w_valid = 0; ar_valid = 0; r_ready = 0; b_ready = 0; done = 0;
    aw = '0; w = '0; ar = '0;
    forever begin
      @(posedge clk);
      if (start) begin
        logic [7:0] stream[$];
        logic [7:0] lsb[16];
        int p;
        p = 0;
        stream.delete();
        // enough pixels for trigger, header and up to 1024 bytes of data
        while (p < 16 * 66) begin
          read_pixels(p, lsb);
          foreach (lsb[i]) stream.push_back(lsb[i]);
          p += 16;
          if (p == 16 && {stream[0], stream[1], stream[2], stream[3]} != 32'hDEAD_BEEF) break;
          if (p >= 16 && stream.size() >= 10 && stream.size() >= 10 + int'({stream[9], stream[8]})) break;
        end
        triggered = (stream.size() >= 10) && ({stream[0], stream[1], stream[2], stream[3]} == 32'hDEAD_BEEF);
        if (triggered) begin
          target = {stream[7], stream[6], stream[5], stream[4]};
          length = int'({stream[9], stream[8]});
          for (int i = 0; i < length; i += 4) begin
            logic [31:0] d;
            d = '0;
            for (int k = 0; k < 4; k++) if (i + k < length) d[8*k +: 8] = stream[10 + i + k];
            write_word(target + 32'(i), d);
          end
        end
        done <= 1'b1;
        @(posedge clk);
        done <= 1'b0;
      end
    end
  end
endmodule
