// tb_integrity_kernel_model -- behavioural integrity core running the kernel.
//
// Not synthesizable; testbench use only. Plays the dedicated integrity core
// and its firmware for NUM_LINKS interposers. It serves interrupt lines one at
// a time (lowest number first): reads the fault report {addr[31:1], is_read},
// looks the access up in its grant table, and if a grant matches sends a new
// rule command for that grant's region, then always sends the enforce command
// for the blocked channel. An access no grant covers is left denied, so the
// interposer answers it with a decode error. HANDLER_CYCLES models the
// handler's software delay. n_regrants counts grants of a region that had
// been granted before, i.e. rules that were evicted or flushed and came back. The table is filled by the testbench with
// add_grant(); send() lets it issue any command (for example a flush).
module tb_integrity_kernel_model
  import nocf_pkg::*;
#(
  parameter int NUM_LINKS      = 1,
  parameter int HANDLER_CYCLES = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  output logic [NUM_LINKS-1:0]             fsl_in_write,
  output logic [NUM_LINKS-1:0][FSL_W-1:0]  fsl_in_data,
  input  logic [NUM_LINKS-1:0]             fsl_in_full,
  output logic [NUM_LINKS-1:0]             fsl_out_read,
  input  logic [NUM_LINKS-1:0][FSL_W-1:0]  fsl_out_data,
  input  logic [NUM_LINKS-1:0]             fsl_out_exists,
  input  logic [NUM_LINKS-1:0]             irq
);
  typedef struct {
    int          link;
    logic [31:0] base;
    logic [3:0]  size;
    bit          rd, wr;
  } grant_t;

  grant_t grants[$];
  int n_interrupts = 0, n_granted = 0, n_denied = 0, n_regrants = 0;
  bit granted_before[int];
  int last_link = -1;
  logic [31:0] last_addr;
  bit          last_is_read;

  function automatic void add_grant(int link, logic [31:0] base, logic [3:0] size, bit rd, bit wr);
    grants.push_back('{link, base, size, rd, wr});
  endfunction

  function automatic void clear_grants();
    grants.delete();
  endfunction

  // CalculateRegionSize: the grant covering this access, if any.
  function automatic int find_grant(int link, logic [31:0] addr, bit is_read);
    foreach (grants[i]) begin
      longint unsigned sz, lo;
      int lg;
      lg = 8 + 2 * int'(grants[i].size);
      if (lg > 32) lg = 32;
      sz = 64'd1 << lg;
      lo = {32'd0, grants[i].base} / sz * sz;
      if (grants[i].link == link && longint'(addr) >= lo && longint'(addr) < lo + sz &&
          (is_read ? grants[i].rd : grants[i].wr))
        return i;
    end
    return -1;
  endfunction

  task automatic send(int link, logic [31:0] word);
    while (fsl_in_full[link]) @(posedge clk);
    fsl_in_write[link] <= 1'b1;
    fsl_in_data[link]  <= word;
    @(posedge clk);
    fsl_in_write[link] <= 1'b0;
  endtask

  initial begin
    fsl_in_write = '0;
    fsl_in_data  = '0;
    fsl_out_read = '0;
    forever begin
      @(posedge clk);
      if (rst_n && irq != '0) begin
        int link;
        logic [31:0] raw;
        int g;
        link = 0;
        while (!irq[link]) link++;
        raw = fsl_out_data[link];
        fsl_out_read[link] <= 1'b1;
        @(posedge clk);
        fsl_out_read[link] <= 1'b0;
        n_interrupts++;
        last_link    = link;
        last_addr    = {raw[31:1], 1'b0};
        last_is_read = raw[0];
        repeat (HANDLER_CYCLES) @(posedge clk);
        g = find_grant(link, last_addr, last_is_read);
        if (g >= 0) begin
          n_granted++;
          if (granted_before.exists(g)) n_regrants++;
          granted_before[g] = 1'b1;
          send(link, make_rule_cmd(grants[g].base, grants[g].rd, grants[g].wr, grants[g].size));
        end else n_denied++;
        send(link, make_op_cmd(last_is_read ? CMD_ENFORCE_READ : CMD_ENFORCE_WRITE));
      end
    end
  end
endmodule
