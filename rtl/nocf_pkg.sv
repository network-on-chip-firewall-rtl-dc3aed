// nocf_pkg -- types and constants shared by the NoC firewall (NoCF) interposer.
//
// The firewall sits on AXI4 address channels. An address request is carried as
// one packed struct (axi_addr_t); the response channels as axi_r_t and axi_b_t.
// A policy rule names a naturally aligned region by a partial base address and a
// 4-bit size code, plus read and write permission bits. The integrity core talks
// to each interposer over 32-bit words (a Fast Simplex Link, FSL).
//
// From the paper: 32-bit addresses and command words, the rule contents (partial
// address, two permission bits, four size bits), the channel states and the
// three address-filter states. This design's own choices: the command word layout
// below, the set of region sizes (2^(8+2s) bytes, capped at 4 GiB), the fault
// report word {addr[31:1], is_read}, the ID and data widths.
//
// Command word (integrity core -> interposer):
//   [31:30] opcode   0 new rule, 1 flush all rules, 2 enforce read, 3 enforce write
//   [29]    read permitted      (new rule only)
//   [28]    write permitted     (new rule only)
//   [27:24] size code s         (new rule only) region = 2^(8+2s) bytes
//   [23:0]  base address bits [31:8]
// Fault report word (interposer -> integrity core): {addr[31:1], is_read}.
package nocf_pkg;

  parameter int unsigned ADDR_W      = 32;
  parameter int unsigned DATA_W      = 32;
  parameter int unsigned ID_W        = 4;
  parameter int unsigned FSL_W       = 32;
  parameter int unsigned RULE_SIZE_W = 4;
  parameter int unsigned RULE_ADDR_W = 24;
  // Smallest region is 2^REGION_MIN_LOG2 bytes; each size step multiplies by 2^REGION_STEP_LOG2.
  parameter int unsigned REGION_MIN_LOG2  = ADDR_W - RULE_ADDR_W;
  parameter int unsigned REGION_STEP_LOG2 = 2;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;
    logic [2:0]        size;
    logic [1:0]        burst;
    logic              lock;
    logic [3:0]        cache;
    logic [2:0]        prot;
    logic [3:0]        qos;
  } axi_addr_t;

  typedef struct packed {
    logic [DATA_W-1:0]   data;
    logic [DATA_W/8-1:0] strb;
    logic                last;
  } axi_w_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [1:0]      resp;
  } axi_b_t;

  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } axi_r_t;

  typedef struct packed {
    logic                   valid;
    logic                   rd;
    logic                   wr;
    logic [RULE_SIZE_W-1:0] size;
    logic [RULE_ADDR_W-1:0] base;
  } rule_t;

  typedef enum logic [1:0] {
    CMD_NEW_RULE      = 2'd0,
    CMD_FLUSH         = 2'd1,
    CMD_ENFORCE_READ  = 2'd2,
    CMD_ENFORCE_WRITE = 2'd3
  } cmd_op_t;

  typedef struct packed {
    cmd_op_t                op;
    logic                   rd;
    logic                   wr;
    logic [RULE_SIZE_W-1:0] size;
    logic [RULE_ADDR_W-1:0] base;
  } cmd_t;

  typedef enum logic [2:0] {
    CH_PERMIT, CH_ENFORCE, CH_REQUEST, CH_WAIT, CH_CHECK, CH_RESPOND, CH_RESUME
  } ch_state_t;

  typedef enum logic [1:0] {
    AF_IDLE, AF_COMMITTED, AF_WAITING
  } af_state_t;

  // Address bits a rule of size code s ignores: log2 of the region size.
  function automatic int unsigned region_log2(logic [RULE_SIZE_W-1:0] s);
    int unsigned l;
    l = REGION_MIN_LOG2 + REGION_STEP_LOG2 * int'(s);
    return (l > ADDR_W) ? ADDR_W : l;
  endfunction

  // Does rule r permit an access of the given kind to addr?
  function automatic logic rule_allows(rule_t r, logic [ADDR_W-1:0] addr, logic is_read);
    logic [ADDR_W-1:0] base_full;
    logic [ADDR_W-1:0] mask;
    int unsigned       l;
    l         = region_log2(r.size);
    base_full = {r.base, {REGION_MIN_LOG2{1'b0}}};
    mask      = (l >= ADDR_W) ? '0 : ({ADDR_W{1'b1}} << l);
    return r.valid && (is_read ? r.rd : r.wr) && (((addr ^ base_full) & mask) == '0);
  endfunction

  function automatic logic [FSL_W-1:0] fault_report(logic [ADDR_W-1:0] addr, logic is_read);
    return {addr[ADDR_W-1:1], is_read};
  endfunction

  function automatic logic [FSL_W-1:0] make_rule_cmd(logic [ADDR_W-1:0] base, logic rd, logic wr,
                                                      logic [RULE_SIZE_W-1:0] size);
    cmd_t c;
    c.op   = CMD_NEW_RULE;
    c.rd   = rd;
    c.wr   = wr;
    c.size = size;
    c.base = base[ADDR_W-1:REGION_MIN_LOG2];
    return c;
  endfunction

  function automatic logic [FSL_W-1:0] make_op_cmd(cmd_op_t op);
    cmd_t c;
    c      = '0;
    c.op   = op;
    return c;
  endfunction

endpackage
