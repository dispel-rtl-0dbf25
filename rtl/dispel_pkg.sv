// dispel_pkg -- shared types and the default policy table of the bus-level
// security policy enforcement logic.
//
// The bus is an AXI4-Lite subset (one address, one data beat per transaction,
// no IDs, no bursts, no prot bits). A bus port is carried as two packed
// structs: axi_req_t (everything a master drives) and axi_rsp_t (everything a
// slave drives). Address and data are 32 bits, as in the address constants and
// data words the policies are written with.
//
// A security policy is the 3-tuple <predicate, timing, action>. In hardware a
// policy is one entry of a table, policy_rule_t:
//   kind      which predicate/action pair the entry enforces (see rule_kind_t)
//   ports     the master or slave numbers the predicate names (bit i = port i)
//   lo, hi    inclusive address range of the predicate
//   mode_any  1: timing tuple absent, the rule holds in every mode
//   mode_val  mode the timing tuple requires ("mode = 0" is user mode)
//   limit     cycle count for RK_CYCLE_LIMIT ("clock_cycles > n")
// DEFAULT_RULES holds the five concrete policies of the reference SoC: the
// memory write policy of the worked example and Policies #1 to #4. Slave
// numbering follows the reference SoC block diagram order (see SLV_* below);
// that numbering is this design's choice.
package dispel_pkg;

  localparam int unsigned AW = 32;   // address width
  localparam int unsigned DW = 32;   // data width
  localparam int unsigned SW = DW/8; // write-strobe width
  localparam int unsigned MAX_PORTS = 16; // width of the port set in a rule

  typedef struct packed {
    logic [AW-1:0] awaddr;
    logic          awvalid;
    logic [DW-1:0] wdata;
    logic [SW-1:0] wstrb;
    logic          wvalid;
    logic          bready;
    logic [AW-1:0] araddr;
    logic          arvalid;
    logic          rready;
  } axi_req_t;

  typedef struct packed {
    logic          awready;
    logic          wready;
    logic [1:0]    bresp;
    logic          bvalid;
    logic          arready;
    logic [DW-1:0] rdata;
    logic [1:0]    rresp;
    logic          rvalid;
  } axi_rsp_t;

  typedef enum logic [2:0] {
    RK_NONE        = 3'd0, // unused table entry
    RK_WRITE_MASK  = 3'd1, // master side: write into [lo,hi] -> w_data=0, w_valid=0
    RK_READ_MASK   = 3'd2, // slave side: read of [lo,hi] from a named slave -> r_data=0
    RK_WDATA_HIDE  = 3'd3, // slave side: write into [lo,hi] seen by a slave NOT named -> w_data=0
    RK_CYCLE_LIMIT = 3'd4  // slave side: named slave busy > limit cycles -> r_data=0
  } rule_kind_t;

  typedef struct packed {
    rule_kind_t           kind;
    logic [MAX_PORTS-1:0] ports;
    logic [AW-1:0]        lo;
    logic [AW-1:0]        hi;
    logic                 mode_any;
    logic                 mode_val;
    logic [31:0]          limit;
  } policy_rule_t;

  // Slave numbering of the reference SoC (block diagram order, memory first).
  localparam int SLV_MEM    = 0;
  localparam int SLV_AES    = 1;
  localparam int SLV_DES3   = 2;
  localparam int SLV_RSA    = 3;
  localparam int SLV_MD5    = 4;
  localparam int SLV_SHA256 = 5;
  localparam int SLV_FIR    = 6;
  localparam int SLV_IIR    = 7;
  localparam int SLV_DFT    = 8;
  localparam int SLV_IDFT   = 9;
  localparam int SLV_JTAG   = 10;
  localparam int SLV_UART   = 11;
  localparam int NUM_SLAVES = 12;

  localparam int NUM_DEFAULT_RULES = 5;
  typedef policy_rule_t [NUM_DEFAULT_RULES-1:0] default_rules_t;

  function automatic default_rules_t default_rules();
    default_rules_t r;
    // Worked example: no user-mode write into 0x0001dfa4..0x0001ffac of main memory.
    r[0] = '{kind: RK_WRITE_MASK, ports: 16'h0001, lo: 32'h0001_dfa4, hi: 32'h0001_ffac,
             mode_any: 1'b0, mode_val: 1'b0, limit: 32'd0};
    // Policy #1: no user-mode write into 0x9300000c..0x93000010.
    r[1] = '{kind: RK_WRITE_MASK, ports: 16'h0001, lo: 32'h9300_000c, hi: 32'h9300_0010,
             mode_any: 1'b0, mode_val: 1'b0, limit: 32'd0};
    // Policy #2: slave 1 returns zero for reads of 0x93000004..0x93000008.
    r[2] = '{kind: RK_READ_MASK, ports: 16'(1 << SLV_AES), lo: 32'h9300_0004, hi: 32'h9300_0008,
             mode_any: 1'b0, mode_val: 1'b0, limit: 32'd0};
    // Policy #3: key writes 0x93000014..0x93000028 are visible only to the crypto slaves.
    r[3] = '{kind: RK_WDATA_HIDE,
             ports: 16'((1 << SLV_AES) | (1 << SLV_DES3) | (1 << SLV_RSA) | (1 << SLV_MD5) | (1 << SLV_SHA256)),
             lo: 32'h9300_0014, hi: 32'h9300_0028, mode_any: 1'b0, mode_val: 1'b0, limit: 32'd0};
    // Policy #4: results of slave 2 are discarded after more than 1000 busy cycles.
    r[4] = '{kind: RK_CYCLE_LIMIT, ports: 16'(1 << SLV_DES3), lo: 32'h0, hi: 32'hffff_ffff,
             mode_any: 1'b0, mode_val: 1'b0, limit: 32'd1000};
    return r;
  endfunction

  localparam default_rules_t DEFAULT_RULES = default_rules();

  // Predicate and timing tuple of one rule: address in [lo,hi] and mode matches.
  function automatic logic rule_addr_mode_match(policy_rule_t r, logic [AW-1:0] addr, logic mode);
    return (addr >= r.lo) && (addr <= r.hi) && (r.mode_any || (mode == r.mode_val));
  endfunction

  // Timing tuple only (rules whose predicate has no address).
  function automatic logic rule_mode_match(policy_rule_t r, logic mode);
    return r.mode_any || (mode == r.mode_val);
  endfunction

  localparam logic [1:0] RESP_OKAY = 2'b00;

endpackage
