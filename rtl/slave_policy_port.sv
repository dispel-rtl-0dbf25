// slave_policy_port -- slave-side slice of the centralized security policy
// module, placed between one slave port of the bus interconnect (x_*) and the
// slave IP on it (s_*). SLAVE_ID is the slave's number in the policy table.
//
// Rules it enforces (see dispel_pkg::rule_kind_t):
//  * RK_READ_MASK naming this slave (Policy #2): a read of [lo,hi] returns
//    r_data = 0 to the master; r_valid and r_resp pass, so the master's read
//    completes. The read address is checked and latched at the AR handshake
//    and applied to the R beat that answers it. To make that pairing exact the
//    port lets one read be outstanding at a time (a second AR is held).
//  * RK_WDATA_HIDE not naming this slave (Policy #3): while the write address
//    the interconnect presents to this slave lies in [lo,hi], the slave sees
//    w_data = 0. On a shared bus every slave sees the address and data wires
//    of a write, with valid only at the addressed one; this rule keeps a key
//    written to a crypto slave off the data wires of the untrusted ones. The
//    address is taken from the wires as presented, valid or not, as in the
//    policy's generated code.
//  * RK_CYCLE_LIMIT naming this slave (Policy #4): a policy_cycle_limit FSM
//    counts the cycles from a request accepted by the slave (AR or AW
//    handshake) to its response (R or B handshake); a read response that comes
//    more than `limit` cycles late is returned with r_data = 0.
// All rewrites are combinational (same cycle); only the read-mask verdict, the
// one-outstanding-read bit and the cycle FSMs are registered. mode_i is the
// bus mode (0 = user) used by the rules' timing condition.
// rule_hit_o: one bit per rule, high in a cycle in which the rule changed a
// value that a slave or master takes (R handshake with masked data, or a
// hidden non-zero w_data).
module slave_policy_port
  import dispel_pkg::*;
#(
  parameter int unsigned    SLAVE_ID = 0,
  parameter int unsigned    NR       = NUM_DEFAULT_RULES,
  parameter policy_rule_t [NR-1:0] RULES = DEFAULT_RULES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mode_i,
  input  axi_req_t x_req_i,   // from the interconnect
  output axi_rsp_t x_rsp_o,   // to the interconnect
  output axi_req_t s_req_o,   // to the slave IP
  input  axi_rsp_t s_rsp_i,   // from the slave IP
  output logic [NR-1:0] rule_hit_o
);

  logic          rd_pend_q;   // one read accepted by the slave, R not yet taken
  logic [NR-1:0] rd_hit_q;    // read-mask verdicts latched at the AR handshake
  logic [NR-1:0] rd_hit_now;
  logic [NR-1:0] hide_now;
  logic [NR-1:0] tmo_flag;    // cycle-limit flags
  logic          ar_hs, r_hs, aw_hs, b_hs;
  logic          mask_rd;

  always_comb begin
    for (int r = 0; r < NR; r++) begin
      rd_hit_now[r] = (RULES[r].kind == RK_READ_MASK) && RULES[r].ports[SLAVE_ID]
                      && rule_addr_mode_match(RULES[r], x_req_i.araddr, mode_i);
      hide_now[r]   = (RULES[r].kind == RK_WDATA_HIDE) && !RULES[r].ports[SLAVE_ID]
                      && rule_addr_mode_match(RULES[r], x_req_i.awaddr, mode_i);
    end
  end

  assign ar_hs = s_req_o.arvalid && s_rsp_i.arready;
  assign r_hs  = s_rsp_i.rvalid && x_req_i.rready;
  assign aw_hs = s_req_o.awvalid && s_rsp_i.awready;
  assign b_hs  = s_rsp_i.bvalid && x_req_i.bready;

  // Cycle-limit FSMs, one per RK_CYCLE_LIMIT rule naming this slave.
  for (genvar r = 0; r < NR; r++) begin : g_tmo
    if (RULES[r].kind == RK_CYCLE_LIMIT && RULES[r].ports[SLAVE_ID]) begin : g_on
      policy_cycle_limit #(.LIMIT(RULES[r].limit)) u_limit (
        .clk     (clk),
        .rst_n   (rst_n),
        .en_i    (rule_mode_match(RULES[r], mode_i)),
        .start_i (ar_hs || aw_hs),
        .done_i  (r_hs || b_hs),
        .flag_o  (tmo_flag[r])
      );
    end else begin : g_off
      assign tmo_flag[r] = 1'b0;
    end
  end

  assign mask_rd = (rd_pend_q && |rd_hit_q) || |tmo_flag;

  always_comb begin
    s_req_o = x_req_i;
    x_rsp_o = s_rsp_i;
    // One outstanding read.
    s_req_o.arvalid = x_req_i.arvalid && !rd_pend_q;
    x_rsp_o.arready = s_rsp_i.arready && !rd_pend_q;
    // Policy #3: untrusted slave does not see protected write data.
    if (|hide_now) s_req_o.wdata = '0;
    // Policies #2 and #4: read data discarded.
    if (mask_rd)   x_rsp_o.rdata = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend_q <= 1'b0;
      rd_hit_q  <= '0;
    end else begin
      if (ar_hs) begin
        rd_pend_q <= 1'b1;
        rd_hit_q  <= rd_hit_now;
      end else if (r_hs) begin
        rd_pend_q <= 1'b0;
      end
    end
  end

  always_comb begin
    rule_hit_o = '0;
    for (int r = 0; r < NR; r++) begin
      if (r_hs && rd_pend_q && rd_hit_q[r])         rule_hit_o[r] = 1'b1;
      if (r_hs && tmo_flag[r])                      rule_hit_o[r] = 1'b1;
      if (hide_now[r] && (x_req_i.wdata != '0))     rule_hit_o[r] = 1'b1;
    end
  end

  // A masked read never carries data to the master.
  a_masked_zero: assert property (@(posedge clk) disable iff (!rst_n)
    (s_rsp_i.rvalid && mask_rd) |-> (x_rsp_o.rdata == '0));

endmodule
