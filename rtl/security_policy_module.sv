// security_policy_module -- the centralized security policy module: a ring of
// enforcement logic between the IPs and the bus interconnect.
//
// It has NM master ports and NS slave ports on each of its two faces. Master m
// connects to mst_*[m] and the interconnect's master port m to xm_*[m]; the
// interconnect's slave port s connects to xs_*[s] and slave IP s to slv_*[s].
// Every master path goes through one master_policy_port, every slave path
// through one slave_policy_port, and all of them read the same policy table
// RULES (see dispel_pkg). The interconnect itself is untouched: the module
// only passes or rewrites the signals that cross it, in both directions.
//
// Timing: all rewrites are combinational; an allowed transaction crosses the
// module in zero cycles. The only holds the module adds are a W beat waiting
// for its address, a second write behind an open one on a master port, and a
// second read behind an open one on a slave port.
//
// rule_hit_o has one bit per rule: high in a cycle in which that rule changed
// a value somewhere (the OR over all ports). It is a status output of this
// design, not a signal named by the paper.
module security_policy_module
  import dispel_pkg::*;
#(
  parameter int unsigned NM = 1,
  parameter int unsigned NS = NUM_SLAVES,
  parameter int unsigned NR = NUM_DEFAULT_RULES,
  parameter policy_rule_t [NR-1:0] RULES = DEFAULT_RULES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mode_i,                 // 0 = user mode
  input  axi_req_t mst_req_i [NM],
  output axi_rsp_t mst_rsp_o [NM],
  output axi_req_t xm_req_o  [NM],
  input  axi_rsp_t xm_rsp_i  [NM],
  input  axi_req_t xs_req_i  [NS],
  output axi_rsp_t xs_rsp_o  [NS],
  output axi_req_t slv_req_o [NS],
  input  axi_rsp_t slv_rsp_i [NS],
  output logic [NR-1:0] rule_hit_o
);

  logic [NR-1:0] m_hit [NM];
  logic [NR-1:0] s_hit [NS];

  for (genvar m = 0; m < NM; m++) begin : g_mst
    master_policy_port #(.MASTER_ID(m), .NR(NR), .RULES(RULES)) u_port (
      .clk        (clk),
      .rst_n      (rst_n),
      .mode_i     (mode_i),
      .m_req_i    (mst_req_i[m]),
      .m_rsp_o    (mst_rsp_o[m]),
      .x_req_o    (xm_req_o[m]),
      .x_rsp_i    (xm_rsp_i[m]),
      .rule_hit_o (m_hit[m])
    );
  end

  for (genvar s = 0; s < NS; s++) begin : g_slv
    slave_policy_port #(.SLAVE_ID(s), .NR(NR), .RULES(RULES)) u_port (
      .clk        (clk),
      .rst_n      (rst_n),
      .mode_i     (mode_i),
      .x_req_i    (xs_req_i[s]),
      .x_rsp_o    (xs_rsp_o[s]),
      .s_req_o    (slv_req_o[s]),
      .s_rsp_i    (slv_rsp_i[s]),
      .rule_hit_o (s_hit[s])
    );
  end

  always_comb begin
    rule_hit_o = '0;
    for (int m = 0; m < NM; m++) rule_hit_o |= m_hit[m];
    for (int s = 0; s < NS; s++) rule_hit_o |= s_hit[s];
  end

endmodule
