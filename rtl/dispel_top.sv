// dispel_top -- bus-level and IP-level security policy enforcement for the
// reference SoC: one processor master, twelve slaves (main memory, five crypto
// cores, four DSP cores, JTAG and UART) on an AXI4-Lite-style interconnect.
//
// Contents:
//  * security_policy_module with the default policy table (the memory write
//    example and Policies #1..#4) between the IPs and the interconnect;
//  * ip_leak_guard in the AES slave's bus wrapper: every word the AES returns
//    on R is checked against the six 32-bit words of its key (aes_key_i, an
//    IP-internal signal the wrapper can observe) before it enters the
//    slave-side policy port.
// The processor, the interconnect and the slave IPs are outside this module:
// their bus ports are ports of the top (mst_*, xm_*, xs_*, slv_*), so the top
// drops into an existing SoC between the IPs and the interconnect.
// rule_hit_o: per-rule activity of the bus-level rules; key_leak_o: the AES
// wrapper replaced a word in this cycle (meaningful while the AES R is valid).
// Timing: combinational in both directions, see the two submodules.
module dispel_top
  import dispel_pkg::*;
#(
  parameter int unsigned NM = 1,
  parameter int unsigned NS = NUM_SLAVES,
  parameter int unsigned NR = NUM_DEFAULT_RULES,
  parameter policy_rule_t [NR-1:0] RULES = DEFAULT_RULES,
  parameter int unsigned AES_PORT  = SLV_AES,
  parameter int unsigned KEY_WORDS = 6,
  parameter int unsigned MIN_HD    = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mode_i,
  input  axi_req_t mst_req_i [NM],
  output axi_rsp_t mst_rsp_o [NM],
  output axi_req_t xm_req_o  [NM],
  input  axi_rsp_t xm_rsp_i  [NM],
  input  axi_req_t xs_req_i  [NS],
  output axi_rsp_t xs_rsp_o  [NS],
  output axi_req_t slv_req_o [NS],
  input  axi_rsp_t slv_rsp_i [NS],
  input  logic [KEY_WORDS*DW-1:0] aes_key_i,
  output logic [NR-1:0] rule_hit_o,
  output logic          key_leak_o
);

  axi_rsp_t slv_rsp_w [NS];   // slave responses after the IP-level wrappers

  logic [DW-1:0] aes_rdata;

  ip_leak_guard #(.DW(DW), .KEY_WORDS(KEY_WORDS), .MIN_HD(MIN_HD)) u_aes_guard (
    .data_i (slv_rsp_i[AES_PORT].rdata),
    .key_i  (aes_key_i),
    .data_o (aes_rdata),
    .leak_o (key_leak_o)
  );

  always_comb begin
    for (int s = 0; s < NS; s++) slv_rsp_w[s] = slv_rsp_i[s];
    slv_rsp_w[AES_PORT].rdata = aes_rdata;
  end

  security_policy_module #(.NM(NM), .NS(NS), .NR(NR), .RULES(RULES)) u_spm (
    .clk        (clk),
    .rst_n      (rst_n),
    .mode_i     (mode_i),
    .mst_req_i  (mst_req_i),
    .mst_rsp_o  (mst_rsp_o),
    .xm_req_o   (xm_req_o),
    .xm_rsp_i   (xm_rsp_i),
    .xs_req_i   (xs_req_i),
    .xs_rsp_o   (xs_rsp_o),
    .slv_req_o  (slv_req_o),
    .slv_rsp_i  (slv_rsp_w),
    .rule_hit_o (rule_hit_o)
  );

endmodule
