// master_policy_port -- master-side slice of the centralized security policy
// module, placed between one master IP (m_*) and its port on the bus
// interconnect (x_*).
//
// What it enforces: every RK_WRITE_MASK rule whose port set names this master.
// A write whose address falls in the rule's range, in the mode the rule names,
// reaches the interconnect with w_data = 0 and w_valid = 0, as in the worked
// example and Policy #1. All other signals pass through unchanged and in the
// same cycle (purely combinational paths), so an allowed transaction sees no
// added latency.
//
// How: the address of a write is only guaranteed on AW, while the data comes on
// W, possibly later. The port therefore evaluates the rules on m.awaddr while
// AW is valid and latches the verdict at the AW handshake; the W beat uses the
// live verdict if AW is still being presented, the latched one otherwise. A W
// beat that arrives with no address known is held (w_ready low) until its AW
// shows up, so no data can slip past before the check. One write is tracked at
// a time: a new AW is held while the previous write's W is still open.
//
// Keeping the bus live (this design's choice; the policy only says what the
// master's beat becomes): the blocked beat is accepted from the master
// (m.wready = 1) and, since the slave has already seen the AW, the port then
// presents the slave one null beat (w_data = 0, w_strb = 0, w_valid = 1) which
// writes no byte and lets the slave return its B response normally.
//
// Mode: one input, mode_i (0 = user mode), sampled with the AW address.
// rule_hit_o pulses for one cycle per blocked write beat, one bit per rule.
module master_policy_port
  import dispel_pkg::*;
#(
  parameter int unsigned    MASTER_ID = 0,
  parameter int unsigned    NR        = NUM_DEFAULT_RULES,
  parameter policy_rule_t [NR-1:0] RULES = DEFAULT_RULES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mode_i,
  input  axi_req_t m_req_i,   // from the master IP
  output axi_rsp_t m_rsp_o,   // to the master IP
  output axi_req_t x_req_o,   // to the interconnect
  input  axi_rsp_t x_rsp_i,   // from the interconnect
  output logic [NR-1:0] rule_hit_o
);

  logic          aw_pend_q;  // AW handed over, its W beat not yet finished
  logic          w_pend_q;   // W beat finished before its AW was handed over
  logic          blk_q;      // latched verdict of the pending AW
  logic [NR-1:0] hit_vec_q;  // latched per-rule verdict of the pending AW
  logic          flush_q;    // null beat owed to the slave

  logic [NR-1:0] hit_now;    // per-rule verdict on the AW being presented
  logic          blk_now;
  logic          addr_known, cur_blk;
  logic [NR-1:0] cur_hits;
  logic          aw_hs, w_pass_hs, w_absorb, w_fin;

  always_comb begin
    for (int r = 0; r < NR; r++) begin
      hit_now[r] = (RULES[r].kind == RK_WRITE_MASK) && RULES[r].ports[MASTER_ID]
                   && rule_addr_mode_match(RULES[r], m_req_i.awaddr, mode_i);
    end
    blk_now = |hit_now;
  end

  assign addr_known = (aw_pend_q || m_req_i.awvalid) && !w_pend_q;
  assign cur_blk    = aw_pend_q ? blk_q : blk_now;
  assign cur_hits   = aw_pend_q ? hit_vec_q : hit_now;

  always_comb begin
    x_req_o = m_req_i;
    m_rsp_o = x_rsp_i;

    // AW: one write in flight at a time.
    x_req_o.awvalid = m_req_i.awvalid && !aw_pend_q;
    m_rsp_o.awready = x_rsp_i.awready && !aw_pend_q;

    // W: pass, hold, block or flush.
    if (flush_q) begin
      x_req_o.wvalid = 1'b1;
      x_req_o.wdata  = '0;
      x_req_o.wstrb  = '0;
      m_rsp_o.wready = 1'b0;
    end else if (!addr_known) begin
      x_req_o.wvalid = 1'b0;
      m_rsp_o.wready = 1'b0;
    end else if (cur_blk) begin
      x_req_o.wvalid = 1'b0;       // action: w_valid = 0
      x_req_o.wdata  = '0;         // action: w_data  = 0
      m_rsp_o.wready = 1'b1;       // the master's beat is consumed here
    end
  end

  assign aw_hs     = x_req_o.awvalid && x_rsp_i.awready;
  assign w_pass_hs = !flush_q && addr_known && !cur_blk && m_req_i.wvalid && x_rsp_i.wready;
  assign w_absorb  = !flush_q && addr_known && cur_blk && m_req_i.wvalid;
  assign w_fin     = w_pass_hs || (flush_q && x_rsp_i.wready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_pend_q <= 1'b0;
      w_pend_q  <= 1'b0;
      blk_q     <= 1'b0;
      hit_vec_q <= '0;
      flush_q   <= 1'b0;
    end else begin
      if (aw_hs) begin
        blk_q     <= blk_now;
        hit_vec_q <= hit_now;
      end
      // A write is closed once both its AW and its W have gone to the bus.
      if (aw_hs && !(w_fin || w_pend_q)) aw_pend_q <= 1'b1;
      else if (w_fin)                    aw_pend_q <= 1'b0;
      if (w_fin && !aw_pend_q && !aw_hs) w_pend_q <= 1'b1;
      else if (aw_hs)                    w_pend_q <= 1'b0;
      if (w_absorb)                      flush_q  <= 1'b1;
      else if (x_rsp_i.wready)           flush_q  <= 1'b0;
    end
  end

  assign rule_hit_o = w_absorb ? cur_hits : '0;

  // The port never lets a master's data through for a blocked write.
  a_no_leak: assert property (@(posedge clk) disable iff (!rst_n)
    (addr_known && cur_blk && !flush_q) |-> (!x_req_o.wvalid && x_req_o.wdata == '0));

endmodule
