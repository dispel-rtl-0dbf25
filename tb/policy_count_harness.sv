// policy_count_harness -- the reference SoC (1 master, 12 slaves, AES key
// guard) built with a generated table of NR policies, and a sequence that
// checks every one of them.
//
// The table cycles through the four rule kinds the policy module supports.
// Rule i, in group g = i/4, is:
//   i%4 = 0  write mask, master 0, main memory 0x00020000 + 0x100*i .. +0xf
//   i%4 = 1  read mask, crypto slave 1 + g%5, offset 0x1000 + 0x10*i .. +0xf
//   i%4 = 2  write-data hide, trusted crypto slave 1 + g%5,
//            offset 0x2000 + 0x10*i .. +0xf
//   i%4 = 3  cycle limit 20 + 10*g on slave 6 + g%6 (DSP, JTAG, UART)
// All rules apply in user mode (mode 0) only. The ranges do not overlap, so
// each rule can be seen on its own. For each rule the sequence makes the
// rule act in user mode, shows an access just outside it (or, for a limit,
// at the slave's smallest limit) pass, and shows the same access pass in the
// other mode. A monitor checks on every cycle that no untrusted slave sees
// the data of a write into a hide range. At the end every rule must have
// reported activity on rule_hit_o.
// Interface: clk/rst_n in; checks, failures and done out.
module policy_count_harness
  import dispel_pkg::*;
#(
  parameter int unsigned NR = 30
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int NS = NUM_SLAVES;
  localparam logic [7:0] BASE [12] = '{8'h00, 8'h93, 8'h97, 8'h96, 8'h94, 8'h95,
                                       8'h98, 8'h99, 8'h9a, 8'h9b, 8'h9c, 8'h9d};
  typedef policy_rule_t [NR-1:0] rules_t;

  function automatic rules_t gen_rules();
    rules_t r;
    for (int i = 0; i < int'(NR); i++) begin
      int g, s;
      g = i / 4;
      r[i] = '{kind: RK_WRITE_MASK, ports: 16'h0, lo: 32'h0, hi: 32'h0,
               mode_any: 1'b0, mode_val: 1'b0, limit: 32'h0};
      case (i % 4)
        0: begin
          r[i].ports = 16'h1;
          r[i].lo    = 32'h0002_0000 + 32'h100 * i;
        end
        1: begin
          s = 1 + g % 5;
          r[i].kind  = RK_READ_MASK;
          r[i].ports = 16'(1 << s);
          r[i].lo    = {BASE[s], 24'h00_1000 + 24'h10 * 24'(i)};
        end
        2: begin
          s = 1 + g % 5;
          r[i].kind  = RK_WDATA_HIDE;
          r[i].ports = 16'(1 << s);
          r[i].lo    = {BASE[s], 24'h00_2000 + 24'h10 * 24'(i)};
        end
        default: begin
          s = 6 + g % 6;
          r[i].kind  = RK_CYCLE_LIMIT;
          r[i].ports = 16'(1 << s);
          r[i].hi    = 32'hffff_ffff;
          r[i].limit = 32'(20 + 10 * g);
        end
      endcase
      if (r[i].kind != RK_CYCLE_LIMIT) r[i].hi = r[i].lo + 32'hf;
    end
    return r;
  endfunction

  localparam rules_t RULES = gen_rules();

  logic mode;
  axi_req_t mst_req [1], xm_req [1], xs_req [NS], slv_req [NS];
  axi_rsp_t mst_rsp [1], xm_rsp [1], xs_rsp [NS], slv_rsp [NS];
  logic [6*32-1:0] key;
  logic [NR-1:0] hit;
  logic key_leak;
  int unsigned lat [NS];
  int unsigned beats [NS];
  logic [31:0] lw [NS];
  logic [3:0]  ls [NS];
  int hit_cnt [NR];

  axi_master_bfm cpu (.clk, .req(mst_req[0]), .rsp(mst_rsp[0]));

  dispel_top #(.NR(NR), .RULES(RULES)) dut (
    .clk, .rst_n, .mode_i(mode),
    .mst_req_i(mst_req), .mst_rsp_o(mst_rsp),
    .xm_req_o(xm_req),   .xm_rsp_i(xm_rsp),
    .xs_req_i(xs_req),   .xs_rsp_o(xs_rsp),
    .slv_req_o(slv_req), .slv_rsp_i(slv_rsp),
    .aes_key_i(key), .rule_hit_o(hit), .key_leak_o(key_leak));

  axi_xbar_model #(.NS(NS)) xbar (.clk, .rst_n, .m_req(xm_req[0]), .m_rsp(xm_rsp[0]),
                                  .s_req(xs_req), .s_rsp(xs_rsp));

  for (genvar s = 0; s < NS; s++) begin : g_ip
    axi_slave_model ip (.clk, .rst_n, .req(slv_req[s]), .rsp(slv_rsp[s]), .rd_latency(lat[s]),
                        .w_beats(beats[s]), .last_wdata(lw[s]), .last_wstrb(ls[s]));
  end

  // Per-rule activity and the per-cycle hiding check.
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < int'(NR); r++) begin
      hit_cnt[r] += int'(hit[r]);
      if (RULES[r].kind == RK_WDATA_HIDE && mode == 1'b0)
        for (int t = 0; t < NS; t++)
          if (!RULES[r].ports[t] && xs_req[t].awaddr >= RULES[r].lo
              && xs_req[t].awaddr <= RULES[r].hi) begin
            checks++;
            if (slv_req[t].wdata !== 32'h0) begin
              failures++; $display("FAIL NR=%0d rule %0d: slave %0d sees %h", NR, r, t, slv_req[t].wdata);
            end
          end
    end
  end

  function automatic logic [31:0] peek(input int s, input logic [31:0] a);
    case (s)
      0: return g_ip[0].ip.peek(a);   1: return g_ip[1].ip.peek(a);
      2: return g_ip[2].ip.peek(a);   3: return g_ip[3].ip.peek(a);
      4: return g_ip[4].ip.peek(a);   5: return g_ip[5].ip.peek(a);
      6: return g_ip[6].ip.peek(a);   7: return g_ip[7].ip.peek(a);
      8: return g_ip[8].ip.peek(a);   9: return g_ip[9].ip.peek(a);
      10: return g_ip[10].ip.peek(a); default: return g_ip[11].ip.peek(a);
    endcase
  endfunction

  task automatic poke(input int s, input logic [31:0] a, input logic [31:0] d);
    case (s)
      0: g_ip[0].ip.poke(a, d);   1: g_ip[1].ip.poke(a, d);
      2: g_ip[2].ip.poke(a, d);   3: g_ip[3].ip.poke(a, d);
      4: g_ip[4].ip.poke(a, d);   5: g_ip[5].ip.poke(a, d);
      6: g_ip[6].ip.poke(a, d);   7: g_ip[7].ip.poke(a, d);
      8: g_ip[8].ip.poke(a, d);   9: g_ip[9].ip.poke(a, d);
      10: g_ip[10].ip.poke(a, d); default: g_ip[11].ip.poke(a, d);
    endcase
  endtask

  task automatic check(input logic ok, input string what, input int r);
    checks++;
    if (!ok) begin failures++; $display("FAIL NR=%0d rule %0d: %s", NR, r, what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [1:0] br; int cyc;
    cpu.write(a, d, 0, 0, br, cyc);
    check(br === RESP_OKAY && cyc < 50, "write completes", -1);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    int cyc;
    cpu.read(a, d, cyc);
  endtask

  function automatic int slave_of(input int r);
    for (int s = 0; s < NS; s++) if (RULES[r].ports[s]) return s;
    return 0;
  endfunction

  // Smallest limit any rule puts on slave s.
  function automatic int min_limit(input int s);
    int m = 32'h7fff_ffff;
    for (int r = 0; r < int'(NR); r++)
      if (RULES[r].kind == RK_CYCLE_LIMIT && RULES[r].ports[s] && int'(RULES[r].limit) < m)
        m = int'(RULES[r].limit);
    return m;
  endfunction

  initial begin
    checks = 0; failures = 0; done = 0; mode = 0;
    foreach (hit_cnt[r]) hit_cnt[r] = 0;
    foreach (lat[s]) lat[s] = 2;
    for (int k = 0; k < 6; k++) key[k*32 +: 32] = 32'h0f0f_0f0f ^ (32'h0101_0000 << k);
    @(posedge rst_n);
    repeat (2) @(negedge clk);

    for (int r = 0; r < int'(NR); r++) begin
      int s;
      logic [31:0] lo, d, v;
      s  = slave_of(r);
      lo = RULES[r].lo;
      v  = 32'h5a5a_0000 | 32'(r);
      case (RULES[r].kind)
        RK_WRITE_MASK: begin
          poke(0, lo + 4, 32'h1111_1111);
          mode = 0; wr(lo + 4, v);
          check(peek(0, lo + 4) === 32'h1111_1111, "masked write left memory alone", r);
          wr(RULES[r].hi + 1, v);
          check(peek(0, RULES[r].hi + 1) === v, "write outside the range", r);
          mode = 1; wr(lo + 4, v);
          check(peek(0, lo + 4) === v, "write in the other mode", r);
        end
        RK_READ_MASK: begin
          poke(s, lo, v); poke(s, RULES[r].hi + 1, v);
          mode = 0; rd(lo, d);
          check(d === 32'h0, "masked read returns zero", r);
          rd(RULES[r].hi + 1, d);
          check(d === v, "read outside the range", r);
          mode = 1; rd(lo, d);
          check(d === v, "read in the other mode", r);
        end
        RK_WDATA_HIDE: begin
          mode = 0; wr(lo + 8, v);
          check(peek(s, lo + 8) === v, "trusted slave gets the data", r);
          mode = 1; wr(lo + 12, v);
          check(peek(s, lo + 12) === v, "write in the other mode", r);
        end
        default: begin
          lo = {BASE[s], 24'h00_0100};
          poke(s, lo, v);
          mode = 0;
          lat[s] = RULES[r].limit + 1; rd(lo, d);
          check(d === 32'h0, "late result discarded", r);
          lat[s] = min_limit(s); rd(lo, d);
          check(d === v, "result within the limit", r);
          mode = 1;
          lat[s] = RULES[r].limit + 1; rd(lo, d);
          check(d === v, "late result in the other mode", r);
          lat[s] = 2;
        end
      endcase
      mode = 0;
    end

    repeat (3) @(negedge clk);
    for (int r = 0; r < int'(NR); r++) check(hit_cnt[r] > 0, "rule acted", r);
    $display("policies %0d: checks %0d failures %0d", NR, checks, failures);
    done = 1;
  end
endmodule
