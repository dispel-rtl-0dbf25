// tb_security_policy_module -- checks that the centralized module routes each
// rule to the ports its predicate names, with a small test table on 2 masters
// and 3 slaves:
//   r0 write mask, master 1 only, 0x100..0x1ff, any mode
//   r1 read mask, slave 2 only, 0x000..0x0ff, mode 1 only
//   r2 write-data hide, slave 0 trusted, 0x200..0x2ff, any mode
//   r3 cycle limit 5, slave 1 only, any mode
// Each master port leads straight to a private slave memory and each slave
// port is driven by its own behavioural master, so every path is seen alone.
// A directed sequence is followed by 400 random accesses on all five ports,
// compared with a reference of the test table.
module tb_security_policy_module;
  import dispel_pkg::*;
  localparam int NR = 4;
  typedef policy_rule_t [NR-1:0] rules_t;
  function automatic rules_t test_rules();
    rules_t r;
    r[0] = '{kind: RK_WRITE_MASK,  ports: 16'h2, lo: 32'h100, hi: 32'h1ff, mode_any: 1, mode_val: 0, limit: 0};
    r[1] = '{kind: RK_READ_MASK,   ports: 16'h4, lo: 32'h000, hi: 32'h0ff, mode_any: 0, mode_val: 1, limit: 0};
    r[2] = '{kind: RK_WDATA_HIDE,  ports: 16'h1, lo: 32'h200, hi: 32'h2ff, mode_any: 1, mode_val: 0, limit: 0};
    r[3] = '{kind: RK_CYCLE_LIMIT, ports: 16'h2, lo: 32'h0,   hi: 32'hffff_ffff, mode_any: 1, mode_val: 0, limit: 5};
    return r;
  endfunction

  logic clk = 0, rst_n = 0, mode;
  axi_req_t mreq [2], xmreq [2], xsreq [3], sreq [3];
  axi_rsp_t mrsp [2], xmrsp [2], xsrsp [3], srsp [3];
  logic [NR-1:0] hit;
  int unsigned lat [3];
  int unsigned mb [2], sb [3];
  logic [31:0] mlw [2], slw [3];
  logic [3:0]  mls [2], sls [3];
  int checks = 0, failures = 0;
  int hit_cnt [NR];

  always #5 clk = ~clk;

  security_policy_module #(.NM(2), .NS(3), .NR(NR), .RULES(test_rules())) dut (
    .clk, .rst_n, .mode_i(mode),
    .mst_req_i(mreq), .mst_rsp_o(mrsp), .xm_req_o(xmreq), .xm_rsp_i(xmrsp),
    .xs_req_i(xsreq), .xs_rsp_o(xsrsp), .slv_req_o(sreq), .slv_rsp_i(srsp), .rule_hit_o(hit));

  for (genvar m = 0; m < 2; m++) begin : g_m
    axi_master_bfm  bfm (.clk, .req(mreq[m]), .rsp(mrsp[m]));
    axi_slave_model mem (.clk, .rst_n, .req(xmreq[m]), .rsp(xmrsp[m]), .rd_latency(2),
                         .w_beats(mb[m]), .last_wdata(mlw[m]), .last_wstrb(mls[m]));
  end
  for (genvar s = 0; s < 3; s++) begin : g_s
    axi_master_bfm  bfm (.clk, .req(xsreq[s]), .rsp(xsrsp[s]));
    axi_slave_model ip  (.clk, .rst_n, .req(sreq[s]), .rsp(srsp[s]), .rd_latency(lat[s]),
                         .w_beats(sb[s]), .last_wdata(slw[s]), .last_wstrb(sls[s]));
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) for (int r = 0; r < NR; r++) hit_cnt[r] += int'(hit[r]);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [1:0] br; int cyc; logic [31:0] d;
    mode = 0; lat = '{2, 2, 2};
    foreach (hit_cnt[r]) hit_cnt[r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // r0: master 0 writes 0x180 freely, master 1 does not.
    g_m[0].bfm.write(32'h180, 32'haaaa_0000, 0, 0, br, cyc);
    g_m[1].bfm.write(32'h180, 32'hbbbb_0000, 0, 0, br, cyc);
    g_m[1].bfm.write(32'h080, 32'hcccc_0000, 0, 0, br, cyc);
    chk(g_m[0].mem.peek(32'h180) == 32'haaaa_0000, "master 0 write blocked by master-1 rule");
    chk(g_m[1].mem.peek(32'h180) == 32'h0,         "master 1 protected write went through");
    chk(g_m[1].mem.peek(32'h080) == 32'hcccc_0000, "master 1 ordinary write lost");
    // r1: slave 2 masks reads of 0x40 in mode 1 only; slaves 0 and 1 never.
    for (int s = 0; s < 3; s++) case (s)
      0: g_s[0].ip.poke(32'h40, 32'h5000_0040);
      1: g_s[1].ip.poke(32'h40, 32'h5100_0040);
      default: g_s[2].ip.poke(32'h40, 32'h5200_0040);
    endcase
    mode = 1;
    g_s[0].bfm.read(32'h40, d, cyc); chk(d == 32'h5000_0040, "slave 0 read masked");
    g_s[1].bfm.read(32'h40, d, cyc); chk(d == 32'h5100_0040, "slave 1 read masked");
    g_s[2].bfm.read(32'h40, d, cyc); chk(d == 32'h0,         "slave 2 read not masked in mode 1");
    mode = 0;
    g_s[2].bfm.read(32'h40, d, cyc); chk(d == 32'h5200_0040, "slave 2 read masked in mode 0");
    // r2: a write of 0x240 reaches trusted slave 0 with its data, the others with zero.
    g_s[0].bfm.write(32'h240, 32'h1234_5678, 0, 0, br, cyc);
    g_s[1].bfm.write(32'h240, 32'h1234_5678, 0, 0, br, cyc);
    g_s[2].bfm.write(32'h240, 32'h1234_5678, 0, 0, br, cyc);
    chk(g_s[0].ip.peek(32'h240) == 32'h1234_5678, "trusted slave lost data");
    chk(g_s[1].ip.peek(32'h240) == 32'h0,         "untrusted slave 1 got data");
    chk(g_s[2].ip.peek(32'h240) == 32'h0,         "untrusted slave 2 got data");
    // r3: slave 1 results later than 5 cycles are discarded, slave 0's are not.
    lat = '{9, 9, 2};
    g_s[0].bfm.read(32'h40, d, cyc); chk(d == 32'h5000_0040, "slave 0 late read discarded");
    g_s[1].bfm.read(32'h40, d, cyc); chk(d == 32'h0,         "slave 1 late read kept");
    lat = '{2, 5, 2};
    g_s[1].bfm.read(32'h40, d, cyc); chk(d == 32'h5100_0040, "slave 1 read at the limit discarded");
    repeat (3) @(negedge clk);
    chk(hit_cnt[0] == 1, "r0 hit count");
    chk(hit_cnt[1] == 1, "r1 hit count");
    chk(hit_cnt[2] > 0,  "r2 never hit");
    chk(hit_cnt[3] == 1, "r3 hit count");

    // Random accesses on every port against a reference of the test table:
    // port 0..1 = master m writes and reads its memory; port 2..4 = an access
    // to slave port s = port-2, with slave 1's latency drawn from 1..8.
    for (int n = 0; n < 400; n++) begin
      int port, s, m;
      bit wr_op;
      logic [31:0] a, v, old, exp;
      port  = $urandom_range(4);
      wr_op = 1'($urandom_range(1));
      mode  = 1'($urandom_range(1));
      a     = 32'($urandom_range(32'h3ff)) & ~32'h3;
      v     = $urandom;
      if (port < 2) begin
        m   = port;
        old = (m == 0) ? g_m[0].mem.peek(a) : g_m[1].mem.peek(a);
        if (wr_op) begin
          if (m == 0) g_m[0].bfm.write(a, v, 0, 0, br, cyc);
          else        g_m[1].bfm.write(a, v, 0, 0, br, cyc);
          exp = (m == 1 && a >= 32'h100 && a <= 32'h1ff) ? old : v;
          chk(((m == 0) ? g_m[0].mem.peek(a) : g_m[1].mem.peek(a)) == exp, "random master write");
        end else begin
          if (m == 0) g_m[0].bfm.read(a, d, cyc);
          else        g_m[1].bfm.read(a, d, cyc);
          chk(d == old, "random master read");
        end
      end else begin
        s = port - 2;
        lat = '{2, $urandom_range(1, 8), 2};
        case (s)
          0: old = g_s[0].ip.peek(a);
          1: old = g_s[1].ip.peek(a);
          default: old = g_s[2].ip.peek(a);
        endcase
        if (wr_op) begin
          case (s)
            0: g_s[0].bfm.write(a, v, 0, 0, br, cyc);
            1: g_s[1].bfm.write(a, v, 0, 0, br, cyc);
            default: g_s[2].bfm.write(a, v, 0, 0, br, cyc);
          endcase
          exp = (s != 0 && a >= 32'h200 && a <= 32'h2ff) ? 32'h0 : v;
          case (s)
            0: chk(g_s[0].ip.peek(a) == exp, "random slave 0 write");
            1: chk(g_s[1].ip.peek(a) == exp, "random slave 1 write");
            default: chk(g_s[2].ip.peek(a) == exp, "random slave 2 write");
          endcase
        end else begin
          case (s)
            0: g_s[0].bfm.read(a, d, cyc);
            1: g_s[1].bfm.read(a, d, cyc);
            default: g_s[2].bfm.read(a, d, cyc);
          endcase
          exp = ((s == 2 && mode && a <= 32'hff) || (s == 1 && lat[1] > 5)) ? 32'h0 : old;
          chk(d == exp, $sformatf("random slave %0d read %h mode %0d lat %0d", s, a, mode, lat[s]));
        end
      end
    end
    mode = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
