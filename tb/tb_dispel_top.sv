// tb_dispel_top -- end-to-end run of the policy enforcement in the reference
// SoC at the default parameters (1 master, 12 slaves, the default policy table,
// cycle limit 1000, 192-bit AES key). A behavioural processor drives the
// master side, a behavioural shared-bus interconnect sits between the two
// faces of the top, and twelve behavioural slave memories stand for the IPs.
// The sequence replays each enforcement scenario of the paper: the protected
// memory write, Policies #1..#4, the AES key-leak guard, the same accesses
// in the other mode, and a write whose data comes before its address.
// Expected values are what the slaves hold and what the
// master should read back; every mechanism is counted and must occur.
module tb_dispel_top;
  import dispel_pkg::*;
  localparam int NS = NUM_SLAVES;

  logic clk = 0, rst_n = 0, mode;
  axi_req_t mst_req [1], xm_req [1], xs_req [NS], slv_req [NS];
  axi_rsp_t mst_rsp [1], xm_rsp [1], xs_rsp [NS], slv_rsp [NS];
  logic [6*32-1:0] key;
  logic [NUM_DEFAULT_RULES-1:0] hit;
  logic key_leak;
  int unsigned lat [NS];
  int unsigned beats [NS];
  logic [31:0] lw [NS];
  logic [3:0]  ls [NS];
  int checks = 0, failures = 0;
  int n_wblock, n_rmask, n_hide, n_tmo, n_leak, n_user_pass, n_null_beat, n_whold;

  always #5 clk = ~clk;

  axi_master_bfm cpu (.clk, .req(mst_req[0]), .rsp(mst_rsp[0]));

  dispel_top dut (
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

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters and the per-cycle key-hiding check (Policy #3).
  always @(posedge clk) if (rst_n) begin
    n_wblock += int'(hit[0]) + int'(hit[1]);
    n_rmask  += int'(hit[2]);
    n_hide   += int'(hit[3]);
    n_tmo    += int'(hit[4]);
    if (key_leak && slv_rsp[SLV_AES].rvalid && mst_rsp[0].rvalid) n_leak++;
    if (mst_req[0].wvalid && !mst_req[0].awvalid && !mst_rsp[0].wready && !xm_req[0].wvalid) n_whold++;
    if (slv_req[SLV_MEM].wvalid && slv_rsp[SLV_MEM].wready && slv_req[SLV_MEM].wstrb == 4'h0) n_null_beat++;
    if (mode == 1'b0 && xs_req[SLV_UART].awaddr >= 32'h9300_0014 && xs_req[SLV_UART].awaddr <= 32'h9300_0028) begin
      checks++;
      if (slv_req[SLV_UART].wdata !== 32'h0 || slv_req[SLV_JTAG].wdata !== 32'h0) begin
        failures++; $display("FAIL untrusted slave sees key data %h", slv_req[SLV_UART].wdata);
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

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [1:0] br; int cyc;
    cpu.write(a, d, 0, 0, br, cyc);
    checks++;
    if (br !== RESP_OKAY || cyc > 50) begin failures++; $display("FAIL write %h hung", a); end
  endtask

  task automatic rd_check(input logic [31:0] a, input logic [31:0] exp, input string what);
    logic [31:0] d; int cyc;
    cpu.read(a, d, cyc);
    checks++;
    if (d !== exp) begin failures++; $display("FAIL %s: read %h got %h expected %h", what, a, d, exp); end
  endtask

  task automatic expect_mem(input int s, input logic [31:0] a, input logic [31:0] exp, input string what);
    checks++;
    if (peek(s, a) !== exp) begin failures++; $display("FAIL %s: slave %0d %h holds %h", what, s, a, peek(s, a)); end
  endtask

  localparam logic [7:0] BASE [12] = '{8'h00, 8'h93, 8'h97, 8'h96, 8'h94, 8'h95,
                                       8'h98, 8'h99, 8'h9a, 8'h9b, 8'h9c, 8'h9d};

  initial begin
    n_whold = 0; n_wblock = 0; n_rmask = 0; n_hide = 0; n_tmo = 0; n_leak = 0; n_user_pass = 0; n_null_beat = 0;
    mode = 0;
    foreach (lat[s]) lat[s] = 2;
    for (int k = 0; k < 6; k++) key[k*32 +: 32] = 32'h0f1e_2d3c ^ (32'h1357_9bdf * (k + 1));
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Ordinary traffic to every slave, in user mode, away from all protected ranges.
    for (int s = 0; s < NS; s++) begin
      logic [31:0] a;
      a = {BASE[s], 24'h000100};
      wr(a, 32'hbeef_0000 + s);
      expect_mem(s, a, 32'hbeef_0000 + s, "plain write");
      rd_check(a, 32'hbeef_0000 + s, "plain read");
    end

    // Worked example: user-mode write of 0x5A2B3C4D to 0x0001dfa8 is rejected.
    wr(32'h0001_dfa8, 32'h5a2b_3c4d);
    expect_mem(SLV_MEM, 32'h0001_dfa8, 32'h0, "example write, user mode");
    // Mode switch: the same write in the other mode goes through.
    mode = 1;
    wr(32'h0001_dfa8, 32'h5a2b_3c4d);
    expect_mem(SLV_MEM, 32'h0001_dfa8, 32'h5a2b_3c4d, "example write, other mode");
    n_user_pass++;
    mode = 0;

    // Data offered before its address waits for it, then is checked as usual.
    begin
      logic [1:0] br; int cyc;
      cpu.write(32'h0001_e000, 32'h7777_7777, 0, 1, br, cyc);
      expect_mem(SLV_MEM, 32'h0001_e000, 32'h0, "W before AW, protected");
      cpu.write(32'h0000_3000, 32'h7777_7777, 0, 1, br, cyc);
      expect_mem(SLV_MEM, 32'h0000_3000, 32'h7777_7777, "W before AW, allowed");
    end

    // Policy #1: user-mode write of 0x1234ABCD to 0x9300000C is rejected.
    wr(32'h9300_000c, 32'h1234_abcd);
    expect_mem(SLV_AES, 32'h9300_000c, 32'h0, "policy 1");
    wr(32'h9300_0018, 32'h0000_0001);
    // Policy #3: key words 0x93000014..0x93000028 reach the AES only.
    for (int k = 0; k < 6; k++) begin
      wr(32'h9300_0014 + 4*k, key[k*32 +: 32]);
      expect_mem(SLV_AES, 32'h9300_0014 + 4*k, key[k*32 +: 32], "key write to AES");
    end

    // Policy #2: reads of 0x93000004..0x93000008 from the AES return zero.
    g_ip[1].ip.poke(32'h9300_0004, 32'h5ec0_0004);
    g_ip[1].ip.poke(32'h9300_0008, 32'h5ec0_0008);
    g_ip[1].ip.poke(32'h9300_0034, 32'h0000_0034);
    rd_check(32'h9300_0004, 32'h0, "policy 2");
    rd_check(32'h9300_0008, 32'h0, "policy 2");
    rd_check(32'h9300_0034, 32'h0000_0034, "outside policy 2");
    mode = 1;
    rd_check(32'h9300_0004, 32'h5ec0_0004, "policy 2, other mode");
    mode = 0;

    // AES key-leak guard: a result one bit away from a key word is withheld,
    // one far from every key word passes.
    g_ip[1].ip.poke(32'h9300_0040, key[2*32 +: 32] ^ 32'h0000_0081);
    g_ip[1].ip.poke(32'h9300_0044, key[2*32 +: 32] ^ 32'h00ff_ff00);
    rd_check(32'h9300_0040, 32'h0, "leak guard");
    rd_check(32'h9300_0044, key[2*32 +: 32] ^ 32'h00ff_ff00, "leak guard pass");

    // Policy #4: the DES3 (slave 2) answers a first read quickly and a second
    // one after 1500 cycles; the late result is discarded.
    g_ip[2].ip.poke(32'h9700_abcd & ~32'h3, 32'hda7a_0001);
    lat[SLV_DES3] = 3;
    rd_check(32'h9700_abcc, 32'hda7a_0001, "policy 4, fast");
    lat[SLV_DES3] = 1000;
    rd_check(32'h9700_abcc, 32'hda7a_0001, "policy 4, 1000 cycles");
    lat[SLV_DES3] = 1500;
    rd_check(32'h9700_abcc, 32'h0, "policy 4, 1500 cycles");
    lat[SLV_DES3] = 2;

    repeat (3) @(negedge clk);
    begin
      static string names [8] = '{"blocked writes", "null beats to the slave", "masked reads",
                           "hidden key data", "discarded late results", "key-leak withheld",
                           "other-mode pass", "W held for its address"};
      int cnt [8];
      cnt = '{n_wblock, n_null_beat, n_rmask, n_hide, n_tmo, n_leak, n_user_pass, n_whold};
      foreach (cnt[i]) begin
        $display("mechanism %-24s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[i]); end
      end
      checks++;
      if (n_wblock != 3 || n_rmask != 2 || n_tmo != 1 || n_leak != 1) begin
        failures++; $display("FAIL counts differ from the sequence");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
