// tb_slave_policy_port -- checks the slave-side rules on three ports of the
// reference numbering:
//  * slave 1 (AES): Policy #2, reads of 0x93000004..0x93000008 in user mode
//    return zero, other reads and all writes pass;
//  * slave 2 (DES3): Policy #4 with the limit cut to 20 cycles, reads whose
//    response comes d cycles after the request return zero when d > 20;
//  * slave 11 (UART, untrusted): Policy #3, while the bus shows a write address
//    in 0x93000014..0x93000028 the slave sees w_data = 0;
//  * slave 1 again, driven directly: two reads offered back to back, the
//    second held until the first is answered, each with its own verdict.
// Expected values come from the address/mode/latency of each access.
module tb_slave_policy_port;
  import dispel_pkg::*;
  localparam int LIM = 20;

  function automatic default_rules_t short_rules();
    default_rules_t r = DEFAULT_RULES;
    r[4].limit = LIM;
    return r;
  endfunction
  localparam default_rules_t RULES = short_rules();

  logic clk = 0, rst_n = 0, mode;
  axi_req_t a_xreq, a_sreq, d_xreq, d_sreq, u_xreq, u_sreq;
  axi_rsp_t a_xrsp, a_srsp, d_xrsp, d_srsp, u_xrsp, u_srsp;
  logic [NUM_DEFAULT_RULES-1:0] a_hit, d_hit, u_hit;
  int unsigned a_beats, d_beats, d_lat;
  logic [31:0] a_lw, d_lw;
  logic [3:0]  a_ls, d_ls;
  int checks = 0, failures = 0;
  int hit_cnt [NUM_DEFAULT_RULES];
  int exp_hit [NUM_DEFAULT_RULES];

  always #5 clk = ~clk;

  // slave 1: AES
  axi_master_bfm a_bfm (.clk, .req(a_xreq), .rsp(a_xrsp));
  slave_policy_port #(.SLAVE_ID(SLV_AES), .RULES(RULES)) dut_a (.clk, .rst_n, .mode_i(mode),
    .x_req_i(a_xreq), .x_rsp_o(a_xrsp), .s_req_o(a_sreq), .s_rsp_i(a_srsp), .rule_hit_o(a_hit));
  axi_slave_model a_slv (.clk, .rst_n, .req(a_sreq), .rsp(a_srsp), .rd_latency(1),
    .w_beats(a_beats), .last_wdata(a_lw), .last_wstrb(a_ls));
  // slave 2: DES3
  axi_master_bfm d_bfm (.clk, .req(d_xreq), .rsp(d_xrsp));
  slave_policy_port #(.SLAVE_ID(SLV_DES3), .RULES(RULES)) dut_d (.clk, .rst_n, .mode_i(mode),
    .x_req_i(d_xreq), .x_rsp_o(d_xrsp), .s_req_o(d_sreq), .s_rsp_i(d_srsp), .rule_hit_o(d_hit));
  axi_slave_model d_slv (.clk, .rst_n, .req(d_sreq), .rsp(d_srsp), .rd_latency(d_lat),
    .w_beats(d_beats), .last_wdata(d_lw), .last_wstrb(d_ls));
  // slave 11: UART, driven directly as a shared bus would
  slave_policy_port #(.SLAVE_ID(SLV_UART), .RULES(RULES)) dut_u (.clk, .rst_n, .mode_i(mode),
    .x_req_i(u_xreq), .x_rsp_o(u_xrsp), .s_req_o(u_sreq), .s_rsp_i(u_srsp), .rule_hit_o(u_hit));
  assign u_srsp = '0;
  // slave 1 again, driven directly, for back-to-back reads
  axi_req_t b_xreq, b_sreq;
  axi_rsp_t b_xrsp, b_srsp;
  logic [NUM_DEFAULT_RULES-1:0] b_hit;
  int unsigned b_beats;
  logic [31:0] b_lw;
  logic [3:0]  b_ls;
  slave_policy_port #(.SLAVE_ID(SLV_AES), .RULES(RULES)) dut_b (.clk, .rst_n, .mode_i(mode),
    .x_req_i(b_xreq), .x_rsp_o(b_xrsp), .s_req_o(b_sreq), .s_rsp_i(b_srsp), .rule_hit_o(b_hit));
  axi_slave_model b_slv (.clk, .rst_n, .req(b_sreq), .rsp(b_srsp), .rd_latency(3),
    .w_beats(b_beats), .last_wdata(b_lw), .last_wstrb(b_ls));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int r = 0; r < NUM_DEFAULT_RULES; r++) hit_cnt[r] += int'(a_hit[r]) + int'(d_hit[r]) + int'(u_hit[r]) + int'(b_hit[r]);

  initial begin
    logic [31:0] rd, a, w;
    logic [1:0]  br;
    int cyc;
    bit exp_mask;
    mode = 0; d_lat = 1; u_xreq = '0; b_xreq = '0;
    foreach (hit_cnt[r]) begin hit_cnt[r] = 0; exp_hit[r] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      a_slv.poke(32'h9300_0000 + 4*i, 32'hae50_0000 + i);
      d_slv.poke(32'h9700_0000 + 4*i, 32'hde50_0000 + i);
    end

    // Policy #2 on the AES port.
    for (int m = 0; m < 2; m++) begin
      mode = 1'(m);
      for (int i = 0; i < 16; i++) begin
        a = 32'h9300_0000 + 4*i;
        a_bfm.read(a, rd, cyc);
        exp_mask = (m == 0) && (a >= 32'h9300_0004) && (a <= 32'h9300_0008);
        if (exp_mask) exp_hit[2]++;
        checks++;
        if (rd !== (exp_mask ? 32'h0 : 32'hae50_0000 + i) || cyc > 10) begin
          failures++; $display("FAIL AES read %h mode %0d got %h", a, m, rd);
        end
      end
    end
    // Key write reaches the trusted AES unchanged.
    mode = 0;
    a_bfm.write(32'h9300_0014, 32'hfeed_beef, 0, 0, br, cyc);
    checks++;
    if (a_slv.peek(32'h9300_0014) !== 32'hfeed_beef) begin failures++; $display("FAIL key write to AES lost"); end

    // Back-to-back reads on slave 1: a masked read of 0x93000004 and an
    // ordinary one of 0x93000000 offered at once. The second AR must wait for
    // the first R, and each R must carry its own verdict.
    begin
      logic [31:0] got [2];
      int nr, t_second;
      b_slv.poke(32'h9300_0000, 32'h0bad_0000);
      b_slv.poke(32'h9300_0004, 32'h0bad_0004);
      nr = 0; t_second = 0;
      @(negedge clk);
      b_xreq.araddr = 32'h9300_0004; b_xreq.arvalid = 1; b_xreq.rready = 1;
      for (int t = 0; t < 40 && nr < 2; t++) begin
        @(posedge clk);
        if (b_xrsp.rvalid && b_xreq.rready) begin got[nr] = b_xrsp.rdata; nr++; end
        if (b_xreq.arvalid && b_xrsp.arready) begin
          if (b_xreq.araddr == 32'h9300_0000) t_second = nr;
          @(negedge clk);
          if (b_xreq.araddr == 32'h9300_0004) b_xreq.araddr = 32'h9300_0000;
          else b_xreq.arvalid = 0;
        end else @(negedge clk);
      end
      b_xreq = '0;
      exp_hit[2]++;
      checks++;
      if (nr != 2 || got[0] !== 32'h0 || got[1] !== 32'h0bad_0000) begin
        failures++; $display("FAIL back-to-back reads: %0d beats, %h %h", nr, got[0], got[1]);
      end
      checks++;
      if (t_second != 1) begin failures++; $display("FAIL second AR accepted before the first R"); end
    end

    // Policy #4 on the DES3 port.
    for (int m = 0; m < 2; m++) begin
      static int lats [8] = '{1, 2, 5, LIM - 1, LIM, LIM + 1, LIM + 2, 3 * LIM};
      mode = 1'(m);
      foreach (lats[k]) begin
        d_lat = lats[k];
        d_bfm.read(32'h9700_0000 + 4*k, rd, cyc);
        exp_mask = (m == 0) && (lats[k] > LIM);
        if (exp_mask) exp_hit[4]++;
        checks++;
        if (rd !== (exp_mask ? 32'h0 : 32'hde50_0000 + k)) begin
          failures++; $display("FAIL DES3 latency %0d mode %0d got %h", lats[k], m, rd);
        end
        checks++;   // request accepted at once, response after d_lat cycles
        if (cyc != lats[k] + 1) begin failures++; $display("FAIL DES3 read took %0d cycles", cyc); end
      end
    end

    // Policy #3 on the UART port: address and data on the wires, valid elsewhere.
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      mode = 1'($urandom % 4 == 0);
      a = (i < 20) ? 32'h9300_0010 + 4 * (i % 8) : 32'h9300_0000 + ($urandom % 16) * 4;
      w = $urandom | 32'h1;
      u_xreq.awaddr = a; u_xreq.wdata = w; u_xreq.wstrb = 4'hf;
      #1;
      exp_mask = (mode == 0) && (a >= 32'h9300_0014) && (a <= 32'h9300_0028);
      if (exp_mask) exp_hit[3]++;
      checks++;
      if (u_sreq.wdata !== (exp_mask ? 32'h0 : w) || u_sreq.awaddr !== a || u_sreq.wstrb !== 4'hf) begin
        failures++; $display("FAIL UART sees %h for address %h", u_sreq.wdata, a);
      end
    end
    @(negedge clk);
    u_xreq = '0;
    repeat (3) @(negedge clk);

    for (int r = 0; r < NUM_DEFAULT_RULES; r++) begin
      checks++;
      if (hit_cnt[r] != exp_hit[r]) begin
        failures++; $display("FAIL rule %0d hits %0d expected %0d", r, hit_cnt[r], exp_hit[r]);
      end
    end
    $display("masked reads=%0d  timeouts=%0d  hidden key words=%0d", exp_hit[2], exp_hit[4], exp_hit[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
