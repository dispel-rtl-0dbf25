// tb_master_policy_port -- checks the master-side enforcement of the write
// policies (worked example: 0x0001dfa4..0x0001ffac, Policy #1:
// 0x9300000c..0x93000010, both in user mode only).
// A behavioural master drives the port, a behavioural slave memory sits
// behind it. A second master/slave pair with no port between them runs the
// same allowed writes at the same time to show the port adds no cycle.
// Checks: memory contents after each write, what the slave saw (beats,
// strobes), the rewritten w_data/w_valid in the very cycle of a blocked beat,
// the per-rule hit counts, and all three AW/W orderings.
module tb_master_policy_port;
  import dispel_pkg::*;
  logic clk = 0, rst_n = 0, mode;
  axi_req_t m_req, x_req, r_req;
  axi_rsp_t m_rsp, x_rsp, r_rsp;
  logic [NUM_DEFAULT_RULES-1:0] hit;
  int unsigned w_beats, r_beats;
  logic [31:0] last_wdata, r_last_wdata;
  logic [3:0]  last_wstrb, r_last_wstrb;
  int checks = 0, failures = 0;
  int hit_cnt [NUM_DEFAULT_RULES];
  int exp_hit [NUM_DEFAULT_RULES];
  bit expect_block;

  always #5 clk = ~clk;

  axi_master_bfm  bfm  (.clk, .req(m_req), .rsp(m_rsp));
  master_policy_port dut (.clk, .rst_n, .mode_i(mode), .m_req_i(m_req), .m_rsp_o(m_rsp),
                          .x_req_o(x_req), .x_rsp_i(x_rsp), .rule_hit_o(hit));
  axi_slave_model slv  (.clk, .rst_n, .req(x_req), .rsp(x_rsp), .rd_latency(2),
                        .w_beats(w_beats), .last_wdata(last_wdata), .last_wstrb(last_wstrb));
  // reference pair without the port
  axi_master_bfm  rbfm (.clk, .req(r_req), .rsp(r_rsp));
  axi_slave_model rslv (.clk, .rst_n, .req(r_req), .rsp(r_rsp), .rd_latency(2),
                        .w_beats(r_beats), .last_wdata(r_last_wdata), .last_wstrb(r_last_wstrb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Same-cycle rewrite of a blocked beat (the waveform of Policy #1).
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < NUM_DEFAULT_RULES; r++) hit_cnt[r] += int'(hit[r]);
    if (expect_block && x_req.wvalid && (x_req.wstrb != 4'h0 || x_req.wdata != 32'h0)) begin
      failures++; $display("FAIL blocked write data reached the bus: %h/%h", x_req.wdata, x_req.wstrb);
    end
    if (expect_block && m_req.wvalid && m_rsp.wready) begin
      checks++;
      if (x_req.wvalid !== 1'b0 || x_req.wdata !== 32'h0) begin
        failures++; $display("FAIL blocked beat not rewritten in its cycle");
      end
    end
  end

  function automatic int rule_of(input logic [31:0] a, input logic md);
    if (md != 1'b0) return -1;
    if (a >= 32'h0001_dfa4 && a <= 32'h0001_ffac) return 0;
    if (a >= 32'h9300_000c && a <= 32'h9300_0010) return 1;
    return -1;
  endfunction

  task automatic do_write(input logic [31:0] a, input logic [31:0] d, input logic md,
                          input int w_delay, input bit w_first, input bit compare_ref);
    logic [1:0] br, rbr;
    int cyc, rcyc, rl;
    logic [31:0] mem_old;
    int unsigned beats0;
    mem_old = slv.peek(a);
    beats0 = w_beats;
    rl = rule_of(a, md);
    mode = md;
    expect_block = (rl >= 0);
    if (compare_ref) begin
      fork
        bfm.write(a, d, w_delay, w_first, br, cyc);
        rbfm.write(a, d, w_delay, w_first, rbr, rcyc);
      join
      checks++;
      if (cyc != rcyc) begin failures++; $display("FAIL latency %0d vs direct %0d at %h", cyc, rcyc, a); end
    end else begin
      bfm.write(a, d, w_delay, w_first, br, cyc);
    end
    repeat (2) @(negedge clk);
    expect_block = 0;
    checks++;
    if (br !== RESP_OKAY || cyc > 100) begin failures++; $display("FAIL write %h did not complete", a); end
    checks++;
    if (rl >= 0) begin
      exp_hit[rl]++;
      if (slv.peek(a) !== mem_old || w_beats != beats0 + 1 || last_wstrb !== 4'h0 || last_wdata !== 32'h0) begin
        failures++; $display("FAIL blocked write %h changed memory (%h) or beat wrong", a, slv.peek(a));
      end
    end else begin
      if (slv.peek(a) !== d || w_beats != beats0 + 1 || last_wstrb !== 4'hf) begin
        failures++; $display("FAIL allowed write %h lost (%h)", a, slv.peek(a));
      end
    end
  endtask

  initial begin
    logic [31:0] rd;
    int cyc;
    static logic [31:0] addrs [12] = '{32'h0001_dfa0, 32'h0001_dfa4, 32'h0001_dfa8, 32'h0001_e000,
                                32'h0001_ffac, 32'h0001_ffb0, 32'h9300_0008, 32'h9300_000c,
                                32'h9300_0010, 32'h9300_0014, 32'h0000_1000, 32'h9700_0000};
    mode = 0; expect_block = 0;
    foreach (hit_cnt[r]) begin hit_cnt[r] = 0; exp_hit[r] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    slv.poke(32'h0001_dfa8, 32'h1111_1111);
    // The worked example: 0x5A2B3C4D to 0x0001dfa8 in user mode is rejected.
    do_write(32'h0001_dfa8, 32'h5a2b_3c4d, 1'b0, 0, 0, 0);
    // Same write in the other mode is allowed.
    do_write(32'h0001_dfa8, 32'h5a2b_3c4d, 1'b1, 0, 0, 1);
    // Policy #1 and the range edges, allowed ones against the direct path.
    foreach (addrs[i]) do_write(addrs[i], 32'hc0de_0000 + i, 1'b0, 0, 0, rule_of(addrs[i], 1'b0) < 0);
    // Other orderings.
    do_write(32'h9300_000c, 32'h1234_abcd, 1'b0, 3, 0, 0);
    do_write(32'h9300_000c, 32'h1234_abcd, 1'b0, 0, 1, 0);
    do_write(32'h0000_2000, 32'h1234_abcd, 1'b0, 3, 0, 1);
    do_write(32'h0000_2004, 32'h1234_abcd, 1'b0, 0, 1, 1);
    // Random mix.
    for (int i = 0; i < 300; i++) begin
      do_write(addrs[$urandom % 12], $urandom | 32'h1, 1'($urandom), $urandom % 3, 1'($urandom), 0);
    end
    // Reads pass untouched.
    bfm.read(32'h0000_2000, rd, cyc);
    checks++;
    if (rd !== 32'h1234_abcd) begin failures++; $display("FAIL read through port %h", rd); end
    for (int r = 0; r < NUM_DEFAULT_RULES; r++) begin
      checks++;
      if (hit_cnt[r] != exp_hit[r]) begin
        failures++; $display("FAIL rule %0d hits %0d expected %0d", r, hit_cnt[r], exp_hit[r]);
      end
    end
    $display("blocked writes: rule0=%0d rule1=%0d", exp_hit[0], exp_hit[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
