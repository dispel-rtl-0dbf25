// axi_slave_model -- behavioural AXI4-Lite slave for the testbenches: a
// sparse word memory (associative array) with a read latency that the
// testbench sets at run time. AW and W are accepted independently, one of
// each at a time; the write is done when both are in (bytes under w_strb) and
// B follows one cycle later. A read is answered rd_latency cycles after the
// AR handshake (rd_latency >= 1). It also counts the W beats it took and
// keeps the last one, so a testbench can see exactly what reached the slave.
module axi_slave_model
  import dispel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axi_req_t    req,
  output axi_rsp_t    rsp,
  input  int unsigned rd_latency,
  output int unsigned w_beats,
  output logic [31:0] last_wdata,
  output logic [3:0]  last_wstrb
);
  logic [31:0] mem [logic [31:0]];
  logic        aw_full, w_full, b_pend, r_busy;
  logic [31:0] aw_addr_q, w_data_q, ar_addr_q;
  logic [3:0]  w_strb_q;
  int unsigned r_wait;

  function automatic logic [31:0] rd(input logic [31:0] a);
    if (mem.exists({a[31:2], 2'b00})) return mem[{a[31:2], 2'b00}];
    return 32'h0;
  endfunction

  task automatic poke(input logic [31:0] a, input logic [31:0] d);
    mem[{a[31:2], 2'b00}] = d;
  endtask

  function automatic logic [31:0] peek(input logic [31:0] a);
    return rd(a);
  endfunction

  always_comb begin
    rsp = '0;
    rsp.awready = !aw_full && !b_pend;
    rsp.wready  = !w_full && !b_pend;
    rsp.bvalid  = b_pend;
    rsp.bresp   = RESP_OKAY;
    rsp.arready = !r_busy;
    rsp.rvalid  = r_busy && (r_wait == 0);
    rsp.rdata   = rsp.rvalid ? rd(ar_addr_q) : 32'h0;
    rsp.rresp   = RESP_OKAY;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_full <= 0; w_full <= 0; b_pend <= 0; r_busy <= 0; r_wait <= 0;
      aw_addr_q <= 0; w_data_q <= 0; w_strb_q <= 0; ar_addr_q <= 0;
      w_beats <= 0; last_wdata <= 0; last_wstrb <= 0;
    end else begin
      logic        awf, wf;
      logic [31:0] a, d;
      logic [3:0]  s;
      awf = aw_full; wf = w_full; a = aw_addr_q; d = w_data_q; s = w_strb_q;
      if (req.awvalid && rsp.awready) begin awf = 1; a = req.awaddr; end
      if (req.wvalid && rsp.wready) begin
        wf = 1; d = req.wdata; s = req.wstrb;
        w_beats <= w_beats + 1; last_wdata <= req.wdata; last_wstrb <= req.wstrb;
      end
      if (awf && wf) begin
        logic [31:0] old;
        old = rd(a);
        for (int i = 0; i < 4; i++) if (s[i]) old[i*8 +: 8] = d[i*8 +: 8];
        mem[{a[31:2], 2'b00}] = old;
        awf = 0; wf = 0; b_pend <= 1;
      end
      aw_full <= awf; w_full <= wf; aw_addr_q <= a; w_data_q <= d; w_strb_q <= s;
      if (b_pend && req.bready) b_pend <= 0;
      if (req.arvalid && rsp.arready) begin
        r_busy <= 1; ar_addr_q <= req.araddr;
        r_wait <= (rd_latency == 0) ? 0 : rd_latency - 1;
      end else if (r_busy && r_wait != 0) begin
        r_wait <= r_wait - 1;
      end else if (rsp.rvalid && req.rready) begin
        r_busy <= 0;
      end
    end
  end
endmodule
