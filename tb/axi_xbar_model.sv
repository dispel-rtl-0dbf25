// axi_xbar_model -- behavioural single-master shared-bus interconnect for the
// testbenches (the SoC's own interconnect is not part of this design).
// Address, write data and strobes are driven to every slave port, as on a
// shared bus; AW/W/AR valid go only to the slave the address decodes to.
// The write target is latched at the AW handshake so that a later W beat,
// and the B response, stay with it; the address wires keep showing the last
// write address until the next AW. One read and one write in flight.
// Decoding uses address bits [31:24] through the SLV_BASE table below.
module axi_xbar_model
  import dispel_pkg::*;
#(
  parameter int NS = NUM_SLAVES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t m_req,
  output axi_rsp_t m_rsp,
  output axi_req_t s_req [NS],
  input  axi_rsp_t s_rsp [NS]
);
  // address byte [31:24] of each slave, in slave-number order
  localparam logic [7:0] SLV_BASE [12] = '{8'h00, 8'h93, 8'h97, 8'h96, 8'h94, 8'h95,
                                           8'h98, 8'h99, 8'h9a, 8'h9b, 8'h9c, 8'h9d};

  function automatic int dec(input logic [31:0] a);
    for (int s = 0; s < NS; s++) if (a[31:24] == SLV_BASE[s]) return s;
    return 0;
  endfunction

  int          wsel_q, rsel_q, wsel, rsel;
  logic [31:0] aw_last_q;
  logic        w_open_q, r_open_q;

  always_comb begin
    wsel = m_req.awvalid ? dec(m_req.awaddr) : wsel_q;
    rsel = m_req.arvalid ? dec(m_req.araddr) : rsel_q;
    m_rsp = '0;
    for (int s = 0; s < NS; s++) begin
      s_req[s] = m_req;
      s_req[s].awaddr  = m_req.awvalid ? m_req.awaddr : aw_last_q;
      s_req[s].awvalid = m_req.awvalid && (s == wsel);
      s_req[s].wvalid  = m_req.wvalid  && (s == wsel) && (m_req.awvalid || w_open_q);
      s_req[s].bready  = m_req.bready  && (s == wsel_q);
      s_req[s].arvalid = m_req.arvalid && (s == rsel);
      s_req[s].rready  = m_req.rready  && (s == rsel_q);
    end
    m_rsp.awready = s_rsp[wsel].awready;
    m_rsp.wready  = s_rsp[wsel].wready && (m_req.awvalid || w_open_q);
    m_rsp.bvalid  = s_rsp[wsel_q].bvalid;
    m_rsp.bresp   = s_rsp[wsel_q].bresp;
    m_rsp.arready = s_rsp[rsel].arready;
    m_rsp.rvalid  = s_rsp[rsel_q].rvalid && r_open_q;
    m_rsp.rdata   = s_rsp[rsel_q].rdata;
    m_rsp.rresp   = s_rsp[rsel_q].rresp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel_q <= 0; rsel_q <= 0; aw_last_q <= '0; w_open_q <= 0; r_open_q <= 0;
    end else begin
      if (m_req.awvalid) begin wsel_q <= wsel; aw_last_q <= m_req.awaddr; end
      if (m_req.awvalid && m_rsp.awready) w_open_q <= 1;
      if (m_rsp.bvalid && m_req.bready)   w_open_q <= 0;
      if (m_req.arvalid) rsel_q <= rsel;
      if (m_req.arvalid && m_rsp.arready) r_open_q <= 1;
      if (m_rsp.rvalid && m_req.rready)   r_open_q <= 0;
    end
  end
endmodule
