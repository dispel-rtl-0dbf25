// axi_master_bfm -- behavioural AXI4-Lite master for the testbenches (stands
// in for the processor). write() presents AW and W together, as a processor
// store does, and waits for both handshakes and the B response; read() waits
// for AR and R. Both return the number of cycles the transaction took.
// w_delay > 0 presents W that many cycles after AW, w_first presents W
// two cycles before AW, to exercise the other orderings AXI allows (AW is
// never made to wait for the W handshake, as AXI requires).
module axi_master_bfm
  import dispel_pkg::*;
(
  input  logic     clk,
  output axi_req_t req,
  input  axi_rsp_t rsp
);
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input int w_delay, input bit w_first,
                       output logic [1:0] bresp, output int cycles);
    bit aw_done, w_done;
    int t;
    aw_done = 0; w_done = 0; t = 0;
    @(negedge clk);
    req.bready = 1'b1;
    if (!w_first) begin req.awaddr = addr; req.awvalid = 1'b1; end
    if (w_delay == 0 || w_first) begin req.wdata = data; req.wstrb = 4'hf; req.wvalid = 1'b1; end
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      t++;
      if (req.awvalid && rsp.awready) aw_done = 1;
      if (req.wvalid && rsp.wready)   w_done = 1;
      @(negedge clk);
      if (aw_done) req.awvalid = 1'b0;
      if (w_done)  req.wvalid  = 1'b0;
      if (w_first && !aw_done && !req.awvalid && t >= 2) begin
        req.awaddr = addr; req.awvalid = 1'b1;
      end
      if (!w_first && !w_done && !req.wvalid && t >= w_delay) begin
        req.wdata = data; req.wstrb = 4'hf; req.wvalid = 1'b1;
      end
      if (t > 5000) break;
    end
    while (!rsp.bvalid && t <= 5000) begin @(posedge clk); t++; @(negedge clk); end
    bresp = rsp.bresp;
    @(posedge clk); t++;
    @(negedge clk);
    req.bready = 1'b0;
    cycles = t;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data, output int cycles);
    int t;
    t = 0;
    @(negedge clk);
    req.araddr = addr; req.arvalid = 1'b1; req.rready = 1'b1;
    do begin @(posedge clk); t++; end while (!rsp.arready && t <= 5000);
    @(negedge clk);
    req.arvalid = 1'b0;
    while (!rsp.rvalid && t <= 5000) begin @(posedge clk); t++; @(negedge clk); end
    data = rsp.rdata;
    @(posedge clk); t++;
    @(negedge clk);
    req.rready = 1'b0;
    cycles = t;
  endtask
endmodule
