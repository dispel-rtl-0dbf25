// tb_ip_leak_guard -- checks the key-leakage guard of the AES wrapper.
// Directed words at Hamming distance 0, 7, 8 and 9 from each key word, then
// random words and keys. The reference counts differing bits with a plain
// bit loop and masks when any count is below 8.
module tb_ip_leak_guard;
  localparam int KW = 6;
  logic [31:0]      data, out;
  logic [KW*32-1:0] key;
  logic             leak;
  int checks = 0, failures = 0;

  ip_leak_guard dut (.data_i(data), .key_i(key), .data_o(out), .leak_o(leak));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int hd(input logic [31:0] a, input logic [31:0] b);
    int n = 0;
    for (int i = 0; i < 32; i++) if (a[i] != b[i]) n++;
    return n;
  endfunction

  task automatic check_one();
    logic exp_leak;
    exp_leak = 0;
    for (int k = 0; k < KW; k++) if (hd(data, key[k*32 +: 32]) < 8) exp_leak = 1;
    #1;
    checks++;
    if (leak !== exp_leak || out !== (exp_leak ? 32'h0 : data)) begin
      failures++;
      $display("FAIL data=%h leak=%b exp=%b out=%h", data, leak, exp_leak, out);
    end
  endtask

  initial begin
    logic [31:0] flip;
    for (int k = 0; k < KW; k++) key[k*32 +: 32] = 32'h1111_1111 * (k + 1) ^ 32'h5a5a_0000;
    for (int k = 0; k < KW; k++) begin
      for (int n = 0; n <= 9; n++) begin
        flip = (n == 0) ? 32'h0 : ((32'h1 << n) - 1) << (k + 3);
        data = key[k*32 +: 32] ^ flip;
        check_one();
        checks++;
        if ((n < 8) != (out == 32'h0)) begin
          failures++; $display("FAIL directed k=%0d hd=%0d out=%h", k, n, out);
        end
      end
    end
    for (int i = 0; i < 3000; i++) begin
      if (i % 100 == 0) for (int k = 0; k < KW; k++) key[k*32 +: 32] = $urandom;
      data = $urandom;
      if (i % 3 == 0) data = key[($urandom % KW)*32 +: 32] ^ ($urandom & $urandom & $urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
