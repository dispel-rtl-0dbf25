// tb_policy_cycle_limit -- checks the cycle-limit FSM of Policy #4.
// One instance with a short limit (10) is run through operations of every
// length from 1 to 14 cycles, with the mode condition on and off; one
// instance at the paper's limit (1000) is run at 1000 and 1001 cycles. The
// expected verdict is computed here: a response handed over d cycles after the
// request is discarded exactly when d > limit and the mode condition held.
module tb_policy_cycle_limit;
  logic clk = 0, rst_n = 0;
  logic en, start, done;
  logic flag_s, flag_l;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  policy_cycle_limit #(.LIMIT(10)) dut_s (.clk, .rst_n, .en_i(en), .start_i(start), .done_i(done), .flag_o(flag_s));
  policy_cycle_limit               dut_l (.clk, .rst_n, .en_i(en), .start_i(start), .done_i(done), .flag_o(flag_l));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One operation of d cycles: start handshake at one edge, done d edges later.
  // Returns the flag seen in the cycle of the done handshake.
  task automatic op(input int d, input bit mode_ok, output logic fs, output logic fl);
    @(negedge clk);
    en = mode_ok; start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 1; i < d; i++) @(negedge clk);
    done = 1; fs = flag_s; fl = flag_l;
    @(negedge clk);
    done = 0;
  endtask

  initial begin
    logic fs, fl;
    en = 0; start = 0; done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int d = 1; d <= 14; d++) begin
      for (int m = 0; m < 2; m++) begin
        op(d, bit'(m), fs, fl);
        checks++;
        if (fs !== ((m == 1) && (d > 10))) begin
          failures++; $display("FAIL limit10 d=%0d en=%0d flag=%0b", d, m, fs);
        end
        checks++;
        if (fl !== 1'b0) begin failures++; $display("FAIL limit1000 raised at d=%0d", d); end
        // the flag is gone once the response was taken
        @(negedge clk); checks++;
        if (flag_s !== 1'b0) begin failures++; $display("FAIL flag not cleared d=%0d", d); end
      end
    end
    op(1000, 1, fs, fl); checks++;
    if (fl !== 1'b0) begin failures++; $display("FAIL limit1000 flagged at 1000 cycles"); end
    op(1001, 1, fs, fl); checks++;
    if (fl !== 1'b1) begin failures++; $display("FAIL limit1000 not flagged at 1001 cycles"); end
    // long operation: flag stays up after the FSM went back to idle
    @(negedge clk); en = 1; start = 1; @(negedge clk); start = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (flag_s !== 1'b1) begin failures++; $display("FAIL flag not held after timeout"); end
    done = 1; @(negedge clk); done = 0; @(negedge clk);
    checks++;
    if (flag_s !== 1'b0) begin failures++; $display("FAIL flag not cleared by done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
