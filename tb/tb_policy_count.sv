// tb_policy_count -- the reference SoC with 10, 20, 25 and 30 policies in its
// centralized module, the policy counts whose cost the paper reports. Four
// copies of policy_count_harness run side by side, each building the full
// top with a generated table of that many rules and checking every rule
// (see the harness for the table and the sequence). The result line sums
// the four.
module tb_policy_count;
  localparam int N = 4;
  localparam int SIZES [N] = '{10, 20, 25, 30};

  logic clk = 0, rst_n = 0;
  int   checks [N], failures [N];
  logic done [N];

  always #5 clk = ~clk;

  for (genvar k = 0; k < N; k++) begin : g_size
    policy_count_harness #(.NR(SIZES[k])) h (.clk, .rst_n, .checks(checks[k]),
                                             .failures(failures[k]), .done(done[k]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks.sum(), failures.sum() + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks.sum(), failures.sum());
    $finish;
  end
endmodule
