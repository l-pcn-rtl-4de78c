// tb_systolic_array: checks the 16x16 array against a matrix product for
// random operands, and checks the latency: the last PE is complete exactly
// R + C - 1 cycles after the last input edge, not one cycle earlier.
module tb_systolic_array;
  import lpcn_pkg::*;
  localparam int unsigned R = SA_DIM, C = SA_DIM, KS = FEAT_IN;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic signed [R-1:0][FEAT_W-1:0] a_in = '0;
  logic signed [C-1:0][FEAT_W-1:0] b_in = '0;
  logic signed [R-1:0][C-1:0][ACC_W-1:0] acc;
  systolic_array dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int a [R][KS], b [KS][C];
  function automatic int ref_acc(int r, int c);
    int s = 0;
    for (int k = 0; k < int'(KS); k++) s += a[r][k] * b[k][c];
    return s;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int bad;
      foreach (a[r, k]) a[r][k] = int'($urandom_range(65535)) - 32768;
      foreach (b[k, c]) b[k][c] = int'($urandom_range(65535)) - 32768;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < int'(KS); k++) begin
        in_valid = 1;
        for (int r = 0; r < int'(R); r++) a_in[r] = FEAT_W'(a[r][k]);
        for (int c = 0; c < int'(C); c++) b_in[c] = FEAT_W'(b[k][c]);
        @(negedge clk);
      end
      in_valid = 0; a_in = '0; b_in = '0;
      // the last input was taken by the previous edge; R+C-2 more edges needed
      repeat (R + C - 3) @(negedge clk);
      check(int'(acc[R-1][C-1]) == ref_acc(R-1, C-1) - a[R-1][KS-1] * b[KS-1][C-1],
            "last PE must still miss its last product one cycle before the latency");
      @(negedge clk);
      bad = 0;
      for (int r = 0; r < int'(R); r++) for (int c = 0; c < int'(C); c++)
        if (int'(acc[r][c]) != ref_acc(r, c)) bad++;
      check(bad == 0, $sformatf("run %0d: %0d results wrong", run, bad));
      check(int'(acc[0][0]) == ref_acc(0, 0), "PE(0,0)");
      check(int'(acc[R-1][C-1]) == ref_acc(R-1, C-1), "PE(R-1,C-1) at latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
