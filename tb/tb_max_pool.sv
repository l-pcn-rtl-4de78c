// tb_max_pool: random vectors are pooled; the output must be the element-wise
// maximum clipped at zero, available the cycle after the last input.
module tb_max_pool;
  import lpcn_pkg::*;
  localparam int unsigned L = SA_DIM;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic signed [L-1:0][ACC_W-1:0] in_vec = '0, out;
  max_pool dut (.clk, .rst_n, .clear, .in_valid, .in_vec, .out);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int mx [L];
      int n;
      n = 1 + $urandom_range(40);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        in_valid = 1;
        for (int l = 0; l < int'(L); l++) begin
          int v;
          v = int'($urandom) >>> (run % 8);
          if (run % 3 == 0) v = -(v & 32'h7fff_ffff) ;
          in_vec[l] = v;
          if (i == 0 || v > mx[l]) mx[l] = v;
        end
        @(negedge clk);
      end
      in_valid = 0;
      for (int l = 0; l < int'(L); l++)
        check(int'(out[l]) == ((mx[l] > 0) ? mx[l] : 0), $sformatf("run %0d lane %0d", run, l));
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
