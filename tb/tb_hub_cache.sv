// tb_hub_cache: fills random slots and tiles, reads them back in random
// order and checks data and the one-cycle read latency; clear between
// "islands".
module tb_hub_cache;
  import lpcn_pkg::*;
  localparam int unsigned E = HUB_ENTRIES, T = FEAT_OUT / SA_DIM, L = SA_DIM;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, we = 0, re = 0;
  logic [$clog2(E)-1:0] wslot = '0, rslot = '0;
  logic [$clog2(T)-1:0] wtile = '0, rtile = '0;
  logic signed [L-1:0][ACC_W-1:0] wdata = '0, rdata;
  hub_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [L*ACC_W-1:0] model [E][T];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int isl = 0; isl < 3; isl++) begin
      int n;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      n = 8 + $urandom_range(E - 8);
      for (int s = 0; s < n; s++) for (int t = 0; t < int'(T); t++) begin
        we = 1; wslot = 6'(s); wtile = 3'(t);
        for (int l = 0; l < int'(L); l++) wdata[l] = $urandom;
        model[s][t] = wdata;
        @(negedge clk);
      end
      we = 0;
      for (int i = 0; i < 200; i++) begin
        int s, t;
        s = $urandom_range(n - 1); t = $urandom_range(T - 1);
        re = 1; rslot = 6'(s); rtile = 3'(t);
        @(negedge clk);
        re = 0;
        check(rdata == model[s][t], $sformatf("slot %0d tile %0d", s, t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
