// tb_point_buffer: loads random points and checks every read port (two wide
// group ports, the gather port, the feature port) and their one-cycle
// latency.
module tb_point_buffer;
  import lpcn_pkg::*;
  localparam int unsigned N = N_POINTS, L = LANES, G = K_NEIGH + 1;
  localparam int unsigned IDX_W = $clog2(N), GRP_W = $clog2(N / L);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [IDX_W-1:0] waddr = '0, f_addr = '0;
  point_t wdata = '0, f_data;
  logic [1:0][GRP_W-1:0] grp_addr = '0;
  point_t [1:0][L-1:0] grp_data;
  logic [G-1:0][IDX_W-1:0] g_addr = '0;
  point_t [G-1:0] g_data;
  point_buffer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  point_t model [N];
  initial begin
    @(negedge clk);
    for (int i = 0; i < int'(N); i++) begin
      we = 1; waddr = IDX_W'(i);
      wdata = {$urandom, $urandom, $urandom};
      model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int it = 0; it < 100; it++) begin
      int ga [2];
      int gi [G];
      int fa;
      for (int p = 0; p < 2; p++) begin ga[p] = $urandom_range(N / L - 1); grp_addr[p] = GRP_W'(ga[p]); end
      for (int g = 0; g < int'(G); g++) begin gi[g] = $urandom_range(N - 1); g_addr[g] = IDX_W'(gi[g]); end
      fa = $urandom_range(N - 1); f_addr = IDX_W'(fa);
      @(negedge clk);
      for (int p = 0; p < 2; p++) for (int l = 0; l < int'(L); l++)
        check(grp_data[p][l] == model[ga[p] * L + l], "group port");
      for (int g = 0; g < int'(G); g++) check(g_data[g] == model[gi[g]], "gather port");
      check(f_data == model[fa], "feature port");
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
