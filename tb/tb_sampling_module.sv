// tb_sampling_module: self-checking test of farthest point sampling.
// Loads a random cloud (with some duplicated positions) into a point_buffer,
// runs the Sampling Module and compares every selected central point with a
// reference FPS computed here, plus the per-point cycle budget.
module tb_sampling_module;
  import lpcn_pkg::*;
  localparam int unsigned N = 128, M = 32, L = 16;
  localparam int unsigned IDX_W = $clog2(N), SEQ_W = $clog2(M), GRP_W = $clog2(N / L);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we = 0; logic [IDX_W-1:0] waddr; point_t wdata;
  logic [1:0][GRP_W-1:0] grp_addr; point_t [1:0][L-1:0] grp_data;
  logic [32:0][IDX_W-1:0] g_addr = '0; point_t [32:0] g_data;
  logic [IDX_W-1:0] f_addr = '0; point_t f_data;
  point_buffer #(.N(N), .LANES(L), .G(33)) u_pb (.*);

  logic start = 0, c_valid, c_ready = 0, done;
  logic [SEQ_W-1:0] c_seq; logic [IDX_W-1:0] c_idx; xyz_t c_pos;
  assign grp_addr[1] = '0;
  sampling_module #(.N(N), .M(M), .LANES(L)) dut (
    .clk, .rst_n, .start, .grp_addr(grp_addr[0]), .grp_data(grp_data[0]),
    .c_valid, .c_ready, .c_seq, .c_idx, .c_pos, .done);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  xyz_t pos [N];
  int ref_sel [M];

  initial begin
    for (int i = 0; i < int'(N); i++) begin
      pos[i] = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
      if (i % 17 == 5) pos[i] = pos[i-1];
    end
    // reference FPS
    begin
      longint md [N];
      foreach (md[i]) md[i] = 64'h7fffffffffff;
      ref_sel[0] = 0;
      for (int s = 1; s < int'(M); s++) begin
        longint bd; int bi;
        bd = -1; bi = 0;
        for (int i = 0; i < int'(N); i++) begin
          longint d;
          d = longint'(sqdist(pos[i], pos[ref_sel[s-1]]));
          if (d < md[i]) md[i] = d;
          if (md[i] > bd) begin bd = md[i]; bi = i; end
        end
        ref_sel[s] = bi;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(N); i++) begin
      we <= 1; waddr <= IDX_W'(i); wdata <= '{pos: pos[i], feat: '0};
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    begin
      int t0, t1;
      t0 = 0;
      for (int s = 0; s < int'(M); s++) begin
        int wait_c;
        wait_c = 0;
        while (!c_valid) begin @(posedge clk); #1; wait_c++; end
        check(int'(c_seq) == s, $sformatf("seq %0d vs %0d", c_seq, s));
        check(int'(c_idx) == ref_sel[s], $sformatf("centre %0d: %0d vs %0d", s, c_idx, ref_sel[s]));
        check(c_pos == pos[ref_sel[s]], "centre position");
        if (s > 0) check(wait_c <= int'(N / L) + 4, $sformatf("pass took %0d cycles", wait_c));
        // random back-pressure
        repeat ($urandom_range(2)) @(posedge clk);
        c_ready <= 1; @(posedge clk); #1; c_ready <= 0;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
