// tb_neighbor_search_module: self-checking test of K-nearest-neighbour search.
// Loads a random cloud (with clustered and duplicated points so that distance
// ties occur), sends central points, and compares each stored subset with a
// reference (distance, index) sort of the whole cloud, plus the cycle budget.
module tb_neighbor_search_module;
  import lpcn_pkg::*;
  localparam int unsigned N = 128, M = 16, K = 32, L = 16;
  localparam int unsigned IDX_W = $clog2(N), SEQ_W = $clog2(M), GRP_W = $clog2(N / L);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we = 0; logic [IDX_W-1:0] waddr; point_t wdata;
  logic [1:0][GRP_W-1:0] grp_addr; point_t [1:0][L-1:0] grp_data;
  logic [32:0][IDX_W-1:0] g_addr = '0; point_t [32:0] g_data;
  logic [IDX_W-1:0] f_addr = '0; point_t f_data;
  point_buffer #(.N(N), .LANES(L), .G(33)) u_pb (.*);

  logic c_valid = 0, c_ready, subset_done;
  logic [SEQ_W-1:0] c_seq, rd_seq; logic [IDX_W-1:0] c_idx, rd_center; xyz_t c_pos;
  logic [K-1:0][IDX_W-1:0] rd_ids;
  assign grp_addr[0] = '0;
  neighbor_search_module #(.N(N), .M(M), .K(K), .LANES(L)) dut (
    .clk, .rst_n, .c_valid, .c_ready, .c_seq, .c_idx, .c_pos,
    .grp_addr(grp_addr[1]), .grp_data(grp_data[1]), .rd_seq, .rd_center, .rd_ids, .subset_done);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  xyz_t pos [N];
  int cidx [M];

  initial begin
    for (int i = 0; i < int'(N); i++) begin
      pos[i] = '{x: COORD_W'($urandom_range(40)), y: COORD_W'($urandom_range(40)), z: COORD_W'($urandom_range(40))};
      if (i % 9 == 4) pos[i] = pos[i-3];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(N); i++) begin
      we <= 1; waddr <= IDX_W'(i); wdata <= '{pos: pos[i], feat: '0};
      @(posedge clk);
    end
    we <= 0;
    for (int s = 0; s < int'(M); s++) begin
      int t;
      cidx[s] = $urandom_range(N - 1);
      while (!c_ready) @(posedge clk);
      c_valid <= 1; c_seq <= SEQ_W'(s); c_idx <= IDX_W'(cidx[s]); c_pos <= pos[cidx[s]];
      @(posedge clk); c_valid <= 0;
      t = 0;
      while (!subset_done) begin @(posedge clk); t++; end
      check(t <= 5 * int'(N / (2 * L)) + 3, $sformatf("subset took %0d cycles", t));
    end
    // read back and compare
    for (int s = 0; s < int'(M); s++) begin
      longint keys [N];
      rd_seq <= SEQ_W'(s);
      @(posedge clk); @(posedge clk); #1;
      for (int i = 0; i < int'(N); i++) keys[i] = longint'(sqdist(pos[i], pos[cidx[s]])) * 4096 + i;
      keys.sort();
      check(int'(rd_center) == cidx[s], "centre index");
      for (int j = 0; j < int'(K); j++)
        check(int'(rd_ids[j]) == int'(keys[j] % 4096), $sformatf("subset %0d member %0d: %0d vs %0d", s, j, rd_ids[j], keys[j] % 4096));
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
