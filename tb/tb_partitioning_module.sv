// tb_partitioning_module: self-checking test of Octree-based Islandization.
// Central points with random positions are written into the Sampled Octree
// by the Pruning Module, then the Partitioning Module picks hubs, gathers and
// emits the Island Lists. The test checks, independently of the design:
//   * every central point is in exactly one island, and islands start with
//     their hub; hubs sit in distinct voxels;
//   * each point's island is one whose hub is nearest to it in voxel rings
//     (Chebyshev distance), the earliest-round rule;
//   * entries of an island come in non-decreasing ring order;
//   * the number of rounds equals the largest point-to-nearest-hub ring + 1.
module tb_partitioning_module;
  import lpcn_pkg::*;
  localparam int unsigned M = 64, H = 4, DEPTH = 3;
  localparam int unsigned NODES = M + 1, PAY_W = $clog2(M + 1), SEQ_W = $clog2(M);
  localparam int unsigned H_W = $clog2(H), PTR_W = $clog2(NODES), NODE_W = 8 * PTR_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, c_valid = 0, c_ready, pbusy;
  logic [SEQ_W-1:0] c_seq; xyz_t c_pos;
  logic [DEPTH:0][PTR_W-1:0] raddr; logic [DEPTH-1:0][NODE_W-1:0] rnode; logic [PAY_W-1:0] rleaf;
  logic [DEPTH-1:0] we_node; logic [DEPTH-1:0][PTR_W-1:0] waddr_node; logic [DEPTH-1:0][NODE_W-1:0] wdata_node;
  logic we_leaf; logic [PTR_W-1:0] waddr_leaf; logic [PAY_W-1:0] wdata_leaf;
  logic lk_we, vx_we; logic [SEQ_W-1:0] lk_addr, vx_addr; logic [PAY_W-1:0] lk_data; logic [3*DEPTH-1:0] vx_data;

  pruning_module #(.M(M), .DEPTH(DEPTH)) u_prune (
    .clk, .rst_n, .clear, .c_valid, .c_ready, .c_seq, .c_pos,
    .raddr, .rnode, .rleaf, .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf,
    .lk_we, .lk_addr, .lk_data, .vx_we, .vx_addr, .vx_data, .busy(pbusy));

  logic start = 0, busy, done, i_valid, i_ready = 1, i_first, i_last;
  logic [H_W-1:0] i_hub; logic [SEQ_W-1:0] i_seq;
  logic [H_W:0] n_hubs; logic [DEPTH:0] n_rounds; logic [31:0] n_queries, n_hits, n_regathered;
  partitioning_module #(.M(M), .H(H), .DEPTH(DEPTH)) dut (
    .clk, .rst_n,
    .ext_raddr(raddr), .ext_rnode(rnode), .ext_rleaf(rleaf),
    .ext_we_node(we_node), .ext_waddr_node(waddr_node), .ext_wdata_node(wdata_node),
    .ext_we_leaf(we_leaf), .ext_waddr_leaf(waddr_leaf), .ext_wdata_leaf(wdata_leaf),
    .lk_we, .lk_addr, .lk_data, .vx_we, .vx_addr, .vx_data,
    .start, .busy, .done, .i_valid, .i_ready, .i_hub, .i_seq, .i_first, .i_last,
    .n_hubs, .n_rounds, .n_queries, .n_hits, .n_regathered);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int vx [M], vy [M], vz [M];
  function automatic int ring(int a, int b);
    int dx, dy, dz, m;
    dx = vx[a] - vx[b]; if (dx < 0) dx = -dx;
    dy = vy[a] - vy[b]; if (dy < 0) dy = -dy;
    dz = vz[a] - vz[b]; if (dz < 0) dz = -dz;
    m = dx; if (dy > m) m = dy; if (dz > m) m = dz;
    return m;
  endfunction

  int island_of [M];
  int hubs [$];
  int entries [H][$];

  initial begin
    foreach (island_of[i]) island_of[i] = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    for (int s = 0; s < int'(M); s++) begin
      xyz_t p;
      p = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
      vx[s] = int'(p.x) >> (COORD_W - DEPTH);
      vy[s] = int'(p.y) >> (COORD_W - DEPTH);
      vz[s] = int'(p.z) >> (COORD_W - DEPTH);
      @(negedge clk);
      c_valid = 1; c_seq = SEQ_W'(s); c_pos = p;
      while (!c_ready) @(negedge clk);
      @(negedge clk);
      c_valid = 0;
      while (pbusy) @(negedge clk);
    end
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    // collect the island stream
    while (!done) begin
      @(posedge clk);
      if (i_valid && i_ready) begin
        int h;
        h = int'(i_hub);
        if (i_first) begin
          check(h == hubs.size(), "islands in order");
          hubs.push_back(int'(i_seq));
        end
        check(island_of[i_seq] == -1, $sformatf("point %0d emitted twice", i_seq));
        island_of[i_seq] = h;
        entries[h].push_back(int'(i_seq));
      end
    end
    check(hubs.size() == int'(H) && int'(n_hubs) == int'(H), "hub count");
    foreach (hubs[a]) foreach (hubs[b]) if (a < b) check(ring(hubs[a], hubs[b]) > 0, "hubs share a voxel");
    begin
      int maxr;
      maxr = 0;
      for (int s = 0; s < int'(M); s++) begin
        int best;
        check(island_of[s] >= 0, $sformatf("point %0d not in any island", s));
        if (island_of[s] < 0) continue;
        best = 1000;
        foreach (hubs[h]) if (ring(s, hubs[h]) < best) best = ring(s, hubs[h]);
        check(ring(s, hubs[island_of[s]]) == best, $sformatf("point %0d not with a nearest hub", s));
        if (best > maxr) maxr = best;
      end
      check(int'(n_rounds) == maxr + 1, $sformatf("rounds %0d, expected %0d", n_rounds, maxr + 1));
    end
    for (int h = 0; h < hubs.size(); h++) for (int k = 1; k < entries[h].size(); k++)
      check(ring(entries[h][k], hubs[h]) >= ring(entries[h][k-1], hubs[h]), "island order not inside-out");
    $display("rounds=%0d queries=%0d hits=%0d regathered=%0d", n_rounds, n_queries, n_hits, n_regathered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
