// tb_lpcn_top: end-to-end test of the accelerator at its full size (no
// parameter overrides). A random point cloud with distinct positions and a
// random weight matrix are loaded, one frame is run, and every subset result
// is compared with a reference computed here from first principles:
// farthest point sampling from point 0, the K nearest points of each central
// point, and relu(max over the subset of W * [p - p_c, f]).
// It also checks that every subset comes out exactly once, and counts the
// mechanisms the design relies on (Hub subsets, overlap reuse, Hub Octree
// updates, cache-full events, delta compensation, multi-round gathering,
// conflicting voxels); a mechanism that never happened is a failure.
module tb_lpcn_top;
  import lpcn_pkg::*;
  localparam int unsigned N = N_POINTS, M = N_CENTRAL, K = K_NEIGH;
  localparam int unsigned H = N_CENTRAL / ISLAND_SIZE;
  localparam int unsigned IDX_W = $clog2(N), SEQ_W = $clog2(M);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic p_we = 0, w_we = 0, start = 0;
  logic [IDX_W-1:0] p_addr = '0;
  point_t p_data = '0;
  logic [$clog2(FEAT_OUT)-1:0] w_row = '0;
  logic [$clog2(FEAT_IN)-1:0] w_col = '0;
  logic signed [FEAT_W-1:0] w_data = '0;
  logic busy, done, o_valid;
  logic [SEQ_W-1:0] o_seq;
  logic [IDX_W-1:0] o_center;
  logic signed [FEAT_OUT-1:0][ACC_W-1:0] o_result;
  logic [31:0] n_hub_subsets, n_overlap, n_inserted, n_cache_full, n_delta, n_computed,
               n_reused, n_rounds, n_regathered, n_tree_queries, cyc_dsu, cyc_island, cyc_compute;

  lpcn_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  xyz_t   pos  [N];
  int     feat [N][N_EXTRA];
  int     w    [FEAT_OUT][FEAT_IN];
  int     fps  [M];
  int     nbr  [M][K];
  bit     seen [M];

  function automatic longint d2(int a, int b);
    longint dx, dy, dz;
    dx = longint'(pos[a].x) - longint'(pos[b].x);
    dy = longint'(pos[a].y) - longint'(pos[b].y);
    dz = longint'(pos[a].z) - longint'(pos[b].z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  task automatic build_reference();
    longint mind [N];
    foreach (mind[i]) mind[i] = 64'h7fff_ffff_ffff;
    fps[0] = 0;
    for (int s = 1; s < int'(M); s++) begin
      int best;
      best = 0;
      for (int i = 0; i < int'(N); i++) begin
        longint d;
        d = d2(i, fps[s-1]);
        if (d < mind[i]) mind[i] = d;
      end
      for (int i = 1; i < int'(N); i++) if (mind[i] > mind[best]) best = i;
      fps[s] = best;
    end
    for (int s = 0; s < int'(M); s++) begin
      longint kd [K];
      int     ki [K];
      for (int j = 0; j < int'(K); j++) begin kd[j] = 64'h7fff_ffff_ffff; ki[j] = N; end
      for (int i = 0; i < int'(N); i++) begin
        longint d;
        int j;
        d = d2(i, fps[s]);
        if (d < kd[K-1]) begin
          j = K - 1;
          while (j > 0 && d < kd[j-1]) begin kd[j] = kd[j-1]; ki[j] = ki[j-1]; j--; end
          kd[j] = d; ki[j] = i;
        end
      end
      for (int j = 0; j < int'(K); j++) nbr[s][j] = ki[j];
    end
  endtask

  function automatic int ref_out(int s, int o);
    int c, best;
    c = fps[s];
    best = 0;
    for (int j = 0; j < int'(K); j++) begin
      int p, v;
      p = nbr[s][j];
      v = w[o][0] * (int'(pos[p].x) - int'(pos[c].x)) + w[o][1] * (int'(pos[p].y) - int'(pos[c].y))
        + w[o][2] * (int'(pos[p].z) - int'(pos[c].z));
      for (int e = 0; e < int'(N_EXTRA); e++) v += w[o][3+e] * feat[p][e];
      if (j == 0 || v > best) best = v;
    end
    return (best > 0) ? best : 0;
  endfunction

  int outputs = 0;
  longint t_start, t_done;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && o_valid) begin
    int s;
    int bad;
    s = int'(o_seq);
    outputs++;
    check(!seen[s], $sformatf("subset %0d produced twice", s));
    seen[s] = 1;
    check(int'(o_center) == fps[s], $sformatf("subset %0d centre %0d, expected %0d", s, o_center, fps[s]));
    bad = 0;
    for (int o = 0; o < int'(FEAT_OUT); o++) if (int'(o_result[o]) != ref_out(s, o)) bad++;
    check(bad == 0, $sformatf("subset %0d: %0d of %0d outputs differ", s, bad, FEAT_OUT));
  end

  initial begin
    // distinct random positions
    for (int i = 0; i < int'(N); i++) begin
      bit dup;
      do begin
        pos[i] = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
        dup = 0;
        for (int j = 0; j < i; j++) if (pos[j] == pos[i]) dup = 1;
      end while (dup);
      for (int e = 0; e < int'(N_EXTRA); e++) feat[i][e] = int'($urandom_range(255)) - 128;
    end
    foreach (w[o, i]) w[o][i] = int'($urandom_range(127)) - 64;
    build_reference();

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < int'(N); i++) begin
      p_we = 1; p_addr = IDX_W'(i);
      p_data.pos = pos[i];
      for (int e = 0; e < int'(N_EXTRA); e++) p_data.feat[e] = FEAT_W'(feat[i][e]);
      @(negedge clk);
    end
    p_we = 0;
    for (int o = 0; o < int'(FEAT_OUT); o++) for (int i = 0; i < int'(FEAT_IN); i++) begin
      w_we = 1; w_row = 7'(o); w_col = 3'(i); w_data = FEAT_W'(w[o][i]);
      @(negedge clk);
    end
    w_we = 0;
    start = 1; t_start = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t_done = cyc;

    check(outputs == int'(M), $sformatf("%0d subsets produced, expected %0d", outputs, M));
    check(n_hub_subsets == H, $sformatf("hub subsets %0d, expected %0d", n_hub_subsets, H));
    // mechanisms
    check(n_hub_subsets > 0, "no hub subset");
    check(n_overlap > 0,     "no overlap point found");
    check(n_reused > 0,      "no cached result reused");
    check(n_inserted > 0,    "hub octree never updated");
    check(n_inserted > K * H, "no tree update after a hub subset");
    check(n_cache_full > 0,  "hub cache never full");
    check(n_delta > 0,       "no delta compensation");
    check(n_rounds > 1,      "gathering took one round only");
    check(n_regathered > 0,  "no voxel met by two hubs");
    check(n_computed + n_reused == M * K, "computed + reused points != M*K");
    // the neighbour search takes 5 cycles per 32 points per central point
    check(cyc_dsu <= M * (5 * (N / 32) + 8) + N, $sformatf("structuring took %0d cycles", cyc_dsu));
    $display("cycles: total=%0d structuring=%0d islandization=%0d computing=%0d",
             t_done - t_start, cyc_dsu, cyc_island, cyc_compute);
    $display("hub subsets=%0d rounds=%0d regathered voxels=%0d tree queries=%0d",
             n_hub_subsets, n_rounds, n_regathered, n_tree_queries);
    $display("points computed=%0d reused=%0d (%0d%%) inserted=%0d cache-full=%0d delta rows=%0d",
             n_computed, n_reused, 100 * n_reused / (M * K), n_inserted, n_cache_full, n_delta);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
