// tb_dataflow_controller: drives the FCU with islands of subsets the way the
// Islandization Unit would (Hub subset first, then subsets whose points are
// partly cached), with a reference cache model deciding overlap, slot and
// store. Every subset result must equal relu(max over the subset of
// W * [p - p_c, f]) computed here, which checks the reuse and the Result
// Delta Compensation. The subset latency is checked against the schedule
// bound, and fewer cycles must be needed when points are reused.
module tb_dataflow_controller;
  import lpcn_pkg::*;
  localparam int unsigned N = N_POINTS, K = K_NEIGH, E = HUB_ENTRIES;
  localparam int unsigned TILES = FEAT_OUT / SA_DIM, RT = (K + 1 + SA_DIM - 1) / SA_DIM;
  localparam int unsigned IDX_W = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we = 0;
  logic [$clog2(FEAT_OUT)-1:0] w_row = '0;
  logic [$clog2(FEAT_IN)-1:0] w_col = '0;
  logic signed [FEAT_W-1:0] w_data = '0;
  logic start = 0, is_hub = 0, busy, done;
  xyz_t c_pos = '0, hub_pos = '0;
  logic [K-1:0][IDX_W-1:0] ids = '0;
  logic [K-1:0] overlap = '0, store = '0;
  logic [K-1:0][$clog2(E)-1:0] slot = '0;
  logic [IDX_W-1:0] f_addr;
  point_t f_data;
  logic signed [FEAT_OUT-1:0][ACC_W-1:0] result;
  logic [31:0] n_computed, n_reused, n_delta;
  dataflow_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  point_t pmem [N];
  int     w [FEAT_OUT][FEAT_IN];
  always_ff @(posedge clk) f_data <= pmem[f_addr];

  int cache_slot [int];
  int nslot;

  function automatic int ref_out(int o, int c);
    int best = 0;
    for (int j = 0; j < int'(K); j++) begin
      int v;
      point_t p;
      p = pmem[ids[j]];
      v = w[o][0] * (int'(p.pos.x) - int'(pmem[c].pos.x)) + w[o][1] * (int'(p.pos.y) - int'(pmem[c].pos.y))
        + w[o][2] * (int'(p.pos.z) - int'(pmem[c].pos.z));
      for (int e = 0; e < int'(N_EXTRA); e++) v += w[o][3+e] * int'($signed(p.feat[e]));
      if (j == 0 || v > best) best = v;
    end
    return (best > 0) ? best : 0;
  endfunction

  int hub_c;
  int lat_full = 0, lat_reuse = 1 << 30;
  task automatic run_subset(bit hub, int n_old);
    int c, bad, t0, cyc, nre;
    int pool [$];
    foreach (cache_slot[k]) pool.push_back(k);
    if (hub) begin cache_slot.delete(); nslot = 0; pool.delete(); end
    // choose K distinct points, n_old of them from the cache
    begin
      int chosen [int];
      for (int i = 0; i < int'(K); i++) begin
        int p;
        if (i < n_old && pool.size() > 0) begin
          int j;
          j = $urandom_range(pool.size() - 1);
          p = pool[j]; pool.delete(j);
        end else begin
          do p = $urandom_range(N - 1); while (chosen.exists(p) || cache_slot.exists(p));
        end
        chosen[p] = 1;
        ids[i] = IDX_W'(p);
      end
    end
    c = ids[0];
    if (hub) hub_c = c;
    nre = 0;
    for (int i = 0; i < int'(K); i++) begin
      overlap[i] = !hub && cache_slot.exists(int'(ids[i]));
      store[i] = 0;
      if (overlap[i]) begin slot[i] = 6'(cache_slot[int'(ids[i])]); nre++; end
    end
    for (int i = 0; i < int'(K); i++) if (!overlap[i] && nslot < int'(E)) begin
      cache_slot[int'(ids[i])] = nslot; slot[i] = 6'(nslot); store[i] = 1; nslot++;
    end
    c_pos = pmem[c].pos; hub_pos = pmem[hub_c].pos; is_hub = hub;
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    bad = 0;
    for (int o = 0; o < int'(FEAT_OUT); o++) if (int'(result[o]) != ref_out(o, c)) bad++;
    check(bad == 0, $sformatf("%s subset with %0d reused: %0d outputs wrong", hub ? "hub" : "non-hub", nre, bad));
    check(cyc <= int'(K + 3 + TILES * (3 + RT * (1 + FEAT_IN + 2 * SA_DIM - 1 + SA_DIM) + K + 2)),
          $sformatf("subset took %0d cycles", cyc));
    if (hub) lat_full = cyc;
    if (nre >= int'(K) - int'(SA_DIM) + 1 && cyc < lat_reuse) lat_reuse = cyc;
  endtask

  initial begin
    foreach (pmem[i]) begin
      pmem[i].pos = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
      for (int e = 0; e < int'(N_EXTRA); e++) pmem[i].feat[e] = FEAT_W'(int'($urandom_range(255)) - 128);
    end
    foreach (w[o, i]) w[o][i] = int'($urandom_range(127)) - 64;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < int'(FEAT_OUT); o++) for (int i = 0; i < int'(FEAT_IN); i++) begin
      w_we = 1; w_row = 7'(o); w_col = 3'(i); w_data = FEAT_W'(w[o][i]); @(negedge clk);
    end
    w_we = 0;
    for (int isl = 0; isl < 3; isl++) begin
      run_subset(1, 0);
      for (int s = 0; s < 5; s++) run_subset(0, $urandom_range(K));
      run_subset(0, K);
    end
    check(n_reused > 0 && n_delta > 0, "reuse and compensation exercised");
    check(lat_reuse < lat_full, $sformatf("reuse does not save cycles (%0d vs %0d)", lat_reuse, lat_full));
    $display("hub subset %0d cycles, mostly reused subset %0d cycles", lat_full, lat_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
