// tb_overlap_detection_module: a sequence of islands, each a Hub subset
// followed by subsets that mix positions already seen in the island with new
// ones. A reference map (position -> slot) predicts overlap, slot and store
// for every point, including the cache-full case where new points get no
// slot. It also checks the search rate: a non-hub subset with nothing to
// insert finishes within K/2 + DEPTH cycles of search plus K cycles of the
// insertion scan (one point per cycle) and a few cycles of handshake.
module tb_overlap_detection_module;
  import lpcn_pkg::*;
  localparam int unsigned K = K_NEIGH, E = HUB_ENTRIES, D = COORD_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, is_hub = 0, done;
  xyz_t [K-1:0] pos = '0;
  logic [K-1:0] overlap, store;
  logic [K-1:0][$clog2(E)-1:0] slot;
  logic [31:0] n_overlap, n_inserted, n_full;
  overlap_detection_module dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int   map [xyz_t];
  xyz_t seen [$];
  int   nslot;
  int   full_events = 0, ovl_events = 0;

  function automatic xyz_t fresh_pos();
    xyz_t p;
    do p = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
    while (map.exists(p) || p inside {seen});
    return p;
  endfunction

  task automatic run_subset(bit hub, int n_old, output int cycles);
    int exp_ovl [K], exp_slot [K], exp_store [K];
    xyz_t used [$];
    int t0;
    if (hub) begin map.delete(); nslot = 0; end
    for (int i = 0; i < int'(K); i++) begin
      xyz_t p;
      if (!hub && i < n_old && map.size() > 0) begin
        // pick an old position not yet used in this subset
        int tries;
        tries = 0;
        do begin
          p = seen[$urandom_range(seen.size() - 1)];
          tries++;
        end while ((!map.exists(p) || p inside {used}) && tries < 1000);
        if (!map.exists(p) || p inside {used}) p = fresh_pos();
      end else p = fresh_pos();
      used.push_back(p);
      pos[i] = p;
    end
    // reference: search first, then insertion in order
    for (int i = 0; i < int'(K); i++) begin
      exp_ovl[i] = (!hub && map.exists(pos[i]));
      exp_slot[i] = exp_ovl[i] ? map[pos[i]] : -1;
      exp_store[i] = 0;
    end
    for (int i = 0; i < int'(K); i++) if (!exp_ovl[i]) begin
      if (nslot < int'(E)) begin
        map[pos[i]] = nslot; exp_slot[i] = nslot; exp_store[i] = 1; nslot++;
        seen.push_back(pos[i]);
      end else full_events++;
    end
    @(negedge clk);
    start = 1; is_hub = hub; t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    for (int i = 0; i < int'(K); i++) begin
      check(overlap[i] == exp_ovl[i], $sformatf("overlap[%0d]", i));
      check(store[i] == exp_store[i], $sformatf("store[%0d]", i));
      if (exp_slot[i] >= 0) check(int'(slot[i]) == exp_slot[i], $sformatf("slot[%0d]=%0d exp %0d", i, slot[i], exp_slot[i]));
      if (exp_ovl[i]) ovl_events++;
    end
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int isl = 0; isl < 4; isl++) begin
      seen.delete();
      run_subset(1, 0, cyc);
      for (int s = 0; s < 6; s++) run_subset(0, $urandom_range(K), cyc);
      // all points known: only the search runs
      run_subset(0, K, cyc);
    end
    // search rate: a subset whose points all overlap
    seen.delete();
    run_subset(1, 0, cyc);
    run_subset(0, K, cyc);
    check(cyc <= int'(K / 2 + D + K + 4), $sformatf("all-overlap subset took %0d cycles", cyc));
    check(full_events > 0 && ovl_events > 0, "cache-full and overlap cases both exercised");
    check(int'(n_full) == full_events, "full counter");
    $display("overlaps=%0d full=%0d inserted=%0d", n_overlap, n_full, n_inserted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
