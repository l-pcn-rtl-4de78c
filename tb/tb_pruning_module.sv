// tb_pruning_module: streams central points (many sharing voxels) into the
// Pruning Module, then searches every voxel of the grid in the resulting
// Sampled Octree with an Octree-Search Engine. Occupied voxels must be found
// and their linked list (leaf payload, then the link writes) must hold
// exactly the central points of that voxel; empty voxels must be absent.
// Also checks the recorded voxel coordinates and the insertion rate (at most
// 2*DEPTH+4 cycles per central point, handshake included).
module tb_pruning_module;
  import lpcn_pkg::*;
  localparam int unsigned M = N_CENTRAL, D = SOCT_DEPTH;
  localparam int unsigned NODES = M + 1, PAY_W = $clog2(M + 1), SEQ_W = $clog2(M);
  localparam int unsigned PTR_W = $clog2(NODES), NODE_W = 8 * PTR_W, G = 1 << D;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, c_valid = 0, c_ready, busy;
  logic [SEQ_W-1:0] c_seq = '0; xyz_t c_pos = '0;
  logic [D:0][PTR_W-1:0] raddr, raddr_b; logic [D-1:0][NODE_W-1:0] rnode, rnode_b; logic [PAY_W-1:0] rleaf, rleaf_b;
  logic [D-1:0] we_node; logic [D-1:0][PTR_W-1:0] waddr_node; logic [D-1:0][NODE_W-1:0] wdata_node;
  logic we_leaf; logic [PTR_W-1:0] waddr_leaf; logic [PAY_W-1:0] wdata_leaf;
  logic lk_we, vx_we; logic [SEQ_W-1:0] lk_addr, vx_addr; logic [PAY_W-1:0] lk_data; logic [3*D-1:0] vx_data;

  pruning_module dut (.clk, .rst_n, .clear, .c_valid, .c_ready, .c_seq, .c_pos,
    .raddr, .rnode, .rleaf, .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf,
    .lk_we, .lk_addr, .lk_data, .vx_we, .vx_addr, .vx_data, .busy);
  octree_buffer #(.DEPTH(D), .NODES(NODES), .PAY_W(PAY_W)) u_buf (
    .clk, .raddr_a(raddr), .rnode_a(rnode), .rleaf_a(rleaf), .raddr_b, .rnode_b, .rleaf_b,
    .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf);
  logic q_valid = 0, r_valid, r_hit; logic [3*D-1:0] q_key = '0;
  logic [PTR_W-1:0] r_leaf; logic [PAY_W-1:0] r_payload; logic [15:0] r_tag;
  ose #(.DEPTH(D), .NODES(NODES), .PAY_W(PAY_W)) u_ose (.clk, .rst_n, .q_valid, .q_key, .q_tag(16'(q_key)),
    .raddr(raddr_b), .rnode(rnode_b), .rleaf(rleaf_b), .r_valid, .r_hit, .r_leaf, .r_payload, .r_tag);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int link [M];
  int vox [M];
  int vxrec [M];
  always @(negedge clk) begin   // sampled mid-cycle, away from the edge
    if (lk_we) link[lk_addr] = int'(lk_data);
    if (vx_we) vxrec[vx_addr] = int'(vx_data);
  end

  function automatic int key_of(xyz_t p);
    logic [3*COORD_W-1:0] m;
    m = morton(p, D);
    return int'(m[3*D-1:0]);
  endfunction

  int members [int][$];
  int maxcyc = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < int'(M); s++) begin
      xyz_t p;
      int t0;
      // half of the points land in a small corner so that voxels are shared
      p = '{x: COORD_W'($urandom), y: COORD_W'($urandom), z: COORD_W'($urandom)};
      if (s % 2 == 0) begin p.x[COORD_W-1 -: 2] = 0; p.y[COORD_W-1 -: 2] = 0; end
      vox[s] = key_of(p);
      members[vox[s]].push_back(s);
      c_valid = 1; c_seq = SEQ_W'(s); c_pos = p; t0 = $time;
      #1;
      while (!c_ready) @(negedge clk);
      @(negedge clk);
      c_valid = 0;
      while (busy) @(negedge clk);
      if (($time - t0) / 10 > maxcyc) maxcyc = ($time - t0) / 10;
    end
    check(maxcyc <= int'(2 * D + 4), $sformatf("insertion took %0d cycles", maxcyc));
    // voxel coordinates are {x,y,z} top bits; compare with the Morton code
    for (int s = 0; s < int'(M); s++) begin
      logic [3*D-1:0] vxd;
      logic [3*D-1:0] kk;
      vxd = (3*D)'(vxrec[s]);
      for (int l = 0; l < int'(D); l++)
        kk[3*(int'(D)-1-l) +: 3] = {vxd[3*D-1-l], vxd[2*D-1-l], vxd[D-1-l]};
      check(int'(kk) == vox[s], $sformatf("voxel coordinates of point %0d", s));
    end
    for (int k = 0; k < int'(G * G * G); k++) begin
      @(negedge clk); q_valid = 1; q_key = (3*D)'(k);
      @(negedge clk); q_valid = 0;
      while (!r_valid) @(negedge clk);
      if (members.exists(k)) begin
        int got [$];
        int ptr;
        check(r_hit, $sformatf("occupied voxel %0d not found", k));
        ptr = int'(r_payload);
        got.delete();
        while (ptr != 0 && got.size() <= int'(M)) begin got.push_back(ptr - 1); ptr = link[ptr - 1]; end
        got.sort();
        check(got == members[k], $sformatf("voxel %0d list has %0d points, expected %0d", k, got.size(), members[k].size()));
      end else check(!r_hit, $sformatf("empty voxel %0d found", k));
    end
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
