// tb_ose: self-checking test of the Octree-Search Engine.
// Builds a tree of random keys with octree_inserter on port A, then streams
// one query per cycle through the engine on port B (half of them stored keys,
// half random) and compares hit, payload and the DEPTH-cycle latency with a
// reference associative array.
module tb_ose;
  localparam int unsigned DEPTH = 4;
  localparam int unsigned NODES = 64;
  localparam int unsigned PAY_W = 8;
  localparam int unsigned PTR_W = $clog2(NODES);
  localparam int unsigned NODE_W = 8 * PTR_W;
  localparam int NKEYS = 40;
  localparam int NQ = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DEPTH:0][PTR_W-1:0]    raddr_a, raddr_b;
  logic [DEPTH-1:0][NODE_W-1:0] rnode_a, rnode_b;
  logic [PAY_W-1:0]             rleaf_a, rleaf_b;
  logic [DEPTH-1:0]             we_node;
  logic [DEPTH-1:0][PTR_W-1:0]  waddr_node;
  logic [DEPTH-1:0][NODE_W-1:0] wdata_node;
  logic we_leaf; logic [PTR_W-1:0] waddr_leaf; logic [PAY_W-1:0] wdata_leaf;

  octree_buffer #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_buf (.*);

  logic clear = 0, ins_valid = 0, ins_ready, done, full;
  logic [3*DEPTH-1:0] ins_key;
  logic [PAY_W-1:0] ins_payload, old_payload;
  logic [PTR_W-1:0] leaf_ptr;
  octree_inserter #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_ins (
    .clk, .rst_n, .clear, .ins_valid, .ins_ready, .ins_key, .ins_payload, .done,
    .old_payload, .leaf_ptr, .full, .raddr(raddr_a), .rnode(rnode_a), .rleaf(rleaf_a),
    .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf);

  logic q_valid = 0; logic [3*DEPTH-1:0] q_key; logic [15:0] q_tag;
  logic r_valid, r_hit; logic [PTR_W-1:0] r_leaf; logic [PAY_W-1:0] r_payload; logic [15:0] r_tag;
  ose #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W), .TAG_W(16)) dut (
    .clk, .rst_n, .q_valid, .q_key, .q_tag, .raddr(raddr_b), .rnode(rnode_b), .rleaf(rleaf_b),
    .r_valid, .r_hit, .r_leaf, .r_payload, .r_tag);

  int checks = 0, failures = 0;
  int ref_pay [int];
  logic [3*DEPTH-1:0] qk [NQ];
  int issue_cyc [NQ];
  int cyc = 0;
  int nres = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (q_valid) issue_cyc[int'(q_tag)] <= cyc;

  // result monitor
  always @(posedge clk) if (rst_n && r_valid) begin
    int i; i = int'(r_tag);
    check(cyc - issue_cyc[i] == DEPTH, $sformatf("latency %0d for query %0d", cyc - issue_cyc[i], i));
    check(r_hit == ref_pay.exists(int'(qk[i])), $sformatf("hit mismatch key %h", qk[i]));
    if (ref_pay.exists(int'(qk[i])))
      check(int'(r_payload) == ref_pay[int'(qk[i])], $sformatf("payload key %h: %0d vs %0d", qk[i], r_payload, ref_pay[int'(qk[i])]));
    nres++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    for (int k = 0; k < NKEYS; k++) begin
      logic [3*DEPTH-1:0] key;
      do key = (3*DEPTH)'($urandom); while (ref_pay.exists(int'(key)));
      ins_key <= key; ins_payload <= PAY_W'(k + 1); ins_valid <= 1;
      @(posedge clk); ins_valid <= 0;
      while (!done) @(posedge clk);
      check(old_payload == 0 && !full, "fresh insert returned old payload");
      ref_pay[int'(key)] = k + 1;
      @(posedge clk);
    end
    // queries, one per cycle
    for (int i = 0; i < NQ; i++) begin
      int keys[$];
      foreach (ref_pay[k]) keys.push_back(k);
      qk[i] = (i % 2 == 0) ? (3*DEPTH)'(keys[$urandom_range(keys.size()-1)]) : (3*DEPTH)'($urandom);
      q_key <= qk[i]; q_tag <= 16'(i); q_valid <= 1;
      @(posedge clk);
    end
    q_valid <= 0;
    repeat (DEPTH + 4) @(posedge clk);
    check(nres == NQ, $sformatf("got %0d results of %0d", nres, NQ));
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
