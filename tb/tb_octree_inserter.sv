// tb_octree_inserter: self-checking test of the octree insertion engine.
// Inserts random keys (with repeats) into an octree_buffer and checks that
// the returned old payload is the payload last written for that key (0 for a
// new key), that the same key always lands on the same leaf, that a clear
// empties the tree, and that running out of entries raises full.
module tb_octree_inserter;
  localparam int unsigned DEPTH = 3;
  localparam int unsigned NODES = 16;
  localparam int unsigned PAY_W = 8;
  localparam int unsigned PTR_W = $clog2(NODES);
  localparam int unsigned NODE_W = 8 * PTR_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DEPTH:0][PTR_W-1:0]    raddr_a, raddr_b;
  logic [DEPTH-1:0][NODE_W-1:0] rnode_a, rnode_b;
  logic [PAY_W-1:0]             rleaf_a, rleaf_b;
  logic [DEPTH-1:0]             we_node;
  logic [DEPTH-1:0][PTR_W-1:0]  waddr_node;
  logic [DEPTH-1:0][NODE_W-1:0] wdata_node;
  logic we_leaf; logic [PTR_W-1:0] waddr_leaf; logic [PAY_W-1:0] wdata_leaf;
  assign raddr_b = '0;
  octree_buffer #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_buf (.*);

  logic clear = 0, ins_valid = 0, ins_ready, done, full;
  logic [3*DEPTH-1:0] ins_key;
  logic [PAY_W-1:0] ins_payload, old_payload;
  logic [PTR_W-1:0] leaf_ptr;
  octree_inserter #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) dut (
    .clk, .rst_n, .clear, .ins_valid, .ins_ready, .ins_key, .ins_payload, .done,
    .old_payload, .leaf_ptr, .full, .raddr(raddr_a), .rnode(rnode_a), .rleaf(rleaf_a),
    .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic insert(input logic [3*DEPTH-1:0] k, input logic [PAY_W-1:0] p);
    while (!ins_ready) @(posedge clk);
    ins_key <= k; ins_payload <= p; ins_valid <= 1;
    @(posedge clk); ins_valid <= 0;
    while (!done) @(posedge clk);
  endtask

  int ref_pay [int];
  int ref_leaf [int];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    // keys drawn from a small set so repeats occur and the tree stays within NODES
    for (int n = 0; n < 60; n++) begin
      logic [3*DEPTH-1:0] k;
      logic [PAY_W-1:0] p;
      k = {3'($urandom_range(1)), 3'($urandom_range(2)), 3'($urandom_range(1))};
      p = PAY_W'($urandom_range(1, 255));
      insert(k, p);
      check(!full, "unexpected full");
      check(int'(old_payload) == (ref_pay.exists(int'(k)) ? ref_pay[int'(k)] : 0),
            $sformatf("old payload of key %h: %0d", k, old_payload));
      if (ref_leaf.exists(int'(k)))
        check(int'(leaf_ptr) == ref_leaf[int'(k)], $sformatf("leaf of key %h moved", k));
      ref_pay[int'(k)] = int'(p);
      ref_leaf[int'(k)] = int'(leaf_ptr);
      @(posedge clk);
    end
    // clear: every key is new again
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    foreach (ref_pay[k]) begin
      insert((3*DEPTH)'(k), 8'd1);
      check(old_payload == 0, $sformatf("key %h survived clear", k));
      @(posedge clk);
    end
    // overflow: 16 distinct octants at level 1 are impossible, so use distinct
    // level-3 leaves until the leaf level runs out
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    begin
      int nfull = 0;
      for (int n = 0; n < 24; n++) begin
        insert({3'(n / 8), 3'd0, 3'(n % 8)}, 8'd7);
        if (full) nfull++;
        @(posedge clk);
      end
      check(nfull == 24 - (NODES - 1), $sformatf("full raised %0d times", nfull));
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
