// tb_octree_buffer: self-checking test of the per-level octree node memory.
// Writes random nodes and leaves through the write port and reads them back
// through both read ports, checking the one-cycle read latency and that a
// write to one level leaves the other levels alone.
module tb_octree_buffer;
  localparam int unsigned DEPTH = 3;
  localparam int unsigned NODES = 32;
  localparam int unsigned PAY_W = 9;
  localparam int unsigned PTR_W = $clog2(NODES);
  localparam int unsigned NODE_W = 8 * PTR_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [DEPTH:0][PTR_W-1:0]    raddr_a, raddr_b;
  logic [DEPTH-1:0][NODE_W-1:0] rnode_a, rnode_b;
  logic [PAY_W-1:0]             rleaf_a, rleaf_b;
  logic [DEPTH-1:0]             we_node = '0;
  logic [DEPTH-1:0][PTR_W-1:0]  waddr_node;
  logic [DEPTH-1:0][NODE_W-1:0] wdata_node;
  logic we_leaf = 0; logic [PTR_W-1:0] waddr_leaf; logic [PAY_W-1:0] wdata_leaf;
  octree_buffer #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NODE_W-1:0] ref_node [DEPTH][NODES];
  logic [PAY_W-1:0]  ref_leaf [NODES];

  initial begin
    // fill every entry, one level per write enable, different data per level
    for (int a = 0; a < int'(NODES); a++) begin
      for (int l = 0; l < int'(DEPTH); l++) begin
        ref_node[l][a] = {$urandom, $urandom};
        waddr_node[l] <= PTR_W'(a);
        wdata_node[l] <= ref_node[l][a];
      end
      ref_leaf[a] = PAY_W'($urandom);
      we_node <= '1; we_leaf <= 1; waddr_leaf <= PTR_W'(a); wdata_leaf <= ref_leaf[a];
      @(posedge clk);
    end
    we_node <= '0; we_leaf <= 0;
    // overwrite level 1 only at a few addresses
    for (int n = 0; n < 8; n++) begin
      int a; a = $urandom_range(NODES - 1);
      ref_node[1][a] = {$urandom, $urandom};
      we_node <= 3'b010; waddr_node[1] <= PTR_W'(a); wdata_node[1] <= ref_node[1][a];
      @(posedge clk);
    end
    we_node <= '0;
    // random reads on both ports
    for (int n = 0; n < 200; n++) begin
      logic [DEPTH:0][PTR_W-1:0] aa, ab;
      aa = {$urandom, $urandom}; ab = {$urandom, $urandom};
      raddr_a <= aa; raddr_b <= ab;
      @(posedge clk);
      #1;
      for (int l = 0; l < int'(DEPTH); l++) begin
        check(rnode_a[l] == ref_node[l][aa[l]], $sformatf("port A level %0d addr %0d", l, aa[l]));
        check(rnode_b[l] == ref_node[l][ab[l]], $sformatf("port B level %0d addr %0d", l, ab[l]));
      end
      check(rleaf_a == ref_leaf[aa[DEPTH]], "port A leaf");
      check(rleaf_b == ref_leaf[ab[DEPTH]], "port B leaf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
