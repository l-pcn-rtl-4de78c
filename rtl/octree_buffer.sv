// octree_buffer: hierarchical octree node store (Sampled-Octree Buffer and
// Hub-Octree Buffer).
//
// The tree is kept level by level, one memory per level, so that a pipelined
// search engine can read every level in the same cycle. Level 0 holds the
// root (entry 0). Levels 0..DEPTH-1 hold internal nodes, each eight child
// pointers (one per octant, 0 = no child). Level DEPTH holds the leaves, each a
// PAY_W-bit payload whose meaning belongs to the user (0 = empty). Entry 0 of
// every level below the root is never allocated, so pointer 0 can mean "none".
//
// Ports: two read ports, A and B, each with one address per level and a
// registered read (data one cycle after the address); one write port with one
// write enable per level. A read of an entry written in the same cycle returns
// the old contents.
//
// From the paper: a per-level ("hierarchical") dual-port memory whose ports A
// and B serve two Octree-Search Engines in parallel. Own choices: the
// eight-pointer node format and the uniform NODES entries per level.
module octree_buffer #(
  parameter int unsigned DEPTH = lpcn_pkg::SOCT_DEPTH,
  parameter int unsigned NODES = lpcn_pkg::N_CENTRAL + 1,
  parameter int unsigned PAY_W = 10,
  localparam int unsigned PTR_W = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W
) (
  input  logic                          clk,
  // read port A
  input  logic [DEPTH:0][PTR_W-1:0]     raddr_a,
  output logic [DEPTH-1:0][NODE_W-1:0]  rnode_a,
  output logic [PAY_W-1:0]              rleaf_a,
  // read port B
  input  logic [DEPTH:0][PTR_W-1:0]     raddr_b,
  output logic [DEPTH-1:0][NODE_W-1:0]  rnode_b,
  output logic [PAY_W-1:0]              rleaf_b,
  // write port, one enable per internal level plus the leaf level
  input  logic [DEPTH-1:0]              we_node,
  input  logic [DEPTH-1:0][PTR_W-1:0]   waddr_node,
  input  logic [DEPTH-1:0][NODE_W-1:0]  wdata_node,
  input  logic                          we_leaf,
  input  logic [PTR_W-1:0]              waddr_leaf,
  input  logic [PAY_W-1:0]              wdata_leaf
);

  for (genvar l = 0; l < DEPTH; l++) begin : g_level
    logic [NODE_W-1:0] mem [NODES];
    always_ff @(posedge clk) begin
      if (we_node[l]) mem[waddr_node[l]] <= wdata_node[l];
      rnode_a[l] <= mem[raddr_a[l]];
      rnode_b[l] <= mem[raddr_b[l]];
    end
  end

  logic [PAY_W-1:0] leaf_mem [NODES];
  always_ff @(posedge clk) begin
    if (we_leaf) leaf_mem[waddr_leaf] <= wdata_leaf;
    rleaf_a <= leaf_mem[raddr_a[DEPTH]];
    rleaf_b <= leaf_mem[raddr_b[DEPTH]];
  end

endmodule
