// pruning_module: Pruning Module of the Data Structuring Unit; builds the
// Sampled Octree.
//
// The Sampled Octree keeps only the voxels that hold at least one central
// point. This module produces it directly from the stream of central points
// leaving the Sampling Module: for each central point it inserts the voxel's
// Morton code (top DEPTH bits of each coordinate) into the Sampled-Octree
// Buffer through an octree_inserter. The leaf payload is the head of the list
// of central points in that voxel (sequence number + 1, 0 = empty); the
// inserter returns the previous head, which the module writes as the new
// point's link, so every leaf carries a linked list of its central points.
// It also records each central point's voxel coordinates.
//
// Interface: clear empties the tree at the start of a frame; central points
// arrive on a valid/ready stream; the buffer port and the link and voxel
// write ports go to the Partitioning Module, which owns those memories.
// Timing: about 2*DEPTH cycles per central point.
//
// From the paper: the Sampled Octree is the Input Octree with the nodes that
// hold no central point cut off. Own choice: the same tree is obtained by
// inserting the central points into an empty tree, so the Input Octree itself
// is not needed here; the per-leaf point lists are this implementation's.
module pruning_module #(
  parameter int unsigned M     = lpcn_pkg::N_CENTRAL,
  parameter int unsigned DEPTH = lpcn_pkg::SOCT_DEPTH,
  localparam int unsigned NODES  = M + 1,
  localparam int unsigned PAY_W  = $clog2(M + 1),
  localparam int unsigned SEQ_W  = $clog2(M),
  localparam int unsigned PTR_W  = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  // central point stream
  input  logic                          c_valid,
  output logic                          c_ready,
  input  logic [SEQ_W-1:0]              c_seq,
  input  lpcn_pkg::xyz_t                c_pos,
  // Sampled-Octree Buffer port
  output logic [DEPTH:0][PTR_W-1:0]     raddr,
  input  logic [DEPTH-1:0][NODE_W-1:0]  rnode,
  input  logic [PAY_W-1:0]              rleaf,
  output logic [DEPTH-1:0]              we_node,
  output logic [DEPTH-1:0][PTR_W-1:0]   waddr_node,
  output logic [DEPTH-1:0][NODE_W-1:0]  wdata_node,
  output logic                          we_leaf,
  output logic [PTR_W-1:0]              waddr_leaf,
  output logic [PAY_W-1:0]              wdata_leaf,
  // voxel-list link and voxel coordinate writes
  output logic                          lk_we,
  output logic [SEQ_W-1:0]              lk_addr,
  output logic [PAY_W-1:0]              lk_data,
  output logic                          vx_we,
  output logic [SEQ_W-1:0]              vx_addr,
  output logic [3*DEPTH-1:0]            vx_data,
  output logic                          busy
);
  import lpcn_pkg::*;

  logic ins_ready, done, full, waiting;
  logic [PAY_W-1:0] old_payload;
  logic [PTR_W-1:0] leaf_ptr;
  logic [SEQ_W-1:0] seq_q;
  logic [3*DEPTH-1:0] key;

  logic [3*COORD_W-1:0] mfull;
  assign mfull   = morton(c_pos, DEPTH);
  assign key     = mfull[3*DEPTH-1:0];
  assign c_ready = ins_ready && !waiting && !clear;
  assign busy    = waiting;

  octree_inserter #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_ins (
    .clk, .rst_n, .clear,
    .ins_valid(c_valid && c_ready), .ins_ready, .ins_key(key),
    .ins_payload(PAY_W'(c_seq) + 1'b1),
    .done, .old_payload, .leaf_ptr, .full,
    .raddr, .rnode, .rleaf, .we_node, .waddr_node, .wdata_node,
    .we_leaf, .waddr_leaf, .wdata_leaf);

  assign vx_we   = c_valid && c_ready;
  assign vx_addr = c_seq;
  assign vx_data = {c_pos.x[COORD_W-1 -: DEPTH], c_pos.y[COORD_W-1 -: DEPTH], c_pos.z[COORD_W-1 -: DEPTH]};

  assign lk_we   = done && waiting;
  assign lk_addr = seq_q;
  assign lk_data = old_payload;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
      seq_q   <= '0;
    end else if (c_valid && c_ready) begin
      waiting <= 1'b1;
      seq_q   <= c_seq;
    end else if (done) begin
      waiting <= 1'b0;
    end
  end

  // the tree holds at most M leaves, so no level can run out of entries
  logic armed;   // checks start after reset
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) armed <= 1'b0;
    else        armed <= 1'b1;
  end

  a_no_overflow: assert property (@(posedge clk) (armed && done) |-> !full)
    else $error("sampled octree overflow");

endmodule
