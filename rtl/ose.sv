// ose: Octree-Search Engine (Traversal Module).
//
// Looks up a Morton code in an octree_buffer. The engine is a pipeline with one
// stage per tree level: in stage l the level-l node on the query's path
// arrives from the buffer, the engine picks the child for the octant the key
// names at level l+1 and sends that pointer to the buffer as the next read
// address. A missing child turns the
// query into a miss that still flows to the end, so results leave in query
// order. The key's octant for level l (1..DEPTH) is key[3*(DEPTH-l) +: 3].
//
// Timing: one query per cycle; the result of a query issued in cycle t
// (q_valid high) appears with r_valid high in cycle t+DEPTH. The node read for
// level l+1 is addressed combinationally from the level-l node, so the root
// must not be written in the cycle a query enters. r_hit says the
// leaf exists; r_leaf is its pointer and r_payload its payload. The tag rides
// along unchanged.
//
// From the paper: Morton-code search by tree traversal, pipelined, one engine
// per buffer port. Own choices: pointer format (see octree_buffer) and the
// tag field.
module ose #(
  parameter int unsigned DEPTH = lpcn_pkg::SOCT_DEPTH,
  parameter int unsigned NODES = lpcn_pkg::N_CENTRAL + 1,
  parameter int unsigned PAY_W = 10,
  parameter int unsigned TAG_W = 16,
  localparam int unsigned PTR_W = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          q_valid,
  input  logic [3*DEPTH-1:0]            q_key,
  input  logic [TAG_W-1:0]              q_tag,
  // buffer port
  output logic [DEPTH:0][PTR_W-1:0]     raddr,
  input  logic [DEPTH-1:0][NODE_W-1:0]  rnode,
  input  logic [PAY_W-1:0]              rleaf,
  // result
  output logic                          r_valid,
  output logic                          r_hit,
  output logic [PTR_W-1:0]              r_leaf,
  output logic [PAY_W-1:0]              r_payload,
  output logic [TAG_W-1:0]              r_tag
);

  typedef struct packed {
    logic               valid;
    logic               alive;
    logic [3*DEPTH-1:0] key;
    logic [TAG_W-1:0]   tag;
    logic [PTR_W-1:0]   ptr;
  } stage_t;

  // cur[l]: the query whose level-l node is on rnode[l] this cycle
  // (cur[0] is the incoming query: the root is read at every edge).
  // st[l] (l >= 1) registers the query together with its level-l pointer,
  // which is at the same time the level-l read address.
  stage_t cur [DEPTH+1];
  stage_t nxt [DEPTH+1];
  stage_t st  [DEPTH+1];   // st[0] unused

  always_comb begin
    cur[0] = '{valid: q_valid, alive: 1'b1, key: q_key, tag: q_tag, ptr: '0};
    for (int l = 1; l <= int'(DEPTH); l++) cur[l] = st[l];
    raddr[0] = '0;
    nxt[0]   = '0;
    for (int l = 0; l < int'(DEPTH); l++) begin
      logic [2:0]       oct;
      logic [PTR_W-1:0] child;
      oct   = cur[l].key[3*(int'(DEPTH)-1-l) +: 3];
      child = rnode[l][oct*PTR_W +: PTR_W];
      nxt[l+1]       = cur[l];
      nxt[l+1].ptr   = child;
      nxt[l+1].alive = cur[l].alive && (child != '0);
      raddr[l+1]     = child;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l <= int'(DEPTH); l++) st[l] <= '0;
    end else begin
      st[0] <= '0;
      for (int l = 1; l <= int'(DEPTH); l++) st[l] <= nxt[l];
    end
  end

  assign r_valid   = st[DEPTH].valid;
  assign r_hit     = st[DEPTH].alive;
  assign r_leaf    = st[DEPTH].ptr;
  assign r_tag     = st[DEPTH].tag;
  assign r_payload = rleaf;

endmodule
