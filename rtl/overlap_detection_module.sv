// overlap_detection_module: Overlap Detection Module of the Islandization
// Unit; finds the points of a subset whose MLP results already sit in the
// Hub Cache and hands out cache slots.
//
// It owns the Hub-Octree Buffer, a full-depth octree over point coordinates
// (one leaf per distinct position, DEPTH = coordinate width) whose leaf
// payload is the point's Hub Cache slot + 1. Per subset (start, with
// is_hub and the K point positions):
//  * Hub subset: the tree is emptied and every point is inserted with slot i
//    (i = position in the subset); all points are new and stored.
//  * Other subsets: all K points are searched, two per cycle, by OSE 1 on
//    port A and OSE 2 on port B. A hit is an overlap point; its slot comes
//    from the leaf. Then each non-overlapping point is inserted with the next
//    free slot while slots remain (tree updating); when the cache is full the
//    point is computed but not stored (no replacement inside an island).
// Outputs, valid from done until the next start: overlap[i], slot[i],
// store[i] (write the result to the cache), and counters.
//
// Timing: hub subset about K * (DEPTH + 1) cycles; other subsets
// K/2 + DEPTH cycles of search, then a scan of one point per cycle plus
// about 2 * DEPTH cycles per inserted point.
// Positions inside a frame are assumed distinct (checked by an assertion).
//
// From the paper: Hub Octree built from the Hub subset, overlap detection by
// octree search with two OSEs on a dual-port buffer, Overlap Indexes, tree
// updating with new non-overlapping points while the cache has room. Own
// choices: full-depth tree keyed by position, the slot payload, insertion
// after the search of the whole subset.
module overlap_detection_module #(
  parameter int unsigned K       = lpcn_pkg::K_NEIGH,
  parameter int unsigned ENTRIES = lpcn_pkg::HUB_ENTRIES,
  parameter int unsigned DEPTH   = lpcn_pkg::COORD_W,
  localparam int unsigned NODES  = ENTRIES + 1,
  localparam int unsigned PAY_W  = $clog2(ENTRIES + 1),
  localparam int unsigned SLOT_W = $clog2(ENTRIES),
  localparam int unsigned PTR_W  = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W,
  localparam int unsigned KI_W   = $clog2(K)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          is_hub,
  input  lpcn_pkg::xyz_t [K-1:0]        pos,
  output logic                          done,
  output logic [K-1:0]                  overlap,
  output logic [K-1:0][SLOT_W-1:0]      slot,
  output logic [K-1:0]                  store,
  output logic [31:0]                   n_overlap,
  output logic [31:0]                   n_inserted,
  output logic [31:0]                   n_full
);
  import lpcn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_INS, S_INS_WAIT, S_SEARCH, S_NEXT} state_e;
  state_e state;

  logic [KI_W:0]    idx;      // next point to insert or search
  logic [KI_W:0]    nres;     // search results received
  logic [PAY_W-1:0] nslot;    // slots in use
  logic             hub_q;

  function automatic logic [3*DEPTH-1:0] key_of(xyz_t p);
    logic [3*COORD_W-1:0] m;
    m = morton(p, DEPTH);
    return m[3*DEPTH-1:0];
  endfunction

  // ---------------------------------------------------------------- buffer
  logic [DEPTH:0][PTR_W-1:0]    raddr_a, raddr_b, ose_raddr_a, ins_raddr;
  logic [DEPTH-1:0][NODE_W-1:0] rnode_a, rnode_b;
  logic [PAY_W-1:0]             rleaf_a, rleaf_b;
  logic [DEPTH-1:0]             we_node;
  logic [DEPTH-1:0][PTR_W-1:0]  waddr_node;
  logic [DEPTH-1:0][NODE_W-1:0] wdata_node;
  logic                         we_leaf;
  logic [PTR_W-1:0]             waddr_leaf;
  logic [PAY_W-1:0]             wdata_leaf;

  assign raddr_a = (state == S_SEARCH) ? ose_raddr_a : ins_raddr;

  octree_buffer #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_hoct (
    .clk, .raddr_a, .rnode_a, .rleaf_a, .raddr_b, .rnode_b, .rleaf_b,
    .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf);

  // ---------------------------------------------------------------- inserter
  logic             ins_clear, ins_valid, ins_ready, ins_done, ins_full;
  logic [PAY_W-1:0] ins_old;
  logic [PTR_W-1:0] ins_leaf;
  logic [KI_W-1:0]  ii;
  assign ii        = idx[KI_W-1:0];
  assign ins_clear = (state == S_CLEAR);
  assign ins_valid = (state == S_INS) && (idx < (KI_W+1)'(K)) &&
                     (hub_q || (!overlap[ii] && nslot < PAY_W'(ENTRIES)));

  octree_inserter #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_ins (
    .clk, .rst_n, .clear(ins_clear), .ins_valid, .ins_ready,
    .ins_key(key_of(pos[ii])), .ins_payload(nslot + 1'b1),
    .done(ins_done), .old_payload(ins_old), .leaf_ptr(ins_leaf), .full(ins_full),
    .raddr(ins_raddr), .rnode(rnode_a), .rleaf(rleaf_a),
    .we_node, .waddr_node, .wdata_node, .we_leaf, .waddr_leaf, .wdata_leaf);

  // ---------------------------------------------------------------- searchers
  logic [1:0]             q_valid, r_valid, r_hit;
  logic [1:0][KI_W-1:0]   q_tag, r_tag;
  logic [1:0][PTR_W-1:0]  r_leaf;
  logic [1:0][PAY_W-1:0]  r_payload;
  always_comb
    for (int e = 0; e < 2; e++) begin
      q_valid[e] = (state == S_SEARCH) && (idx + (KI_W+1)'(e) < (KI_W+1)'(K));
      q_tag[e]   = KI_W'(idx + (KI_W+1)'(e));
    end

  ose #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W), .TAG_W(KI_W)) u_ose1 (
    .clk, .rst_n, .q_valid(q_valid[0]), .q_key(key_of(pos[q_tag[0]])), .q_tag(q_tag[0]),
    .raddr(ose_raddr_a), .rnode(rnode_a), .rleaf(rleaf_a),
    .r_valid(r_valid[0]), .r_hit(r_hit[0]), .r_leaf(r_leaf[0]), .r_payload(r_payload[0]), .r_tag(r_tag[0]));
  ose #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W), .TAG_W(KI_W)) u_ose2 (
    .clk, .rst_n, .q_valid(q_valid[1]), .q_key(key_of(pos[q_tag[1]])), .q_tag(q_tag[1]),
    .raddr(raddr_b), .rnode(rnode_b), .rleaf(rleaf_b),
    .r_valid(r_valid[1]), .r_hit(r_hit[1]), .r_leaf(r_leaf[1]), .r_payload(r_payload[1]), .r_tag(r_tag[1]));

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; nres <= '0; nslot <= '0; hub_q <= 1'b0;
      done <= 1'b0; overlap <= '0; slot <= '0; store <= '0;
      n_overlap <= '0; n_inserted <= '0; n_full <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          hub_q   <= is_hub;
          idx     <= '0;
          nres    <= '0;
          overlap <= '0;
          store   <= '0;
          state   <= is_hub ? S_CLEAR : S_SEARCH;
        end
        S_CLEAR: begin
          nslot <= '0;
          state <= S_INS;
        end
        S_SEARCH: begin
          if (idx < (KI_W+1)'(K)) idx <= idx + (KI_W+1)'(2);
          for (int e = 0; e < 2; e++) if (r_valid[e]) begin
            overlap[r_tag[e]] <= r_hit[e];
            slot[r_tag[e]]    <= SLOT_W'(r_payload[e] - 1'b1);
            if (r_hit[e]) n_overlap <= n_overlap + 1;
          end
          if (nres + (KI_W+1)'(r_valid[0]) + (KI_W+1)'(r_valid[1]) == (KI_W+1)'(K)) begin
            idx   <= '0;
            state <= S_INS;
          end
          nres <= nres + (KI_W+1)'(r_valid[0]) + (KI_W+1)'(r_valid[1]);
        end
        S_INS: begin
          if (idx == (KI_W+1)'(K)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (ins_valid) begin
            if (ins_ready) state <= S_INS_WAIT;
          end else begin
            if (!overlap[ii]) n_full <= n_full + 1;   // no room left
            idx <= idx + 1'b1;
          end
        end
        S_INS_WAIT: if (ins_done) begin
          slot[ii]   <= SLOT_W'(nslot);
          store[ii]  <= 1'b1;
          nslot      <= nslot + 1'b1;
          n_inserted <= n_inserted + 1;
          idx        <= idx + 1'b1;
          state      <= S_INS;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic armed;   // checks start after reset
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) armed <= 1'b0;
    else        armed <= 1'b1;
  end

  a_distinct: assert property (@(posedge clk)
    (armed && ins_done) |-> (!ins_full && ins_old == '0))
    else $error("hub octree: repeated position or overflow");

endmodule
