// octree_inserter: inserts one Morton code at a time into an octree_buffer
// (the tree-updating step of Hub-based Scheduling, and the builder of the
// Sampled Octree).
//
// Walk: starting at the root, the engine reads the node of the current level
// (one cycle), and if the child for the key's octant exists it descends. If it
// does not, it takes the next free entry of the level below from that level's
// allocation counter, writes the parent back with the new pointer and writes
// the new node as empty in the same cycle (the two sit in different level
// memories). From then on the path is known to be new and no more reads are
// needed. At the leaf it writes ins_payload and returns the payload the leaf
// held before (0 for a new leaf), so a caller can chain entries that share a
// leaf into a list or detect a duplicate.
//
// clear empties the tree in one cycle: it rewinds the allocation counters and
// writes an empty root. Entries of old nodes are not erased; they are
// re-initialised when allocated again.
//
// Interface: ins_valid/ins_ready request, done pulses with old_payload,
// leaf_ptr and full (a level ran out of entries; nothing was written below
// that level). Latency: 2 cycles per existing level, 1 per new level.
// The read port it drives must be its own while it works.
//
// From the paper: the Hub Octree is updated with each new non-overlapping
// point. Own choices: the whole insertion procedure.
module octree_inserter #(
  parameter int unsigned DEPTH = lpcn_pkg::SOCT_DEPTH,
  parameter int unsigned NODES = lpcn_pkg::N_CENTRAL + 1,
  parameter int unsigned PAY_W = 10,
  localparam int unsigned PTR_W = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          ins_valid,
  output logic                          ins_ready,
  input  logic [3*DEPTH-1:0]            ins_key,
  input  logic [PAY_W-1:0]              ins_payload,
  output logic                          done,
  output logic [PAY_W-1:0]              old_payload,
  output logic [PTR_W-1:0]              leaf_ptr,
  output logic                          full,
  // buffer read port
  output logic [DEPTH:0][PTR_W-1:0]     raddr,
  input  logic [DEPTH-1:0][NODE_W-1:0]  rnode,
  input  logic [PAY_W-1:0]              rleaf,
  // buffer write port
  output logic [DEPTH-1:0]              we_node,
  output logic [DEPTH-1:0][PTR_W-1:0]   waddr_node,
  output logic [DEPTH-1:0][NODE_W-1:0]  wdata_node,
  output logic                          we_leaf,
  output logic [PTR_W-1:0]              waddr_leaf,
  output logic [PAY_W-1:0]              wdata_leaf
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_EV} state_e;
  state_e state;

  logic [3*DEPTH-1:0]   key_q;
  logic [PAY_W-1:0]     pay_q;
  logic [$clog2(DEPTH+1)-1:0] lvl;
  logic [PTR_W-1:0]     cur;
  logic                 fresh;
  logic [PTR_W:0]       cnt [DEPTH+1];   // next free entry per level (index 0 unused)

  assign ins_ready = (state == S_IDLE) && !clear;

  // read address: only the level being walked matters
  always_comb begin
    raddr = '0;
    raddr[lvl] = cur;
  end

  // evaluation of the node just read
  logic [NODE_W-1:0] node;
  logic [2:0]        oct;
  logic [PTR_W-1:0]  child;
  always_comb begin
    node  = fresh ? '0 : rnode[(int'(lvl) < int'(DEPTH)) ? lvl : '0];
    oct   = key_q[3*(int'(DEPTH)-1-int'(lvl)) +: 3];
    child = node[oct*PTR_W +: PTR_W];
  end

  logic [NODE_W-1:0] upd;   // node with the new child pointer set
  always_comb begin
    upd = node;
    upd[oct*PTR_W +: PTR_W] = cnt[(int'(lvl) < int'(DEPTH)) ? int'(lvl) + 1 : int'(lvl)][PTR_W-1:0];
  end

  always_comb begin
    we_node    = '0;
    waddr_node = '0;
    wdata_node = '0;
    we_leaf    = 1'b0;
    waddr_leaf = '0;
    wdata_leaf = pay_q;
    if (state == S_IDLE && clear) begin
      we_node[0] = 1'b1;                       // empty root
    end else if (state == S_EV) begin
      if (int'(lvl) == int'(DEPTH)) begin
        we_leaf    = 1'b1;
        waddr_leaf = cur;
      end else if (child == '0 && int'(cnt[lvl+1]) < int'(NODES)) begin
        we_node[lvl]    = 1'b1;
        waddr_node[lvl] = cur;
        wdata_node[lvl] = upd;
        if (int'(lvl) + 1 == int'(DEPTH)) begin
          we_leaf    = 1'b1;
          waddr_leaf = cnt[lvl+1][PTR_W-1:0];
        end else begin
          we_node[lvl+1]    = 1'b1;
          waddr_node[lvl+1] = cnt[lvl+1][PTR_W-1:0];
          wdata_node[lvl+1] = '0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lvl   <= '0;
      cur   <= '0;
      fresh <= 1'b0;
      done  <= 1'b0;
      full  <= 1'b0;
      old_payload <= '0;
      leaf_ptr <= '0;
      key_q <= '0;
      pay_q <= '0;
      for (int l = 0; l <= int'(DEPTH); l++) cnt[l] <= 1;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            for (int l = 0; l <= int'(DEPTH); l++) cnt[l] <= 1;
          end else if (ins_valid) begin
            key_q <= ins_key;
            pay_q <= ins_payload;
            lvl   <= '0;
            cur   <= '0;
            fresh <= 1'b0;
            state <= S_RD;
          end
        end
        S_RD: state <= S_EV;
        S_EV: begin
          if (int'(lvl) == int'(DEPTH)) begin
            old_payload <= fresh ? '0 : rleaf;
            leaf_ptr    <= cur;
            full        <= 1'b0;
            done        <= 1'b1;
            state       <= S_IDLE;
          end else if (child != '0) begin
            cur   <= child;
            lvl   <= lvl + 1'b1;
            state <= S_RD;
          end else if (int'(cnt[lvl+1]) >= int'(NODES)) begin
            full  <= 1'b1;
            done  <= 1'b1;
            old_payload <= '0;
            state <= S_IDLE;
          end else begin
            cnt[lvl+1] <= cnt[lvl+1] + 1'b1;
            cur   <= cnt[lvl+1][PTR_W-1:0];
            lvl   <= lvl + 1'b1;
            fresh <= 1'b1;
            if (int'(lvl) + 1 == int'(DEPTH)) begin
              // new leaf written this cycle
              old_payload <= '0;
              leaf_ptr    <= cnt[lvl+1][PTR_W-1:0];
              full        <= 1'b0;
              done        <= 1'b1;
              state       <= S_IDLE;
            end else begin
              state <= S_EV;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
