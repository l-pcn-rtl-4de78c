// partitioning_module: Partitioning Module of the Islandization Unit
// (Octree-based Islandization).
//
// Owns the Sampled-Octree Buffer (filled beforehand by the Pruning Module
// through the ext_* port), the per-voxel lists of central points, and the
// Island Lists. After start it runs three phases:
//
//  1. Hub picking. A 16-bit LFSR proposes central points; a proposal becomes a
//     Hub point unless it already is one or its voxel already holds a Hub
//     point. H hubs are taken (fewer if the proposals run out). Each hub opens
//     its island and is its first entry.
//  2. Gathering, in rounds r = 0, 1, 2, ... In round r every hub searches the
//     voxels on the shell of Chebyshev radius r around its own voxel (round 0:
//     its own voxel). Two Octree-Search Engines do this in parallel, engine 0
//     for even hubs on port A and engine 1 for odd hubs on port B, one query
//     per engine per cycle. A voxel found in the tree and not yet gathered is
//     marked gathered and its central points are appended to that hub's
//     Island List by a list walker (one point per cycle). A voxel already
//     gathered, in an earlier round or earlier in the same round, is ignored,
//     so each central point belongs to the nearest hub in rounds. Gathering
//     stops when every central point is in a list.
//  3. Emission. The Island Lists leave one entry per cycle on a valid/ready
//     stream, island by island, hub first, then in the order the entries were
//     gathered (inside to outside), with first/last flags.
//
// From the paper: random Hub picking, round-based adjacent-node gathering on
// the Sampled Octree with two OSEs on ports A/B of a dual-port buffer, the
// nearest-hub (earliest-round) rule, the stop rule, and the Island List with
// the Hub subset in the first row. Own choices: the LFSR, the one-hub-per-
// voxel rule, Chebyshev shells of leaf voxels as the "rounds", the per-voxel
// point lists, the tie rule inside a round, and the list walker/FIFO.
module partitioning_module #(
  parameter int unsigned M         = lpcn_pkg::N_CENTRAL,
  parameter int unsigned H         = lpcn_pkg::N_CENTRAL / lpcn_pkg::ISLAND_SIZE,
  parameter int unsigned DEPTH     = lpcn_pkg::SOCT_DEPTH,
  parameter logic [15:0] SEED      = 16'hACE1,
  localparam int unsigned NODES  = M + 1,
  localparam int unsigned PAY_W  = $clog2(M + 1),
  localparam int unsigned SEQ_W  = $clog2(M),
  localparam int unsigned H_W    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned PTR_W  = $clog2(NODES),
  localparam int unsigned NODE_W = 8 * PTR_W,
  localparam int unsigned VOX_W  = 3 * DEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // Sampled-Octree Buffer access for the Pruning Module (port A, while idle)
  input  logic [DEPTH:0][PTR_W-1:0]     ext_raddr,
  output logic [DEPTH-1:0][NODE_W-1:0]  ext_rnode,
  output logic [PAY_W-1:0]              ext_rleaf,
  input  logic [DEPTH-1:0]              ext_we_node,
  input  logic [DEPTH-1:0][PTR_W-1:0]   ext_waddr_node,
  input  logic [DEPTH-1:0][NODE_W-1:0]  ext_wdata_node,
  input  logic                          ext_we_leaf,
  input  logic [PTR_W-1:0]              ext_waddr_leaf,
  input  logic [PAY_W-1:0]              ext_wdata_leaf,
  input  logic                          lk_we,
  input  logic [SEQ_W-1:0]              lk_addr,
  input  logic [PAY_W-1:0]              lk_data,
  input  logic                          vx_we,
  input  logic [SEQ_W-1:0]              vx_addr,
  input  logic [VOX_W-1:0]              vx_data,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // Island List stream
  output logic                          i_valid,
  input  logic                          i_ready,
  output logic [H_W-1:0]                i_hub,
  output logic [SEQ_W-1:0]              i_seq,
  output logic                          i_first,
  output logic                          i_last,
  // statistics
  output logic [H_W:0]                  n_hubs,
  output logic [DEPTH:0]                n_rounds,
  output logic [31:0]                   n_queries,
  output logic [31:0]                   n_hits,
  output logic [31:0]                   n_regathered
);

  localparam int unsigned GRID    = 1 << DEPTH;
  localparam int unsigned RMAX    = GRID - 1;
  localparam int unsigned FIFO_D  = 16;
  localparam int unsigned TRY_MAX = 64 * H;
  localparam int unsigned OFF_W   = DEPTH + 2;       // signed offsets / cells

  typedef enum logic [2:0] {S_IDLE, S_PICK, S_GATHER, S_DRAIN, S_EMIT} state_e;
  state_e state;

  // ---------------------------------------------------------------- storage
  logic [VOX_W-1:0] cvox  [M];        // voxel of each central point
  logic [PAY_W-1:0] vlink [M];        // next central point in the same voxel
  logic [SEQ_W-1:0] inext [M];        // Island List links
  logic [M-1:0]     is_hub;
  logic [NODES-1:0] gathered;         // per leaf
  logic [SEQ_W-1:0] hub_seq  [H];
  logic [VOX_W-1:0] hub_vox  [H];
  logic [SEQ_W-1:0] ihead    [H];
  logic [SEQ_W-1:0] itail    [H];
  logic [SEQ_W:0]   icnt     [H];
  logic [SEQ_W:0]   assigned;

  always_ff @(posedge clk) begin
    if (lk_we) vlink[lk_addr] <= lk_data;
    if (vx_we) cvox[vx_addr]  <= vx_data;
  end

  function automatic logic [VOX_W-1:0] vox_key(logic [OFF_W-1:0] x, logic [OFF_W-1:0] y, logic [OFF_W-1:0] z);
    logic [VOX_W-1:0] k;
    for (int l = 0; l < int'(DEPTH); l++)
      k[3*(int'(DEPTH)-1-l) +: 3] = {x[DEPTH-1-l], y[DEPTH-1-l], z[DEPTH-1-l]};
    return k;
  endfunction

  // ---------------------------------------------------------------- octree
  logic [DEPTH:0][PTR_W-1:0]    raddr_a, raddr_b, ose_raddr_a;
  logic [DEPTH-1:0][NODE_W-1:0] rnode_a, rnode_b;
  logic [PAY_W-1:0]             rleaf_a, rleaf_b;

  assign raddr_a   = (state == S_IDLE) ? ext_raddr : ose_raddr_a;
  assign ext_rnode = rnode_a;
  assign ext_rleaf = rleaf_a;

  octree_buffer #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W)) u_soct (
    .clk, .raddr_a, .rnode_a, .rleaf_a, .raddr_b, .rnode_b, .rleaf_b,
    .we_node(ext_we_node), .waddr_node(ext_waddr_node), .wdata_node(ext_wdata_node),
    .we_leaf(ext_we_leaf), .waddr_leaf(ext_waddr_leaf), .wdata_leaf(ext_wdata_leaf));

  logic [1:0]             q_valid;
  logic [1:0][VOX_W-1:0]  q_key;
  logic [1:0][H_W-1:0]    q_tag;
  logic [1:0]             r_valid, r_hit;
  logic [1:0][PTR_W-1:0]  r_leaf;
  logic [1:0][PAY_W-1:0]  r_payload;
  logic [1:0][H_W-1:0]    r_tag;

  ose #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W), .TAG_W(H_W)) u_ose1 (
    .clk, .rst_n, .q_valid(q_valid[0]), .q_key(q_key[0]), .q_tag(q_tag[0]),
    .raddr(ose_raddr_a), .rnode(rnode_a), .rleaf(rleaf_a),
    .r_valid(r_valid[0]), .r_hit(r_hit[0]), .r_leaf(r_leaf[0]), .r_payload(r_payload[0]), .r_tag(r_tag[0]));
  ose #(.DEPTH(DEPTH), .NODES(NODES), .PAY_W(PAY_W), .TAG_W(H_W)) u_ose2 (
    .clk, .rst_n, .q_valid(q_valid[1]), .q_key(q_key[1]), .q_tag(q_tag[1]),
    .raddr(raddr_b), .rnode(rnode_b), .rleaf(rleaf_b),
    .r_valid(r_valid[1]), .r_hit(r_hit[1]), .r_leaf(r_leaf[1]), .r_payload(r_payload[1]), .r_tag(r_tag[1]));

  // ---------------------------------------------------------------- picking
  logic [15:0]          lfsr;
  logic [H_W:0]         nh;
  logic [31:0]          tries;
  logic [SEQ_W-1:0]     cand;
  logic                 cand_ok;
  assign cand = lfsr[SEQ_W-1:0];
  always_comb begin
    cand_ok = !is_hub[cand];
    for (int j = 0; j < int'(H); j++)
      if (j < int'(nh) && hub_vox[j] == cvox[cand]) cand_ok = 1'b0;
  end

  // ---------------------------------------------------------------- enumerators
  logic [DEPTH:0]                    rnd;          // current radius
  logic [1:0][H_W:0]                 eh;           // hub handled by each engine
  logic [1:0][OFF_W-1:0]             ox, oy, oz;   // signed offsets
  logic [5:0]                        inflight;
  logic [$clog2(FIFO_D):0]           fcount;
  logic                              stall, all_in;
  logic signed [OFF_W-1:0]           rs;
  assign rs     = OFF_W'(rnd);
  assign all_in = (assigned == (SEQ_W+1)'(M));
  assign stall  = (int'(fcount) + int'(inflight) + 2 > int'(FIFO_D));

  logic [1:0]            e_issue;
  logic [1:0][OFF_W-1:0] cx, cy, cz;
  logic [1:0]            c_in;
  always_comb begin
    for (int e = 0; e < 2; e++) begin
      cx[e] = OFF_W'(hub_vox[eh[e][H_W-1:0]][3*DEPTH-1 -: DEPTH]) + ox[e];
      cy[e] = OFF_W'(hub_vox[eh[e][H_W-1:0]][2*DEPTH-1 -: DEPTH]) + oy[e];
      cz[e] = OFF_W'(hub_vox[eh[e][H_W-1:0]][DEPTH-1 -: DEPTH])   + oz[e];
      c_in[e] = !cx[e][OFF_W-1] && !cy[e][OFF_W-1] && !cz[e][OFF_W-1] &&
                (cx[e] < OFF_W'(GRID)) && (cy[e] < OFF_W'(GRID)) && (cz[e] < OFF_W'(GRID));
      e_issue[e] = (state == S_GATHER) && (eh[e] < nh) && !stall && !all_in;
      q_valid[e] = e_issue[e] && c_in[e];
      q_key[e]   = vox_key(cx[e], cy[e], cz[e]);
      q_tag[e]   = eh[e][H_W-1:0];
    end
  end

  // ---------------------------------------------------------------- result FIFO
  typedef struct packed {
    logic [H_W-1:0]   hub;
    logic [PAY_W-1:0] head;
  } wreq_t;
  wreq_t                     fifo [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] wp, rp;
  logic [1:0]                take;
  always_comb begin
    take[0] = r_valid[0] && r_hit[0] && !gathered[r_leaf[0]];
    take[1] = r_valid[1] && r_hit[1] && !gathered[r_leaf[1]] &&
              !(take[0] && r_leaf[0] == r_leaf[1]);
  end

  // ---------------------------------------------------------------- walker
  logic             walking;
  logic [H_W-1:0]   w_hub;
  logic [PAY_W-1:0] w_ptr;
  logic [SEQ_W-1:0] w_seq;
  logic             pop;
  assign w_seq = SEQ_W'(w_ptr - 1'b1);
  assign pop   = !walking && (fcount != 0);

  // ---------------------------------------------------------------- emission
  logic [H_W:0]     x_hub;
  logic [SEQ_W-1:0] x_cur;
  logic [SEQ_W:0]   x_k;
  assign i_valid = (state == S_EMIT);
  assign i_hub   = x_hub[H_W-1:0];
  assign i_seq   = x_cur;
  assign i_first = (x_k == 0);
  assign i_last  = (x_k + 1 == icnt[x_hub[H_W-1:0]]);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lfsr <= SEED; nh <= '0; tries <= '0; assigned <= '0;
      rnd <= '0; eh <= '0; ox <= '0; oy <= '0; oz <= '0;
      inflight <= '0; fcount <= '0; wp <= '0; rp <= '0;
      walking <= 1'b0; w_hub <= '0; w_ptr <= '0;
      x_hub <= '0; x_cur <= '0; x_k <= '0;
      is_hub <= '0; gathered <= '0;
      done <= 1'b0;
      n_hubs <= '0; n_rounds <= '0; n_queries <= '0; n_hits <= '0; n_regathered <= '0;
    end else begin
      done <= 1'b0;

      // ------------- result collection (any state; only busy in gathering)
      inflight <= inflight + 6'(e_issue[0] && c_in[0]) + 6'(e_issue[1] && c_in[1])
                           - 6'(r_valid[0]) - 6'(r_valid[1]);
      for (int e = 0; e < 2; e++) if (r_valid[e] && r_hit[e]) begin
        n_hits <= n_hits + 1;
        if (!take[e]) n_regathered <= n_regathered + 1;
      end
      if (take[0]) gathered[r_leaf[0]] <= 1'b1;
      if (take[1]) gathered[r_leaf[1]] <= 1'b1;
      begin
        logic [$clog2(FIFO_D)-1:0] w;
        w = wp;
        if (take[0]) begin fifo[w] <= '{hub: r_tag[0], head: r_payload[0]}; w = w + 1'b1; end
        if (take[1]) begin fifo[w] <= '{hub: r_tag[1], head: r_payload[1]}; w = w + 1'b1; end
        wp <= w;
        fcount <= fcount + ($clog2(FIFO_D)+1)'(take[0]) + ($clog2(FIFO_D)+1)'(take[1]) - ($clog2(FIFO_D)+1)'(pop);
      end

      // ------------- list walker
      if (pop) begin
        walking <= 1'b1;
        w_hub   <= fifo[rp].hub;
        w_ptr   <= fifo[rp].head;
        rp      <= rp + 1'b1;
      end else if (walking) begin
        if (!is_hub[w_seq]) begin
          inext[itail[w_hub]] <= w_seq;
          itail[w_hub]        <= w_seq;
          icnt[w_hub]         <= icnt[w_hub] + 1'b1;
          assigned            <= assigned + 1'b1;
        end
        w_ptr <= vlink[w_seq];
        if (vlink[w_seq] == '0) walking <= 1'b0;
      end

      // ------------- enumerators
      n_queries <= n_queries + 32'(q_valid[0]) + 32'(q_valid[1]);
      for (int e = 0; e < 2; e++) if (e_issue[e]) begin
        if ($signed(oz[e]) < rs) begin
          if ($signed(oz[e]) == -rs && ($signed(ox[e]) > -rs) && ($signed(ox[e]) < rs)
              && ($signed(oy[e]) > -rs) && ($signed(oy[e]) < rs))
            oz[e] <= OFF_W'(rs);
          else
            oz[e] <= oz[e] + 1'b1;
        end else begin
          oz[e] <= OFF_W'(-rs);
          if ($signed(oy[e]) < rs) oy[e] <= oy[e] + 1'b1;
          else begin
            oy[e] <= OFF_W'(-rs);
            if ($signed(ox[e]) < rs) ox[e] <= ox[e] + 1'b1;
            else begin
              ox[e] <= OFF_W'(-rs);
              eh[e] <= eh[e] + (H_W+1)'(2);
            end
          end
        end
      end

      unique case (state)
        S_IDLE: if (start) begin
          is_hub <= '0; gathered <= '0; nh <= '0; tries <= '0; assigned <= '0;
          lfsr <= SEED;
          n_queries <= '0; n_hits <= '0; n_regathered <= '0;
          state <= S_PICK;
        end
        S_PICK: begin
          lfsr  <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
          tries <= tries + 1;
          if (cand_ok && int'(cand) < int'(M)) begin
            hub_seq[nh[H_W-1:0]] <= cand;
            hub_vox[nh[H_W-1:0]] <= cvox[cand];
            ihead[nh[H_W-1:0]]   <= cand;
            itail[nh[H_W-1:0]]   <= cand;
            icnt[nh[H_W-1:0]]    <= 1;
            is_hub[cand]         <= 1'b1;
            assigned             <= assigned + 1'b1;
            nh                   <= nh + 1'b1;
          end
          if ((cand_ok && int'(nh) + 1 == int'(H)) || int'(tries) + 1 >= int'(TRY_MAX)) begin
            state <= S_GATHER;
            rnd   <= '0;
            eh[0] <= 0; eh[1] <= 1;
            ox <= '0; oy <= '0; oz <= '0;
          end
        end
        S_GATHER: begin
          n_hubs <= nh;
          if (((eh[0] >= nh) && (eh[1] >= nh) || all_in) && inflight == 0 && fcount == 0 && !walking && !pop) begin
            n_rounds <= rnd + 1'b1;
            if (all_in || int'(rnd) == int'(RMAX)) begin
              state <= S_EMIT;
              x_hub <= '0; x_cur <= ihead[0]; x_k <= '0;
            end else begin
              rnd   <= rnd + 1'b1;
              eh[0] <= 0; eh[1] <= 1;
              ox <= {2{OFF_W'(-(rs + OFF_W'(1)))}}; oy <= {2{OFF_W'(-(rs + OFF_W'(1)))}}; oz <= {2{OFF_W'(-(rs + OFF_W'(1)))}};
            end
          end
        end
        S_EMIT: if (i_ready) begin
          if (i_last) begin
            if (x_hub + 1 == nh) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              x_hub <= x_hub + 1'b1;
              x_cur <= ihead[x_hub[H_W-1:0] + 1'b1];
              x_k   <= '0;
            end
          end else begin
            x_cur <= inext[x_cur];
            x_k   <= x_k + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
