// lpcn_top: L-PCN accelerator top level: Data Structuring Unit (point
// buffer, Sampling, Neighbor Search and Pruning Modules), Islandization Unit
// (Partitioning and Overlap Detection Modules) and Feature Computing Unit
// (dataflow controller with systolic array, Hub Cache and pooling).
//
// Operation for one point cloud:
//  1. Load: points are written through p_we/p_addr/p_data, MLP weights
//     through w_we/w_row/w_col/w_data (row = output channel, col = input).
//  2. start. The Sampling Module streams central points (farthest point
//     sampling); each is taken at the same time by the Neighbor Search Module
//     (K nearest points -> subset buffer) and by the Pruning Module (Sampled
//     Octree and per-voxel point lists).
//  3. When every subset is stored, the Partitioning Module picks hubs and
//     builds the Island Lists.
//  4. Island by island, subset by subset (Hub subset first): the subset's
//     member indexes are read, their positions gathered from the point buffer,
//     the Overlap Detection Module marks overlap points and hands out Hub
//     Cache slots, and the dataflow controller computes the subset's pooled
//     feature vector. Each finished subset appears on o_valid for one cycle
//     with its central-point sequence number o_seq (the sampling order),
//     its central point index o_center and o_result (FEAT_OUT values).
//  5. done pulses after the last subset.
// Counters report the mechanisms that were exercised and the cycles spent
// in each phase.
//
// From the paper: the three units, the order DSU -> Islandization -> FCU,
// subset processing in Island-List order with the Hub subset first.
// Own choices: the phases run one after the other (no overlap between
// structuring and computing, nor between overlap detection and computing),
// the load ports and the result port.
module lpcn_top #(
  parameter int unsigned N        = lpcn_pkg::N_POINTS,
  parameter int unsigned M        = lpcn_pkg::N_CENTRAL,
  parameter int unsigned K        = lpcn_pkg::K_NEIGH,
  parameter int unsigned H        = lpcn_pkg::N_CENTRAL / lpcn_pkg::ISLAND_SIZE,
  parameter int unsigned ENTRIES  = lpcn_pkg::HUB_ENTRIES,
  parameter int unsigned FEAT_OUT = lpcn_pkg::FEAT_OUT,
  localparam int unsigned IDX_W   = $clog2(N),
  localparam int unsigned SEQ_W   = $clog2(M),
  localparam int unsigned WR_W    = $clog2(FEAT_OUT),
  localparam int unsigned WC_W    = $clog2(lpcn_pkg::FEAT_IN),
  localparam int unsigned SDEPTH  = lpcn_pkg::SOCT_DEPTH
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // loading
  input  logic                                   p_we,
  input  logic [IDX_W-1:0]                       p_addr,
  input  lpcn_pkg::point_t                       p_data,
  input  logic                                   w_we,
  input  logic [WR_W-1:0]                        w_row,
  input  logic [WC_W-1:0]                        w_col,
  input  logic signed [lpcn_pkg::FEAT_W-1:0]     w_data,
  // run
  input  logic                                   start,
  output logic                                   busy,
  output logic                                   done,
  // results
  output logic                                   o_valid,
  output logic [SEQ_W-1:0]                       o_seq,
  output logic [IDX_W-1:0]                       o_center,
  output logic signed [FEAT_OUT-1:0][lpcn_pkg::ACC_W-1:0] o_result,
  // counters
  output logic [31:0]                            n_hub_subsets,
  output logic [31:0]                            n_overlap,
  output logic [31:0]                            n_inserted,
  output logic [31:0]                            n_cache_full,
  output logic [31:0]                            n_delta,
  output logic [31:0]                            n_computed,
  output logic [31:0]                            n_reused,
  output logic [31:0]                            n_rounds,
  output logic [31:0]                            n_regathered,
  output logic [31:0]                            n_tree_queries,
  output logic [31:0]                            cyc_dsu,
  output logic [31:0]                            cyc_island,
  output logic [31:0]                            cyc_compute
);
  import lpcn_pkg::*;

  localparam int unsigned LANES_T = (K / 2 < LANES) ? K / 2 : LANES;
  localparam int unsigned GRP_W   = (N / LANES_T > 1) ? $clog2(N / LANES_T) : 1;
  localparam int unsigned H_W     = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned NODES   = M + 1;
  localparam int unsigned PTR_W   = $clog2(NODES);
  localparam int unsigned NODE_W  = 8 * PTR_W;
  localparam int unsigned PAY_W   = $clog2(M + 1);
  localparam int unsigned SLOT_W  = $clog2(ENTRIES);

  typedef enum logic [3:0] {T_IDLE, T_CLEAR, T_DSU, T_PART, T_TAKE, T_RD, T_GATHER, T_LATCH,
                            T_ODM, T_ODM_WAIT, T_FCU, T_FCU_WAIT, T_FIN} state_e;
  state_e state;

  // ---------------------------------------------------------------- point buffer
  logic [1:0][GRP_W-1:0]       grp_addr;
  point_t [1:0][LANES_T-1:0]   grp_data;
  logic [K:0][IDX_W-1:0]       g_addr;
  point_t [K:0]                g_data;
  logic [IDX_W-1:0]            f_addr;
  point_t                      f_data;

  point_buffer #(.N(N), .LANES(LANES_T), .G(K + 1)) u_pbuf (
    .clk, .we(p_we), .waddr(p_addr), .wdata(p_data),
    .grp_addr, .grp_data, .g_addr, .g_data, .f_addr, .f_data);

  // ---------------------------------------------------------------- sampling
  logic             s_start, s_valid, s_ready, s_done;
  logic [SEQ_W-1:0] s_seq;
  logic [IDX_W-1:0] s_idx;
  xyz_t             s_pos;
  sampling_module #(.N(N), .M(M), .LANES(LANES_T)) u_samp (
    .clk, .rst_n, .start(s_start), .grp_addr(grp_addr[0]), .grp_data(grp_data[0]),
    .c_valid(s_valid), .c_ready(s_ready), .c_seq(s_seq), .c_idx(s_idx), .c_pos(s_pos),
    .done(s_done));

  // ---------------------------------------------------------------- neighbor search
  logic                    ns_ready, ns_done;
  logic [SEQ_W-1:0]        rd_seq;
  logic [IDX_W-1:0]        rd_center;
  logic [K-1:0][IDX_W-1:0] rd_ids;
  logic                    pr_ready, pr_busy;
  assign s_ready = ns_ready && pr_ready;

  neighbor_search_module #(.N(N), .M(M), .K(K), .LANES(LANES_T)) u_ns (
    .clk, .rst_n, .c_valid(s_valid && pr_ready), .c_ready(ns_ready),
    .c_seq(s_seq), .c_idx(s_idx), .c_pos(s_pos),
    .grp_addr(grp_addr[1]), .grp_data(grp_data[1]),
    .rd_seq, .rd_center, .rd_ids, .subset_done(ns_done));

  // ---------------------------------------------------------------- pruning
  logic [SDEPTH:0][PTR_W-1:0]    pr_raddr;
  logic [SDEPTH-1:0][NODE_W-1:0] pr_rnode;
  logic [PAY_W-1:0]              pr_rleaf;
  logic [SDEPTH-1:0]             pr_we_node;
  logic [SDEPTH-1:0][PTR_W-1:0]  pr_waddr_node;
  logic [SDEPTH-1:0][NODE_W-1:0] pr_wdata_node;
  logic                          pr_we_leaf;
  logic [PTR_W-1:0]              pr_waddr_leaf;
  logic [PAY_W-1:0]              pr_wdata_leaf;
  logic                          lk_we, vx_we;
  logic [SEQ_W-1:0]              lk_addr, vx_addr;
  logic [PAY_W-1:0]              lk_data;
  logic [3*SDEPTH-1:0]           vx_data;

  pruning_module #(.M(M), .DEPTH(SDEPTH)) u_prune (
    .clk, .rst_n, .clear(state == T_CLEAR),
    .c_valid(s_valid && ns_ready), .c_ready(pr_ready), .c_seq(s_seq), .c_pos(s_pos),
    .raddr(pr_raddr), .rnode(pr_rnode), .rleaf(pr_rleaf),
    .we_node(pr_we_node), .waddr_node(pr_waddr_node), .wdata_node(pr_wdata_node),
    .we_leaf(pr_we_leaf), .waddr_leaf(pr_waddr_leaf), .wdata_leaf(pr_wdata_leaf),
    .lk_we, .lk_addr, .lk_data, .vx_we, .vx_addr, .vx_data, .busy(pr_busy));

  // ---------------------------------------------------------------- partitioning
  logic             pt_start, pt_busy, pt_done, i_valid, i_ready, i_first, i_last;
  logic [H_W-1:0]   i_hub;
  logic [SEQ_W-1:0] i_seq;
  logic [H_W:0]     pt_hubs;
  logic [SDEPTH:0]  pt_rounds;
  logic [31:0]      pt_queries, pt_hits, pt_regathered;

  partitioning_module #(.M(M), .H(H), .DEPTH(SDEPTH)) u_part (
    .clk, .rst_n,
    .ext_raddr(pr_raddr), .ext_rnode(pr_rnode), .ext_rleaf(pr_rleaf),
    .ext_we_node(pr_we_node), .ext_waddr_node(pr_waddr_node), .ext_wdata_node(pr_wdata_node),
    .ext_we_leaf(pr_we_leaf), .ext_waddr_leaf(pr_waddr_leaf), .ext_wdata_leaf(pr_wdata_leaf),
    .lk_we, .lk_addr, .lk_data, .vx_we, .vx_addr, .vx_data,
    .start(pt_start), .busy(pt_busy), .done(pt_done),
    .i_valid, .i_ready, .i_hub, .i_seq, .i_first, .i_last,
    .n_hubs(pt_hubs), .n_rounds(pt_rounds), .n_queries(pt_queries), .n_hits(pt_hits),
    .n_regathered(pt_regathered));

  // ---------------------------------------------------------------- overlap detection
  logic                    od_start, od_done, cur_hub;
  xyz_t [K-1:0]            spos;
  xyz_t                    c_pos, hub_pos;
  logic [K-1:0]            overlap, store;
  logic [K-1:0][SLOT_W-1:0] slot;
  logic [31:0]             od_overlap, od_inserted, od_full;

  overlap_detection_module #(.K(K), .ENTRIES(ENTRIES), .DEPTH(COORD_W)) u_odm (
    .clk, .rst_n, .start(od_start), .is_hub(cur_hub), .pos(spos), .done(od_done),
    .overlap, .slot, .store, .n_overlap(od_overlap), .n_inserted(od_inserted), .n_full(od_full));

  // ---------------------------------------------------------------- feature computing
  logic                    fc_start, fc_busy, fc_done;
  logic [K-1:0][IDX_W-1:0] ids;
  logic [31:0]             fc_computed, fc_reused, fc_delta;

  dataflow_controller #(.N(N), .K(K), .FEAT_IN(FEAT_IN), .FEAT_OUT(FEAT_OUT), .SA_DIM(SA_DIM),
                        .ENTRIES(ENTRIES)) u_fcu (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data,
    .start(fc_start), .is_hub(cur_hub), .c_pos, .hub_pos, .ids, .overlap, .slot, .store,
    .f_addr, .f_data, .busy(fc_busy), .done(fc_done), .result(o_result),
    .n_computed(fc_computed), .n_reused(fc_reused), .n_delta(fc_delta));

  // ---------------------------------------------------------------- sequencing
  logic [SEQ_W:0]   n_stored;
  logic             pt_finished;
  logic [SEQ_W-1:0] cur_seq;
  logic [IDX_W-1:0] cur_center;

  assign s_start  = (state == T_CLEAR);
  assign pt_start = (state == T_DSU) && (n_stored == (SEQ_W+1)'(M)) && !pr_busy;
  assign i_ready  = (state == T_TAKE);
  assign od_start = (state == T_ODM);
  assign fc_start = (state == T_FCU);
  assign rd_seq   = cur_seq;
  assign busy     = (state != T_IDLE);
  always_comb begin
    for (int k = 0; k < int'(K); k++) g_addr[k] = ids[k];
    g_addr[K] = cur_center;
  end

  assign n_overlap      = od_overlap;
  assign n_inserted     = od_inserted;
  assign n_cache_full   = od_full;
  assign n_delta        = fc_delta;
  assign n_computed     = fc_computed;
  assign n_reused       = fc_reused;
  assign n_rounds       = 32'(pt_rounds);
  assign n_regathered   = pt_regathered;
  assign n_tree_queries = pt_queries;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; n_stored <= '0; pt_finished <= 1'b0;
      cur_seq <= '0; cur_center <= '0; cur_hub <= 1'b0; ids <= '0;
      spos <= '0; c_pos <= '0; hub_pos <= '0;
      done <= 1'b0; o_valid <= 1'b0; o_seq <= '0; o_center <= '0;
      n_hub_subsets <= '0; cyc_dsu <= '0; cyc_island <= '0; cyc_compute <= '0;
    end else begin
      done    <= 1'b0;
      o_valid <= 1'b0;
      if (ns_done) n_stored <= n_stored + 1'b1;
      if (pt_done) pt_finished <= 1'b1;
      if (state == T_DSU) cyc_dsu <= cyc_dsu + 1;
      if (state == T_PART || state == T_TAKE || (state >= T_RD && state <= T_ODM_WAIT)) cyc_island <= cyc_island + 1;
      if (state == T_FCU || state == T_FCU_WAIT) cyc_compute <= cyc_compute + 1;
      unique case (state)
        T_IDLE: if (start) begin
          n_stored <= '0; pt_finished <= 1'b0; n_hub_subsets <= '0;
          cyc_dsu <= '0; cyc_island <= '0; cyc_compute <= '0;
          state <= T_CLEAR;
        end
        T_CLEAR: state <= T_DSU;
        T_DSU:   if (pt_start) state <= T_PART;
        T_PART:  state <= T_TAKE;
        T_TAKE: begin
          if (i_valid) begin
            cur_seq <= i_seq;
            cur_hub <= i_first;
            if (i_first) n_hub_subsets <= n_hub_subsets + 1;
            state   <= T_RD;
          end else if (pt_finished || pt_done) begin
            state <= T_FIN;
          end
        end
        T_RD: state <= T_GATHER;               // subset buffer read
        T_GATHER: begin                        // positions gathered next
          ids        <= rd_ids;
          cur_center <= rd_center;
          state      <= T_LATCH;
        end
        T_LATCH: state <= T_ODM;               // g_addr -> g_data
        T_ODM: begin
          for (int k = 0; k < int'(K); k++) spos[k] <= g_data[k].pos;
          c_pos <= g_data[K].pos;
          if (cur_hub) hub_pos <= g_data[K].pos;
          state <= T_ODM_WAIT;
        end
        T_ODM_WAIT: if (od_done) state <= T_FCU;
        T_FCU: state <= T_FCU_WAIT;
        T_FCU_WAIT: if (fc_done) begin
          o_valid  <= 1'b1;
          o_seq    <= cur_seq;
          o_center <= cur_center;
          state    <= T_TAKE;
        end
        T_FIN: begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // the Neighbor Search Module sorts 2*LANES keys at a time
  initial assert (K == 2 * LANES_T) else $error("K must be twice the lane count");

endmodule
