// dataflow_controller: Dataflow Controller with the Feature Computing Unit it
// sequences (systolic array, Hub Cache, Pooling Layer, weight store).
//
// The MLP is one shared linear layer y = W * [p - p_c, f] (FEAT_IN inputs:
// the point's offset from the subset's central point p_c and its extra
// features; FEAT_OUT outputs), followed by max pooling over the K points of
// the subset and ReLU.
//
// Per subset (start; every input is held until done):
//  1. Row building. Points that are not overlap points are the rows to
//     compute; their features are fetched from the point buffer one per
//     cycle (f_addr/f_data, registered read). For a subset that is not a Hub
//     subset, row 0 is the delta row [p_hub - p_c, 0...], where p_hub is the
//     central point of the island's Hub subset.
//  2. For each column tile t of SA_DIM output channels, for each row tile of
//     SA_DIM rows: clear the array, stream FEAT_IN steps, wait the array
//     latency, read the rows out one per cycle. The delta row gives the
//     compensation vector d_t = W_xyz * (p_hub - p_c). Every other row goes to
//     the pooling layer, and if the ODM gave it a slot it is written to the
//     Hub Cache as y - d_t, i.e. relative to p_hub.
//  3. Overlap points of tile t are read from the Hub Cache (one per cycle)
//     and d_t is added back (Result Delta Compensation):
//     W*[p - p_hub, f] + W_xyz*(p_hub - p_c) = W*[p - p_c, f], exactly.
//  4. The tile's pooled, ReLU'd vector goes to result.
// The Hub Cache is emptied when a Hub subset starts (a new island).
//
// Timing per subset: K + 2 cycles of fetching, then per column tile and row
// tile 1 + FEAT_IN + (2*SA_DIM - 1) + rows cycles, plus overlap points + 2
// per column tile.
//
// From the paper: Hub subsets computed in full and cached, other subsets
// compute only non-overlapping points, cached results are fetched and
// delta-compensated, results pooled; a 16x16 array. Own choices: single
// linear layer, the delta row computed on the array, tile order, weight store
// loaded through a port, cache holding pre-activation values.
module dataflow_controller #(
  parameter int unsigned N        = lpcn_pkg::N_POINTS,
  parameter int unsigned K        = lpcn_pkg::K_NEIGH,
  parameter int unsigned FEAT_IN  = lpcn_pkg::FEAT_IN,
  parameter int unsigned FEAT_OUT = lpcn_pkg::FEAT_OUT,
  parameter int unsigned SA_DIM   = lpcn_pkg::SA_DIM,
  parameter int unsigned ENTRIES  = lpcn_pkg::HUB_ENTRIES,
  localparam int unsigned IDX_W   = $clog2(N),
  localparam int unsigned SLOT_W  = $clog2(ENTRIES),
  localparam int unsigned KI_W    = $clog2(K),
  localparam int unsigned TILES   = FEAT_OUT / SA_DIM,
  localparam int unsigned TILE_W  = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned ROWS    = K + 1,
  localparam int unsigned RT      = (ROWS + SA_DIM - 1) / SA_DIM,
  localparam int unsigned ROW_W   = $clog2(ROWS + 1),
  localparam int unsigned WR_W    = $clog2(FEAT_OUT),
  localparam int unsigned WC_W    = (FEAT_IN > 1) ? $clog2(FEAT_IN) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // weight loading
  input  logic                                   w_we,
  input  logic [WR_W-1:0]                        w_row,
  input  logic [WC_W-1:0]                        w_col,
  input  logic signed [lpcn_pkg::FEAT_W-1:0]     w_data,
  // subset
  input  logic                                   start,
  input  logic                                   is_hub,
  input  lpcn_pkg::xyz_t                         c_pos,
  input  lpcn_pkg::xyz_t                         hub_pos,
  input  logic [K-1:0][IDX_W-1:0]                ids,
  input  logic [K-1:0]                           overlap,
  input  logic [K-1:0][SLOT_W-1:0]               slot,
  input  logic [K-1:0]                           store,
  // feature fetching
  output logic [IDX_W-1:0]                       f_addr,
  input  lpcn_pkg::point_t                       f_data,
  // result
  output logic                                   busy,
  output logic                                   done,
  output logic signed [FEAT_OUT-1:0][lpcn_pkg::ACC_W-1:0] result,
  // statistics
  output logic [31:0]                            n_computed,
  output logic [31:0]                            n_reused,
  output logic [31:0]                            n_delta
);
  import lpcn_pkg::*;

  localparam int unsigned LAT = 2 * SA_DIM - 1;

  typedef enum logic [3:0] {S_IDLE, S_FETCH, S_TILE, S_CLR, S_FEED, S_WAIT, S_READ, S_REUSE, S_TOUT} state_e;
  state_e state;

  typedef logic signed [FEAT_IN-1:0][FEAT_W-1:0] row_t;
  typedef logic signed [SA_DIM-1:0][ACC_W-1:0]   vec_t;

  logic signed [FEAT_W-1:0] wmem [FEAT_OUT][FEAT_IN];
  row_t                     rows [ROWS];
  logic [KI_W-1:0]          rpt  [ROWS];
  logic [ROW_W-1:0]         nrows;
  logic                     hub_q;

  always_ff @(posedge clk) if (w_we) wmem[w_row][w_col] <= w_data;

  function automatic logic signed [FEAT_W-1:0] diff(coord_t a, coord_t b);
    return FEAT_W'($signed({1'b0, a}) - $signed({1'b0, b}));
  endfunction

  // ---------------------------------------------------------------- datapath
  logic                               sa_clear, sa_valid;
  logic signed [SA_DIM-1:0][FEAT_W-1:0] a_in, b_in;
  logic signed [SA_DIM-1:0][SA_DIM-1:0][ACC_W-1:0] acc;

  systolic_array #(.R(SA_DIM), .C(SA_DIM), .IN_W(FEAT_W), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .in_valid(sa_valid), .a_in, .b_in, .acc);

  logic  c_we, c_re;
  logic  [SLOT_W-1:0] c_wslot, c_rslot;
  vec_t  c_wdata, c_rdata, cvec;
  logic  [TILE_W-1:0] t;
  hub_cache #(.ENTRIES(ENTRIES), .TILES(TILES), .LANES(SA_DIM), .ACC_W(ACC_W)) u_cache (
    .clk, .rst_n, .clear(start && is_hub && state == S_IDLE),
    .we(c_we), .wslot(c_wslot), .wtile(t), .wdata(c_wdata),
    .re(c_re), .rslot(c_rslot), .rtile(t), .rdata(c_rdata));

  logic p_clear, p_valid;
  vec_t p_in, p_out;
  max_pool #(.LANES(SA_DIM), .ACC_W(ACC_W)) u_pool (
    .clk, .rst_n, .clear(p_clear), .in_valid(p_valid), .in_vec(p_in), .out(p_out));

  // ---------------------------------------------------------------- control
  logic [KI_W:0]              fi;        // fetch / reuse scan index
  logic                       pv;        // fetch or cache read in flight
  logic [KI_W-1:0]            pi;
  logic [$clog2(RT+1)-1:0]    rt;
  logic [$clog2(LAT+FEAT_IN+1)-1:0] cnt;
  logic [ROW_W-1:0]           g;         // global row being read out
  logic                       is_delta;
  vec_t                       v;

  assign busy     = (state != S_IDLE);
  assign g        = ROW_W'(rt * SA_DIM) + ROW_W'(cnt);
  assign is_delta = !hub_q && (g == 0);

  always_comb begin
    f_addr = ids[fi[KI_W-1:0]];
    for (int r = 0; r < int'(SA_DIM); r++) begin
      a_in[r] = '0;
      if (int'(rt) * int'(SA_DIM) + r < int'(nrows) && int'(cnt) < int'(FEAT_IN))
        a_in[r] = rows[int'(rt) * int'(SA_DIM) + r][cnt[WC_W-1:0]];
    end
    for (int c = 0; c < int'(SA_DIM); c++)
      b_in[c] = (int'(cnt) < int'(FEAT_IN)) ? wmem[int'(t) * int'(SA_DIM) + c][cnt[WC_W-1:0]] : '0;
    v = acc[cnt[$clog2(SA_DIM)-1:0]];
    sa_clear = (state == S_CLR);
    sa_valid = (state == S_FEED);
    p_clear  = (state == S_TILE);
    c_re     = (state == S_REUSE) && (fi < (KI_W+1)'(K)) && overlap[fi[KI_W-1:0]];
    c_rslot  = slot[fi[KI_W-1:0]];
    c_we     = (state == S_READ) && !is_delta && store[rpt[g]];
    c_wslot  = slot[rpt[g]];
    for (int l = 0; l < int'(SA_DIM); l++) c_wdata[l] = v[l] - cvec[l];
    p_valid  = ((state == S_READ) && !is_delta) || (state == S_REUSE && pv);
    p_in     = v;
    if (state == S_REUSE)
      for (int l = 0; l < int'(SA_DIM); l++) p_in[l] = c_rdata[l] + cvec[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; hub_q <= 1'b0; nrows <= '0; fi <= '0; pv <= 1'b0; pi <= '0;
      rt <= '0; cnt <= '0; t <= '0; cvec <= '0; done <= 1'b0; result <= '0;
      n_computed <= '0; n_reused <= '0; n_delta <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          hub_q <= is_hub;
          cvec  <= '0;
          fi    <= '0;
          pv    <= 1'b0;
          if (is_hub) nrows <= '0;
          else begin
            rows[0] <= '0;
            rows[0][0] <= diff(hub_pos.x, c_pos.x);
            rows[0][1] <= diff(hub_pos.y, c_pos.y);
            rows[0][2] <= diff(hub_pos.z, c_pos.z);
            nrows   <= 1;
            n_delta <= n_delta + 1;
          end
          state <= S_FETCH;
        end
        S_FETCH: begin
          // issue: one fetch per cycle for points that are computed
          pv <= (fi < (KI_W+1)'(K)) && !overlap[fi[KI_W-1:0]];
          pi <= fi[KI_W-1:0];
          if (fi < (KI_W+1)'(K)) fi <= fi + 1'b1;
          // capture
          if (pv) begin
            row_t rw;
            rw    = '0;
            rw[0] = diff(f_data.pos.x, c_pos.x);
            rw[1] = diff(f_data.pos.y, c_pos.y);
            rw[2] = diff(f_data.pos.z, c_pos.z);
            for (int e = 0; e < int'(N_EXTRA) && e + 3 < int'(FEAT_IN); e++) rw[3+e] = f_data.feat[e];
            rows[nrows] <= rw;
            rpt[nrows]  <= pi;
            nrows       <= nrows + 1'b1;
            n_computed  <= n_computed + 1;
          end
          if (fi == (KI_W+1)'(K) && !pv) begin
            t     <= '0;
            state <= S_TILE;
          end
        end
        S_TILE: begin
          rt    <= '0;
          state <= S_CLR;
        end
        S_CLR: begin
          cnt   <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          if (int'(cnt) + 1 == int'(FEAT_IN)) begin
            cnt   <= '0;
            state <= S_WAIT;
          end else cnt <= cnt + 1'b1;
        end
        S_WAIT: begin
          if (int'(cnt) + 1 == int'(LAT)) begin
            cnt   <= '0;
            state <= S_READ;
          end else cnt <= cnt + 1'b1;
        end
        S_READ: begin
          if (is_delta) cvec <= v;
          if (int'(cnt) + 1 == int'(SA_DIM) || int'(g) + 1 == int'(nrows)) begin
            cnt <= '0;
            if (int'(g) + 1 == int'(nrows)) begin
              fi    <= '0;
              pv    <= 1'b0;
              state <= S_REUSE;
            end else begin
              rt    <= rt + 1'b1;
              state <= S_CLR;
            end
          end else cnt <= cnt + 1'b1;
        end
        S_REUSE: begin
          pv <= c_re;
          if (fi < (KI_W+1)'(K)) fi <= fi + 1'b1;
          if (c_re && t == '0) n_reused <= n_reused + 1;
          if (fi == (KI_W+1)'(K) && !pv) state <= S_TOUT;
        end
        S_TOUT: begin
          result[int'(t) * int'(SA_DIM) +: SA_DIM] <= p_out;
          if (int'(t) + 1 == int'(TILES)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            t     <= t + 1'b1;
            state <= S_TILE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
