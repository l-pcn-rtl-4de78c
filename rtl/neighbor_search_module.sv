// neighbor_search_module: Neighbor Search Module of the Data Structuring Unit.
//
// For every central point it gathers the K nearest input points (squared
// Euclidean distance, exact; ties go to the lower point index) and stores the
// resulting point subset, nearest first, in the subset buffer under the
// central point's sequence number. The central point is its own nearest
// neighbour, so it is always member 0 unless another point shares its
// position.
//
// Datapath: LANES distance calculators work on LANES consecutive points per
// cycle. Two groups form a batch of 2*LANES = 32 (distance, index) keys. One
// 32-way bitonic sorter is used twice per batch: first to sort the batch, then
// to sort the element-wise minimum of the current best list (ascending) and
// the sorted batch reversed, which is a bitonic sequence holding exactly the
// 32 smallest keys of both (the bitonic-merge property).
//
// Interface: central points arrive on a valid/ready stream (seq, idx, pos);
// a point is accepted only when the previous one is finished. The subset
// buffer has a registered read port (rd_seq -> rd_center, rd_ids).
// Timing: 5 cycles per batch of 32 points, N/32 batches per central point.
//
// From the paper: 16 parallel distance calculators and a 32-way bitonic
// sorter (the mapping unit the prototype borrows from an accurate-search
// accelerator), K = 32. Own choices: the batch/merge schedule, tie rule and
// buffer layout. The sorter sorts as many keys as a subset holds, so K must
// equal 2*LANES.
module neighbor_search_module #(
  parameter int unsigned N     = lpcn_pkg::N_POINTS,
  parameter int unsigned M     = lpcn_pkg::N_CENTRAL,
  parameter int unsigned K     = lpcn_pkg::K_NEIGH,
  parameter int unsigned LANES = lpcn_pkg::LANES,
  localparam int unsigned IDX_W = $clog2(N),
  localparam int unsigned SEQ_W = $clog2(M),
  localparam int unsigned GRP_W = (N / LANES > 1) ? $clog2(N / LANES) : 1,
  localparam int unsigned D_W   = 2 * lpcn_pkg::COORD_W + 2,
  localparam int unsigned KEY_W = D_W + IDX_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // central point stream
  input  logic                          c_valid,
  output logic                          c_ready,
  input  logic [SEQ_W-1:0]              c_seq,
  input  logic [IDX_W-1:0]              c_idx,
  input  lpcn_pkg::xyz_t                c_pos,
  // point buffer wide port
  output logic [GRP_W-1:0]              grp_addr,
  input  lpcn_pkg::point_t [LANES-1:0]  grp_data,
  // subset buffer read port
  input  logic [SEQ_W-1:0]              rd_seq,
  output logic [IDX_W-1:0]              rd_center,
  output logic [K-1:0][IDX_W-1:0]       rd_ids,
  // one pulse per stored subset
  output logic                          subset_done
);
  import lpcn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_RD0, S_RD1, S_CAP, S_SORT, S_MERGE, S_STORE} state_e;
  state_e state;

  logic [SEQ_W-1:0]          seq_q;
  logic [IDX_W-1:0]          idx_q;
  xyz_t                      pos_q;
  logic [GRP_W-1:0]          grp;
  logic [K-1:0][KEY_W-1:0]   batch, best, sort_in, sort_out;

  logic [IDX_W-1:0]          center_mem [M];
  logic [K-1:0][IDX_W-1:0]   ids_mem [M];

  bitonic_sorter #(.N(K), .KEY_W(KEY_W)) u_sorter (.in_keys(sort_in), .out_keys(sort_out));

  assign c_ready  = (state == S_IDLE);
  assign grp_addr = grp;

  // distance keys of the group on grp_data
  logic [LANES-1:0][KEY_W-1:0] lane_key;
  logic [GRP_W-1:0]            data_grp;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++)
      lane_key[l] = {sqdist(grp_data[l].pos, pos_q), IDX_W'(int'(data_grp) * int'(LANES) + l)};
  end

  always_comb begin
    if (state == S_MERGE) begin
      for (int i = 0; i < int'(K); i++)
        sort_in[i] = (best[i] < batch[K-1-i]) ? best[i] : batch[K-1-i];
    end else begin
      sort_in = batch;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_STORE) begin
      center_mem[seq_q] <= idx_q;
      for (int i = 0; i < int'(K); i++) ids_mem[seq_q][i] <= best[i][IDX_W-1:0];
    end
    rd_center <= center_mem[rd_seq];
    rd_ids    <= ids_mem[rd_seq];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      grp         <= '0;
      data_grp    <= '0;
      seq_q       <= '0;
      idx_q       <= '0;
      pos_q       <= '0;
      best        <= '1;
      batch       <= '1;
      subset_done <= 1'b0;
    end else begin
      subset_done <= 1'b0;
      data_grp    <= grp;
      unique case (state)
        S_IDLE: if (c_valid) begin
          seq_q <= c_seq;
          idx_q <= c_idx;
          pos_q <= c_pos;
          best  <= '1;
          grp   <= '0;
          state <= S_RD0;
        end
        S_RD0: begin                       // group 2b addressed
          grp   <= grp + 1'b1;
          state <= S_RD1;
        end
        S_RD1: begin                       // group 2b on the bus, 2b+1 addressed
          batch[LANES-1:0] <= lane_key;
          state <= S_CAP;
        end
        S_CAP: begin                       // group 2b+1 on the bus
          batch[K-1:LANES] <= lane_key;
          state <= S_SORT;
        end
        S_SORT: begin
          batch <= sort_out;
          state <= S_MERGE;
        end
        S_MERGE: begin
          best <= sort_out;
          if (int'(grp) == int'(N / LANES) - 1) begin
            state <= S_STORE;
          end else begin
            grp   <= grp + 1'b1;
            state <= S_RD0;
          end
        end
        S_STORE: begin
          subset_done <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
