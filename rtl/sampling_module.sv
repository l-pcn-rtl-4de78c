// sampling_module: Sampling Module of the Data Structuring Unit.
//
// Selects M central points from the N input points by farthest point
// sampling: the first central point is point 0; every following one is the
// point whose distance to the nearest already-selected central point is the
// largest (lowest index on a tie). A register per point keeps that
// nearest-distance (squared Euclidean, exact integer arithmetic). Each pass
// reads the cloud LANES points per cycle from the point buffer, updates the
// LANES distances against the last selected point and reduces them to the
// running farthest candidate.
//
// Interface: start begins a frame. Each selected central point leaves on a
// valid/ready stream as (c_seq = 0..M-1, c_idx = point index, c_pos). done
// pulses after the last one is accepted.
// Timing: N/LANES + 2 cycles per central point, plus the handshake.
//
// From the paper: the module samples the input cloud into central points and
// PCNs typically use farthest point sampling. Own choices: the start point,
// the tie rule and the LANES-wide pass structure.
module sampling_module #(
  parameter int unsigned N     = lpcn_pkg::N_POINTS,
  parameter int unsigned M     = lpcn_pkg::N_CENTRAL,
  parameter int unsigned LANES = lpcn_pkg::LANES,
  localparam int unsigned IDX_W = $clog2(N),
  localparam int unsigned SEQ_W = $clog2(M),
  localparam int unsigned GRP_W = (N / LANES > 1) ? $clog2(N / LANES) : 1,
  localparam int unsigned D_W   = 2 * lpcn_pkg::COORD_W + 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  // point buffer wide port
  output logic [GRP_W-1:0]              grp_addr,
  input  lpcn_pkg::point_t [LANES-1:0]  grp_data,
  // central point stream
  output logic                          c_valid,
  input  logic                          c_ready,
  output logic [SEQ_W-1:0]              c_seq,
  output logic [IDX_W-1:0]              c_idx,
  output lpcn_pkg::xyz_t                c_pos,
  output logic                          done
);
  import lpcn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_FIRST, S_EMIT, S_PASS, S_LAST} state_e;
  state_e state;

  logic [D_W-1:0]   mind [N];
  logic [GRP_W-1:0] issue_grp, data_grp;
  logic             data_vld;
  logic [SEQ_W:0]   nsel;
  xyz_t             last_pos;
  logic [D_W-1:0]   best_d;
  logic [IDX_W-1:0] best_i;
  xyz_t             best_p;
  logic             issuing;

  assign grp_addr = issue_grp;

  // per-lane update and reduction of the group that arrived this cycle
  logic [D_W-1:0]   lane_d [LANES];
  logic [D_W-1:0]   red_d;
  logic [IDX_W-1:0] red_i;
  xyz_t             red_p;
  always_comb begin
    red_d = best_d;
    red_i = best_i;
    red_p = best_p;
    for (int l = 0; l < int'(LANES); l++) begin
      logic [D_W-1:0]   d;
      logic [IDX_W-1:0] idx;
      idx = IDX_W'(int'(data_grp) * int'(LANES) + l);
      d   = sqdist(grp_data[l].pos, last_pos);
      lane_d[l] = (d < mind[idx]) ? d : mind[idx];
      if (lane_d[l] > red_d) begin
        red_d = lane_d[l];
        red_i = idx;
        red_p = grp_data[l].pos;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      issue_grp <= '0;
      data_grp  <= '0;
      data_vld  <= 1'b0;
      issuing   <= 1'b0;
      nsel      <= '0;
      c_valid   <= 1'b0;
      c_seq     <= '0;
      c_idx     <= '0;
      c_pos     <= '0;
      done      <= 1'b0;
      last_pos  <= '0;
      best_d    <= '0;
      best_i    <= '0;
      best_p    <= '0;
    end else begin
      done <= 1'b0;
      // pipeline: address issued in cycle t, data processed in cycle t+1
      data_vld <= issuing;
      data_grp <= issue_grp;
      if (data_vld && state != S_FIRST) begin
        for (int l = 0; l < int'(LANES); l++) mind[int'(data_grp) * int'(LANES) + l] <= lane_d[l];
        best_d <= red_d;
        best_i <= red_i;
        best_p <= red_p;
      end
      unique case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < int'(N); i++) mind[i] <= '1;
          issue_grp <= '0;
          nsel      <= '0;
          state     <= S_FIRST;
        end
        S_FIRST: begin
          // point 0 is read by the first group fetch
          if (data_vld) begin
            c_valid  <= 1'b1;
            c_seq    <= '0;
            c_idx    <= '0;
            c_pos    <= grp_data[0].pos;
            last_pos <= grp_data[0].pos;
            issuing  <= 1'b0;
            state    <= S_EMIT;
          end else begin
            issuing <= 1'b1;
          end
          if (issuing) issuing <= 1'b0;
        end
        S_EMIT: if (c_ready) begin
          c_valid <= 1'b0;
          nsel    <= nsel + 1'b1;
          if (int'(nsel) + 1 == int'(M)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            issue_grp <= '0;
            issuing   <= 1'b1;
            best_d    <= '0;
            best_i    <= '0;
            best_p    <= '0;
            state     <= S_PASS;
          end
        end
        S_PASS: begin
          if (int'(issue_grp) == int'(N / LANES) - 1) begin
            issuing <= 1'b0;
            state   <= S_LAST;
          end else begin
            issue_grp <= issue_grp + 1'b1;
          end
        end
        S_LAST: if (!data_vld) begin
          c_valid  <= 1'b1;
          c_seq    <= SEQ_W'(nsel);
          c_idx    <= best_i;
          c_pos    <= best_p;
          last_pos <= best_p;
          state    <= S_EMIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
