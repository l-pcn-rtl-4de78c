// systolic_array: output-stationary R x C multiply-accumulate array of the
// Feature Computing Unit.
//
// Each cycle with in_valid high the array takes one column of the left
// operand (a_in[r], one value per row = per point) and one row of the right
// operand (b_in[c], one value per column = per output channel), i.e. one step
// k of the dot products. Inputs are skewed inside the array (row r is
// delayed r cycles, column c is delayed c cycles), then a values travel right
// and b values travel down, one PE per cycle, so PE (r, c) sees a[r][k] and
// b[k][c] together and adds their product into its own accumulator.
// clear zeroes every accumulator (it must not coincide with in_valid).
//
// Timing: the accumulators hold the complete result R + C - 1 cycles after the
// edge that took the last input (LATENCY). acc is visible at all times.
//
// From the paper: a 16 x 16 systolic array computing the shared MLP. Own
// choices: output-stationary dataflow, operand and accumulator widths.
module systolic_array #(
  parameter int unsigned R     = lpcn_pkg::SA_DIM,
  parameter int unsigned C     = lpcn_pkg::SA_DIM,
  parameter int unsigned IN_W  = lpcn_pkg::FEAT_W,
  parameter int unsigned ACC_W = lpcn_pkg::ACC_W,
  localparam int unsigned LATENCY = R + C - 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic                               in_valid,
  input  logic signed [R-1:0][IN_W-1:0]      a_in,
  input  logic signed [C-1:0][IN_W-1:0]      b_in,
  output logic signed [R-1:0][C-1:0][ACC_W-1:0] acc
);

  // input skew lines
  logic [IN_W-1:0] a_sk [R];
  logic            v_sk [R];
  logic [IN_W-1:0] b_sk [C];

  for (genvar r = 0; r < R; r++) begin : g_askew
    if (r == 0) begin : g_direct
      assign a_sk[r] = a_in[r];
      assign v_sk[r] = in_valid;
    end else begin : g_delay
      logic [IN_W-1:0] dl [r];
      logic            vl [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin dl[i] <= '0; vl[i] <= 1'b0; end
        end else begin
          dl[0] <= a_in[r];
          vl[0] <= in_valid;
          for (int i = 1; i < r; i++) begin dl[i] <= dl[i-1]; vl[i] <= vl[i-1]; end
        end
      end
      assign a_sk[r] = dl[r-1];
      assign v_sk[r] = vl[r-1];
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_bskew
    if (c == 0) begin : g_direct
      assign b_sk[c] = b_in[c];
    end else begin : g_delay
      logic [IN_W-1:0] dl [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) dl[i] <= '0;
        end else begin
          dl[0] <= b_in[c];
          for (int i = 1; i < c; i++) dl[i] <= dl[i-1];
        end
      end
      assign b_sk[c] = dl[c-1];
    end
  end

  // PE grid: a_q/v_q move right, b_q moves down
  logic [IN_W-1:0] a_q [R][C];
  logic            v_q [R][C];
  logic [IN_W-1:0] b_q [R][C];

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic [IN_W-1:0] a_l, b_u;
      logic            v_l;
      if (c == 0) begin : g_left
        assign a_l = a_sk[r];
        assign v_l = v_sk[r];
      end else begin : g_inner_l
        assign a_l = a_q[r][c-1];
        assign v_l = v_q[r][c-1];
      end
      if (r == 0) begin : g_top
        assign b_u = b_sk[c];
      end else begin : g_inner_u
        assign b_u = b_q[r-1][c];
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_q[r][c] <= '0; v_q[r][c] <= 1'b0; b_q[r][c] <= '0; acc[r][c] <= '0;
        end else begin
          a_q[r][c] <= a_l;
          v_q[r][c] <= v_l;
          b_q[r][c] <= b_u;
          if (clear) acc[r][c] <= '0;
          else if (v_l) acc[r][c] <= acc[r][c] + ACC_W'($signed(a_l) * $signed(b_u));
        end
      end
    end
  end

  logic armed;   // checks start after reset
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) armed <= 1'b0;
    else        armed <= 1'b1;
  end

  a_clear_idle: assert property (@(posedge clk) armed |-> !(clear && in_valid))
    else $error("clear during input");

endmodule
