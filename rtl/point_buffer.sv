// point_buffer: on-chip store of the input point cloud.
//
// Holds N_POINTS entries of point_t (xyz plus extra features). It is loaded
// through a write port before a frame is processed and then serves four kinds
// of reads, all registered (data one cycle after the address):
//   * two wide ports that return LANES consecutive points (one for the
//     Sampling Module, one for the Neighbor Search Module, which run at the
//     same time and each feed LANES distance calculators);
//   * a gather port that returns the points at G arbitrary indices (the
//     positions of one point subset, for overlap detection);
//   * a single-point port used for feature fetching by the FCU.
// The number of wide lanes (16) follows the paper's 16 distance calculators;
// the port arrangement is this implementation's choice. The gather port is a
// G-ported register-file read; a banked memory would take several cycles.
module point_buffer #(
  parameter int unsigned N     = lpcn_pkg::N_POINTS,
  parameter int unsigned LANES = lpcn_pkg::LANES,
  parameter int unsigned G     = lpcn_pkg::K_NEIGH + 1,
  localparam int unsigned IDX_W = $clog2(N),
  localparam int unsigned GRP_W = (N / LANES > 1) ? $clog2(N / LANES) : 1
) (
  input  logic                              clk,
  // load
  input  logic                              we,
  input  logic [IDX_W-1:0]                  waddr,
  input  lpcn_pkg::point_t                  wdata,
  // wide ports (group of LANES consecutive points)
  input  logic [1:0][GRP_W-1:0]             grp_addr,
  output lpcn_pkg::point_t [1:0][LANES-1:0] grp_data,
  // gather port
  input  logic [G-1:0][IDX_W-1:0]           g_addr,
  output lpcn_pkg::point_t [G-1:0]          g_data,
  // single-point port (feature fetching)
  input  logic [IDX_W-1:0]                  f_addr,
  output lpcn_pkg::point_t                  f_data
);
  import lpcn_pkg::*;

  point_t mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < 2; p++)
      for (int l = 0; l < int'(LANES); l++)
        grp_data[p][l] <= mem[int'(grp_addr[p]) * int'(LANES) + l];
    for (int g = 0; g < int'(G); g++) g_data[g] <= mem[g_addr[g]];
    f_data <= mem[f_addr];
  end

endmodule
