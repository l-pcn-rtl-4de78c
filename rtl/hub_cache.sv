// hub_cache: Hub Cache; keeps MLP results of points of the current island
// for reuse by later subsets.
//
// Storage: ENTRIES point slots, each holding TILES column tiles of LANES
// results (one tile = one pass of the systolic array). Slots are handed out
// by the Overlap Detection Module; a slot is written once per tile and never
// replaced inside an island. clear (start of an island) invalidates every
// slot in one cycle. One write and one read per cycle; the read is
// registered (data the cycle after re), and a read of a slot/tile never
// written in this island is flagged by an assertion.
//
// From the paper: a cache of twice the subset size holding Hub-subset results
// and results of newly added points, no replacement within an island, emptied
// between islands. Own choices: slot/tile addressing and the valid bits.
module hub_cache #(
  parameter int unsigned ENTRIES = lpcn_pkg::HUB_ENTRIES,
  parameter int unsigned TILES   = lpcn_pkg::FEAT_OUT / lpcn_pkg::SA_DIM,
  parameter int unsigned LANES   = lpcn_pkg::SA_DIM,
  parameter int unsigned ACC_W   = lpcn_pkg::ACC_W,
  localparam int unsigned SLOT_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned TILE_W = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic                               we,
  input  logic [SLOT_W-1:0]                  wslot,
  input  logic [TILE_W-1:0]                  wtile,
  input  logic signed [LANES-1:0][ACC_W-1:0] wdata,
  input  logic                               re,
  input  logic [SLOT_W-1:0]                  rslot,
  input  logic [TILE_W-1:0]                  rtile,
  output logic signed [LANES-1:0][ACC_W-1:0] rdata
);

  logic [LANES*ACC_W-1:0]   mem [ENTRIES*TILES];
  logic [ENTRIES*TILES-1:0] valid;

  always_ff @(posedge clk) begin
    if (we) mem[int'(wslot) * int'(TILES) + int'(wtile)] <= wdata;
    if (re) rdata <= mem[int'(rslot) * int'(TILES) + int'(rtile)];
  end

  logic armed;   // checks start after reset
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) armed <= 1'b0;
    else        armed <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (clear) valid <= '0;
    else if (we) valid[int'(wslot) * int'(TILES) + int'(wtile)] <= 1'b1;
  end

  a_read_valid: assert property (@(posedge clk)
    (armed && re && !clear) |-> valid[int'(rslot) * int'(TILES) + int'(rtile)])
    else $error("hub cache read of an empty slot");

endmodule
