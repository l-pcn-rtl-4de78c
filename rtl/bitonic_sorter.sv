// bitonic_sorter: combinational 32-way bitonic sorting network.
//
// Sorts N keys (N a power of two) into ascending order with the classic
// bitonic network: log2(N)*(log2(N)+1)/2 stages of N/2 compare-exchange
// elements. The key is compared as an unsigned number; callers that sort
// (distance, index) pairs put the distance in the upper bits so that ties
// resolve to the lower index and the order is total.
//
// Built as a generate network of compare-exchange elements, purely
// combinational; the user registers around it. The 32-way size
// follows the paper's description of the neighbour-search sorter.
module bitonic_sorter #(
  parameter int unsigned N     = 32,
  parameter int unsigned KEY_W = 32
) (
  input  logic [N-1:0][KEY_W-1:0] in_keys,
  output logic [N-1:0][KEY_W-1:0] out_keys
);

  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned STAGES = LOGN * (LOGN + 1) / 2;

  // st[0] is the input, st[STAGES] the sorted output
  logic [N-1:0][KEY_W-1:0] st [STAGES+1];
  assign st[0]    = in_keys;
  assign out_keys = st[STAGES];

  // merge level kk sorts runs of 2^kk keys; its sub-step jj compares keys
  // 2^jj apart
  for (genvar kk = 1; kk <= LOGN; kk++) begin : g_merge
    for (genvar jj = kk - 1; jj >= 0; jj--) begin : g_step
      localparam int unsigned S = kk * (kk - 1) / 2 + (kk - 1 - jj);
      for (genvar i = 0; i < N; i++) begin : g_cx
        if (((i >> jj) & 1) == 0) begin : g_pair
          localparam int unsigned P  = i + (1 << jj);
          localparam bit          UP = ((i >> kk) & 1) == 0;
          logic swap;
          assign swap = UP ? (st[S][i] > st[S][P]) : (st[S][i] < st[S][P]);
          assign st[S+1][i] = swap ? st[S][P] : st[S][i];
          assign st[S+1][P] = swap ? st[S][i] : st[S][P];
        end
      end
    end
  end

endmodule
