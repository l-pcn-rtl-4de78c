// max_pool: Pooling Layer; element-wise running maximum over the points of a
// subset, followed by ReLU.
//
// clear starts a new vector; each cycle with in_valid high folds in one
// LANES-wide vector. out = max(0, running maximum) is valid from the cycle
// after the last input. The first input after clear is taken as is.
//
// From the paper: the per-subset results are aggregated by max pooling.
// Own choices: ReLU placed after the pooling (max and ReLU commute, so this
// equals pooling activated results), lane count equal to the array width.
module max_pool #(
  parameter int unsigned LANES = lpcn_pkg::SA_DIM,
  parameter int unsigned ACC_W = lpcn_pkg::ACC_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  input  logic                              in_valid,
  input  logic signed [LANES-1:0][ACC_W-1:0] in_vec,
  output logic signed [LANES-1:0][ACC_W-1:0] out
);

  logic signed [LANES-1:0][ACC_W-1:0] mx;
  logic                               empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mx    <= '0;
      empty <= 1'b1;
    end else if (clear) begin
      empty <= 1'b1;
    end else if (in_valid) begin
      empty <= 1'b0;
      for (int l = 0; l < int'(LANES); l++)
        if (empty || $signed(in_vec[l]) > $signed(mx[l])) mx[l] <= in_vec[l];
    end
  end

  always_comb
    for (int l = 0; l < int'(LANES); l++)
      out[l] = ($signed(mx[l]) > 0) ? mx[l] : '0;

endmodule
