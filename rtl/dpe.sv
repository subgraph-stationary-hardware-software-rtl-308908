// dpe: dot-product engine of size 9, the basic compute unit of the array.
//
// A 3x3 kernel slice of one input channel is held stationary in nine weight
// registers (loaded with w_load). Each cycle that x_valid is high the nine
// int8 inputs of a 3x3 iAct window are multiplied by the stored weights and
// reduced by an adder tree; the signed sum appears one cycle later on y with
// y_valid. The DPE size of 9 is the paper's; the single pipeline register
// after the adder tree is this design's choice.
module dpe #(
  parameter int unsigned N  = 9,
  parameter int unsigned DW = 8,
  parameter int unsigned OW = 2 * DW + $clog2(N)
) (
  input  logic                 clk,
  input  logic                 w_load,
  input  logic [N*DW-1:0]      w_in,
  input  logic                 x_valid,
  input  logic [N*DW-1:0]      x_in,
  output logic                 y_valid,
  output logic signed [OW-1:0] y
);
  logic [N*DW-1:0] w_q;
  logic signed [OW-1:0] prod [N];
  logic signed [OW-1:0] sum;

  always_ff @(posedge clk)
    if (w_load) w_q <= w_in;

  // nine multipliers followed by a balanced reduction
  always_comb begin
    for (int i = 0; i < N; i++)
      prod[i] = OW'($signed(x_in[i*DW +: DW]) * $signed(w_q[i*DW +: DW]));
  end

  adder_tree #(.N(N), .W(OW)) u_tree (.in(prod), .sum(sum));

  always_ff @(posedge clk) begin
    y_valid <= x_valid;
    if (x_valid) y <= sum;
  end
endmodule
