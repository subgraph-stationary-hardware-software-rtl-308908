// adder_tree: combinational balanced reduction of N signed W-bit operands.
//
// Operands are added pairwise level by level (a binary tree of depth
// ceil(log2 N)); the caller sizes W to hold the full sum. Used inside each
// dot-product engine and across the C_P columns of an array row.
module adder_tree #(
  parameter int unsigned N = 9,
  parameter int unsigned W = 20
) (
  input  logic signed [W-1:0] in [N],
  output logic signed [W-1:0] sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned P = 1 << LEVELS;

  logic signed [W-1:0] lvl [LEVELS+1][P];

  always_comb begin
    for (int i = 0; i < P; i++)
      lvl[0][i] = (i < N) ? in[i] : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < P; i++)
        lvl[l][i] = (i < (P >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
    sum = lvl[LEVELS][0];
  end
endmodule
