// adder_tree: combinational binary tree summing N signed IN_W-bit values into
// an OUT_W-bit signed result (inputs sign-extended; no overflow when OUT_W
// has at least clog2(N) bits more than IN_W). Level l adds neighbouring pairs
// of level l-1, an odd element passing through, until one value is left.
// Used by the MAC engines.
module adder_tree #(
  parameter int unsigned N     = 9,
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 72
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;

  logic signed [OUT_W-1:0] lvl [LEVELS+1][N];

  always_comb begin
    int unsigned n;
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) lvl[l][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = OUT_W'(in[i]);
    n = N;
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < N; i++) begin
        if (2*i + 1 < n)  lvl[l][i] = lvl[l-1][2*i] + lvl[l-1][2*i+1];
        else if (2*i < n) lvl[l][i] = lvl[l-1][2*i];
      end
      n = (n + 1) / 2;
    end
  end

  assign sum = lvl[LEVELS][0];
endmodule
