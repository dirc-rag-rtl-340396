// csa_tree - N-input sign-less carry-save adder (ones counter) of a column.
//
// Adds N one-bit products of a DIRC column in one cycle.  The inputs are
// reduced by layers of 3:2 compressors (full adders applied word-wise: sum =
// a^b^c, carry = majority shifted left) until two words remain, which one
// carry-propagate adder adds.  Purely combinational; the result is 0..N.
// The paper specifies a 128-input sign-less carry-save adder; the tree shape
// is this design's.
module csa_tree #(
  parameter int N = 128,
  parameter int W = $clog2(N + 1)
) (
  input  logic [N-1:0] in_bits,
  output logic [W-1:0] sum
);
  // Number of words after each 3:2 layer.
  function automatic int next_n(input int n);
    return 2 * (n / 3) + (n % 3);
  endfunction

  function automatic int n_layers();
    int n = N, l = 0;
    while (n > 2) begin n = next_n(n); l++; end
    return l;
  endfunction

  localparam int L = n_layers();

  logic [W-1:0] lvl [L+1][N];

  always_comb begin
    int n, m;
    for (int l = 0; l <= L; l++)
      for (int i = 0; i < N; i++) lvl[l][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = W'(in_bits[i]);
    n = N;
    for (int l = 0; l < L; l++) begin
      m = 0;
      for (int g = 0; g < n / 3; g++) begin
        lvl[l+1][m]   = lvl[l][3*g] ^ lvl[l][3*g+1] ^ lvl[l][3*g+2];
        lvl[l+1][m+1] = ((lvl[l][3*g] & lvl[l][3*g+1]) | (lvl[l][3*g] & lvl[l][3*g+2]) |
                         (lvl[l][3*g+1] & lvl[l][3*g+2])) << 1;
        m += 2;
      end
      for (int r = 0; r < n % 3; r++) begin
        lvl[l+1][m] = lvl[l][3*(n/3) + r];
        m++;
      end
      n = m;
    end
  end

  generate
    if (N == 1) begin : g_one
      assign sum = lvl[L][0];
    end else begin : g_cpa
      assign sum = lvl[L][0] + lvl[L][1];
    end
  endgenerate

endmodule
