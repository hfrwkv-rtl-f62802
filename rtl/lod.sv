// lod: leading-one detector by hierarchical binary search (combinational).
//
// For a K-bit word (K a power of two) the search runs log2(K) steps: each step
// tests whether the upper half of the current window holds a one, keeps that
// half and adds its offset to the position, or keeps the lower half. The result
// is the index of the most significant one; 'found' is 0 for an all-zero word
// (the algorithm's return value -1). This is the paper's algorithm as given.
module lod #(
  parameter int unsigned K = 16
) (
  input  logic [K-1:0]         d,
  output logic [$clog2(K)-1:0] pos,
  output logic                 found
);
  localparam int unsigned S = $clog2(K);

  logic [K-1:0] win [S+1];
  logic [S-1:0] p   [S+1];

  always_comb begin
    win[0] = d;
    p[0]   = '0;
    for (int s = 0; s < S; s++) begin
      // window width at this step is K >> s, half is K >> (s+1)
      if (|(win[s] >> (K >> (s + 1)))) begin
        win[s+1] = win[s] >> (K >> (s + 1));
        p[s+1]   = p[s] + S'(K >> (s + 1));
      end else begin
        win[s+1] = win[s] & ((K'(1) << (K >> (s + 1))) - K'(1));
        p[s+1]   = p[s];
      end
    end
    pos   = p[S];
    found = win[S][0];
  end
endmodule
