// min_tree: comparator tree returning the minimum of N values and its index.
//
// A balanced binary tree of compare-select nodes, ceil(log2 N) levels deep,
// purely combinational. On equal values the lower index wins, so the index is
// the first position holding the minimum. Used for the per-pixel minimum
// path cost of each path engine and for the winner-take-all disparity search.
module min_tree #(
  parameter int N     = 64,
  parameter int WIDTH = 16
) (
  input  logic [WIDTH-1:0]         vals [N],
  output logic [WIDTH-1:0]         min_val,
  output logic [$clog2(N)-1:0]     min_idx
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  localparam int NP = 1 << IW;         // padded to a power of two

  logic [WIDTH-1:0] v   [2*NP];
  logic [IW-1:0]    idx [2*NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      v[NP+i]   = (i < N) ? vals[i] : '1;
      idx[NP+i] = IW'(i);
    end
    for (int n = NP-1; n >= 1; n--) begin
      if (v[2*n+1] < v[2*n]) begin
        v[n]   = v[2*n+1];
        idx[n] = idx[2*n+1];
      end else begin
        v[n]   = v[2*n];
        idx[n] = idx[2*n];
      end
    end
    v[0]   = '0;
    idx[0] = '0;
  end

  assign min_val = v[1];
  assign min_idx = idx[1][$clog2(N)-1:0];
endmodule
