// rank_mask: applies the prefix sum to the input mask.
//
// Each valid element keeps its prefix count as its rank (1 for the first
// valid element, 2 for the second, ...); an empty slot gets rank 0 so that
// no priority encoder can pick it. For valid = 1,0,1,1 and prefix sum
// 1,1,2,3 the result is 1,0,2,3. Combinational.
//
// Function and example values follow the paper's figure of the stream
// compaction cell.
module rank_mask #(
  parameter int unsigned N  = 4,
  localparam int unsigned SW = $clog2(N + 1)
) (
  input  logic [N-1:0]  valid,
  input  logic [SW-1:0] psum [N],
  output logic [SW-1:0] rank [N]
);

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      rank[i] = valid[i] ? psum[i] : '0;
  end

endmodule
