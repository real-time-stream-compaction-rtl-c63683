// prefix_sum: inclusive prefix sum over a vector of valid bits.
//
// psum[i] is the number of set bits among valid[0..i]. For the valid pattern
// 1,0,1,1 (port 0 first) it yields 1,1,2,3. The stream compaction cell uses
// these counts to number its valid elements in port order. The block is
// purely combinational and is written as a running sum, which a synthesis
// tool maps onto a carry chain or an adder tree; for the small port counts
// of one cell (2*N_O) this is a short path.
//
// The prefix sum over the valid bits is the paper's; the serial form of
// the adder is this design's choice.
module prefix_sum #(
  parameter int unsigned N  = 4,
  localparam int unsigned SW = $clog2(N + 1)
) (
  input  logic [N-1:0]  valid,
  output logic [SW-1:0] psum [N]
);

  always_comb begin
    logic [SW-1:0] acc;
    acc = '0;
    for (int unsigned i = 0; i < N; i++) begin
      acc     = acc + SW'(valid[i]);
      psum[i] = acc;
    end
  end

endmodule
