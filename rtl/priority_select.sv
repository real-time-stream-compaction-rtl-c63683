// priority_select: K priority encoders over the masked ranks.
//
// Encoder k (k = 0..K-1) compares every rank with k+1 and reports the
// lowest address whose rank matches, with hit[k] set when one exists. As
// ranks are unique among valid elements, addr[k] is the port of the
// (k+1)-th valid element in port order. With ranks 1,0,2,3 and K = 2 the
// encoders return addresses 0 and 2. Combinational.
//
// The comparators "= 1", "= 2" feeding priority encoders are the paper's;
// generalising them to K = N_O encoders and reporting a hit flag are this
// design's choices.
module priority_select #(
  parameter int unsigned N  = 4,
  parameter int unsigned K  = 2,
  localparam int unsigned SW = $clog2(N + 1),
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [SW-1:0] rank [N],
  output logic [AW-1:0] addr [K],
  output logic [K-1:0]  hit
);

  always_comb begin
    for (int unsigned k = 0; k < K; k++) begin
      addr[k] = '0;
      hit[k]  = 1'b0;
      // Scan from the highest port down so the lowest matching port wins.
      for (int i = int'(N) - 1; i >= 0; i--) begin
        if (rank[i] == SW'(k + 1)) begin
          addr[k] = AW'(i);
          hit[k]  = 1'b1;
        end
      end
    end
  end

endmodule
