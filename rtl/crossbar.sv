// crossbar: N_IN to N_OUT data crossbar.
//
// Output j carries in_data[sel[j]] and is valid when sel_valid[j] is set;
// an output that is not valid drives zero data. In the stream compaction
// cell N_IN = 2*N_O and N_OUT = N_O, so every output is one 2*N_O-to-1
// multiplexer. Combinational.
//
// The 2*N_O -> N_O crossbar configured by the selected addresses is the
// paper's; driving zero on idle outputs is this design's choice.
module crossbar #(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 2,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic [WIDTH-1:0] in_data   [N_IN],
  input  logic [AW-1:0]    sel       [N_OUT],
  input  logic [N_OUT-1:0] sel_valid,
  output logic [WIDTH-1:0] out_data  [N_OUT],
  output logic [N_OUT-1:0] out_valid
);

  always_comb begin
    for (int unsigned j = 0; j < N_OUT; j++) begin
      out_valid[j] = sel_valid[j];
      out_data[j]  = sel_valid[j] ? in_data[sel[j]] : '0;
    end
  end

endmodule
