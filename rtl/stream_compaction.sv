// stream_compaction: one cell of the compaction tree, 2*N_O sparse input
// streams in, N_O dense output streams out, three pipeline stages.
//
//   Stage 1  prefetch registers: one element per input stream is held
//            (prefetch_regs), refilled from the input FIFO heads.
//   Stage 2  the valid bits of the prefetch registers form a bitmask; its
//            prefix sum (prefix_sum) is applied to the mask (rank_mask)
//            and N_O priority encoders (priority_select) find the ports of
//            the first N_O valid elements. Those elements leave the
//            prefetch registers; their data and the output-lane mapping
//            are stored in the stage-2 register.
//   Stage 3  the crossbar (crossbar) routes the stored elements to the
//            N_O outputs. The outputs are meant to write straight into
//            FIFOs, whose storage is the register of this stage.
//
// An element at a FIFO head in cycle t is in the prefetch register in t+1,
// in the stage-2 register in t+2 and offered on the outputs in t+2, so it
// is written into the downstream FIFO at the end of t+2: three clock edges
// per cell.
//
// Balancing (BALANCE = 1): the k-th selected element goes to output lane
// (k + rot) mod N_O, and rot advances by the number of elements sent. The
// output lanes thus take turns and stay equally filled even when fewer than
// N_O elements are available per cycle. With BALANCE = 0 the k-th element
// always goes to lane k, as in the paper's figure, where encoder "= 1"
// drives the first crossbar output and "= 2" the second.
//
// Backpressure: each output lane completes its own valid/ready handshake;
// a lane whose element was taken drops out_valid. The cell advances once
// every lane that offers an element is ready (or has already handed it
// over); until then stages 2 and 3 hold and no prefetch register is
// consumed, while empty prefetch registers still fill.
//
// The three stages, prefix sum, mask, priority select and crossbar follow
// the paper. The rotation used for balancing, the all-lanes stall rule
// and the synchronous active-high reset are this design's own choices:
// the paper states that the dense streams are balanced but not how.
module stream_compaction #(
  parameter int unsigned N_O     = 2,
  parameter int unsigned WIDTH   = 32,
  parameter bit          BALANCE = 1'b1,
  localparam int unsigned N  = 2 * N_O,
  localparam int unsigned SW = $clog2(N + 1),
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned RW = (N_O > 1) ? $clog2(N_O) : 1
) (
  input  logic             clk,
  input  logic             rst,
  // 2*N_O input streams (heads of the input FIFOs)
  input  logic [N-1:0]     in_valid,
  output logic [N-1:0]     in_ready,
  input  logic [WIDTH-1:0] in_data  [N],
  // N_O output streams (towards FIFOs)
  output logic [N_O-1:0]   out_valid,
  input  logic [N_O-1:0]   out_ready,
  output logic [WIDTH-1:0] out_data [N_O]
);

  // ---------------- stage 1: prefetch registers ----------------
  logic [N-1:0]     pf_valid;
  logic [WIDTH-1:0] pf_data [N];
  logic [N-1:0]     consume;

  prefetch_regs #(.N(N), .WIDTH(WIDTH)) u_prefetch (
    .clk        (clk),
    .rst        (rst),
    .fifo_valid (in_valid),
    .fifo_ready (in_ready),
    .fifo_data  (in_data),
    .consume    (consume),
    .reg_valid  (pf_valid),
    .reg_data   (pf_data)
  );

  // ---------------- stage 2: prefix sum, mask, priority select ----------------
  logic [SW-1:0] psum [N];
  logic [SW-1:0] rank [N];
  logic [AW-1:0] addr [N_O];
  logic [N_O-1:0] hit;

  prefix_sum #(.N(N)) u_psum (
    .valid (pf_valid),
    .psum  (psum)
  );

  rank_mask #(.N(N)) u_mask (
    .valid (pf_valid),
    .psum  (psum),
    .rank  (rank)
  );

  priority_select #(.N(N), .K(N_O)) u_prio (
    .rank (rank),
    .addr (addr),
    .hit  (hit)
  );

  logic advance;

  // A slot leaves the prefetch registers when one encoder picked it.
  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      consume[i] = advance && pf_valid[i] && (rank[i] <= SW'(N_O));
  end

  // Output-lane mapping, rotated for balancing.
  logic [RW-1:0]  rot;
  logic [AW-1:0]  lane_addr [N_O];
  logic [N_O-1:0] lane_hit;
  logic [RW:0]    n_sent;

  always_comb begin
    n_sent = '0;
    for (int unsigned k = 0; k < N_O; k++)
      n_sent = n_sent + (RW+1)'(hit[k]);
    for (int unsigned j = 0; j < N_O; j++) begin
      logic [RW-1:0] k;
      k = RW'(BALANCE ? ((j + N_O - int'(rot)) % N_O) : j);
      lane_addr[j] = addr[k];
      lane_hit[j]  = hit[k];
    end
  end

  // stage-2 register: data snapshot and crossbar configuration
  logic [WIDTH-1:0] s2_data [N];
  logic [AW-1:0]    s2_sel  [N_O];
  logic [N_O-1:0]   s2_hit;

  always_ff @(posedge clk) begin
    if (rst) begin
      s2_hit <= '0;
      rot    <= '0;
    end else if (advance) begin
      s2_hit <= lane_hit;
      if (BALANCE && N_O > 1)
        rot <= RW'((int'(rot) + int'(n_sent)) % N_O);
    end else begin
      // Lanes whose element was taken stop offering it while the others wait.
      s2_hit <= s2_hit & ~out_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      s2_data <= pf_data;
      s2_sel  <= lane_addr;
    end
  end

  // ---------------- stage 3: crossbar ----------------
  crossbar #(.N_IN(N), .N_OUT(N_O), .WIDTH(WIDTH)) u_xbar (
    .in_data   (s2_data),
    .sel       (s2_sel),
    .sel_valid (s2_hit),
    .out_data  (out_data),
    .out_valid (out_valid)
  );

  // Advance when no offered element is refused downstream.
  assign advance = &(~out_valid | out_ready);

  // A lane that handed its element over while others waited stops offering it.
  a_no_repeat: assert property (@(posedge clk) disable iff (rst)
    !advance |=> ((out_valid & $past(out_valid & out_ready)) == '0));

endmodule
