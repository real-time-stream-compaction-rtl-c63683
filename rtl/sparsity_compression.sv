// sparsity_compression: compacts N_I sparse input streams into N_O dense,
// balanced output streams with deterministic latency.
//
// Every input port carries one data element per clock cycle; an element is
// non-empty when s_valid is high. The module gathers the non-empty elements
// onto the N_O output ports, so that a downstream accelerator that expects
// dense data sees them back to back.
//
// Structure (a binary tree):
//   * one sc_fifo per input port;
//   * LEVELS = ceil(log2(N_I / N_O)) levels of stream_compaction cells.
//     Each cell merges 2*N_O streams into N_O, so level l has
//     2**(LEVELS-1-l) cells. Input ports beyond N_I, up to
//     N_O * 2**LEVELS, are padded with permanently empty streams;
//   * one sc_fifo per cell output. Those of the last level are the output
//     FIFOs; the others decouple neighbouring levels so that every cell
//     runs freely.
//
// Interface: AXI-Stream-like valid/ready/data per port, s_* on the input
// side, m_* on the output side. s_ready is low only when an input FIFO is
// full, m_ready low stalls the last cell when its output FIFOs fill up.
//
// Timing: an element accepted on an input port at one clock edge is handed
// over on an output port 3*LEVELS+1 edges later when the tree is otherwise
// empty: one edge into the input FIFO, then three per level (prefetch,
// select, crossbar into the next FIFO). Counted from the input FIFO heads,
// as the paper counts a cell, this is 3*LEVELS cycles. For the default
// 64 -> 2 ports (5 levels) the element is accepted in cycle t and offered
// on m_data in cycle t+16. The tree delivers up to N_O elements per cycle.
//
// Following the paper: the tree of 2*N_O -> N_O cells connected by FIFOs,
// the input and output FIFOs, the parameters (N_I, N_O, bit width, FIFO
// depth) and their default values. This design's own choices: padding of
// unused tree inputs, the reset (synchronous, active high) and the per-cell
// balancing by rotation (see stream_compaction). The paper's latency
// formula, 3*ceil(log2(1 + N_I/N_O)) cycles, counts one level more than
// this tree has whenever N_I/N_O is a power of two (18 against 15 cycles
// for 64 -> 2); the tree shape here follows the paper's block diagram, in
// which 8 inputs reach 2 outputs through two levels.
module sparsity_compression
  import sc_pkg::*;
#(
  parameter int unsigned N_I   = DEFAULT_N_I,
  parameter int unsigned N_O   = DEFAULT_N_O,
  parameter int unsigned WIDTH = DEFAULT_WIDTH,
  parameter int unsigned DEPTH = DEFAULT_DEPTH
) (
  input  logic             clk,
  input  logic             rst,
  // sparse input streams
  input  logic [N_I-1:0]   s_valid,
  output logic [N_I-1:0]   s_ready,
  input  logic [WIDTH-1:0] s_data  [N_I],
  // dense output streams
  output logic [N_O-1:0]   m_valid,
  input  logic [N_O-1:0]   m_ready,
  output logic [WIDTH-1:0] m_data  [N_O]
);

  localparam int unsigned LEVELS = tree_levels(N_I, N_O);
  localparam int unsigned NP     = N_O << LEVELS;   // padded input count

  // Stream heads entering each level; level LEVELS is the output.
  logic [NP-1:0]    lv_valid [LEVELS+1];
  logic [NP-1:0]    lv_ready [LEVELS+1];
  logic [WIDTH-1:0] lv_data  [LEVELS+1][NP];

  // ---------------- input FIFOs ----------------
  for (genvar p = 0; p < NP; p++) begin : g_in
    if (p < N_I) begin : g_port
      sc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
        .clk       (clk),
        .rst       (rst),
        .in_valid  (s_valid[p]),
        .in_ready  (s_ready[p]),
        .in_data   (s_data[p]),
        .out_valid (lv_valid[0][p]),
        .out_ready (lv_ready[0][p]),
        .out_data  (lv_data[0][p])
      );
    end else begin : g_pad
      assign lv_valid[0][p] = 1'b0;
      assign lv_data[0][p]  = '0;
    end
  end

  // ---------------- compaction tree ----------------
  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned CELLS = (NP >> l) / (2 * N_O);

    for (genvar c = 0; c < CELLS; c++) begin : g_cell
      logic [N_O-1:0]   c_valid;
      logic [N_O-1:0]   c_ready;
      logic [WIDTH-1:0] c_data [N_O];
      logic [WIDTH-1:0] c_in_data [2*N_O];

      for (genvar i = 0; i < 2 * N_O; i++) begin : g_din
        assign c_in_data[i] = lv_data[l][c*2*N_O + i];
      end

      stream_compaction #(.N_O(N_O), .WIDTH(WIDTH)) u_cell (
        .clk       (clk),
        .rst       (rst),
        .in_valid  (lv_valid[l][c*2*N_O +: 2*N_O]),
        .in_ready  (lv_ready[l][c*2*N_O +: 2*N_O]),
        .in_data   (c_in_data),
        .out_valid (c_valid),
        .out_ready (c_ready),
        .out_data  (c_data)
      );

      // FIFOs behind the cell: inter-level FIFOs, or the output FIFOs.
      for (genvar j = 0; j < N_O; j++) begin : g_fifo
        sc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
          .clk       (clk),
          .rst       (rst),
          .in_valid  (c_valid[j]),
          .in_ready  (c_ready[j]),
          .in_data   (c_data[j]),
          .out_valid (lv_valid[l+1][c*N_O + j]),
          .out_ready (lv_ready[l+1][c*N_O + j]),
          .out_data  (lv_data[l+1][c*N_O + j])
        );
      end
    end

    // Stream positions this level leaves unused.
    for (genvar u = NP >> (l + 1); u < NP; u++) begin : g_unused
      assign lv_valid[l+1][u] = 1'b0;
      assign lv_data[l+1][u]  = '0;
    end
  end

  // Ready of the padded inputs and of the unused positions is never read.
  for (genvar l = 1; l < LEVELS; l++) begin : g_unused_rdy
    for (genvar u = NP >> l; u < NP; u++) begin : g_u
      assign lv_ready[l][u] = 1'b0;
    end
  end

  // ---------------- output ports ----------------
  assign m_valid = lv_valid[LEVELS][N_O-1:0];
  assign lv_ready[LEVELS] = NP'(m_ready);
  for (genvar j = 0; j < N_O; j++) begin : g_out
    assign m_data[j] = lv_data[LEVELS][j];
  end

endmodule
