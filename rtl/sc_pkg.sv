// sc_pkg: constants and helper functions shared by the sparsity compression
// blocks.
//
// The default sizes are those of the configuration deployed in the Belle II
// ECL GNN trigger module: 64 input ports compacted onto 2 output ports,
// 32-bit data elements and 16-entry FIFOs. CELL_LATENCY is the number of
// pipeline stages of one stream compaction cell (prefetch, select,
// crossbar). tree_levels() gives the number of cell levels of the
// compaction tree: each cell halves the number of streams, from 2*N_O to
// N_O, so ceil(log2(N_I/N_O)) levels are needed to go from N_I to N_O
// streams; the number of input ports is padded up to N_O * 2**levels.
package sc_pkg;

  localparam int unsigned DEFAULT_N_I   = 64;
  localparam int unsigned DEFAULT_N_O   = 2;
  localparam int unsigned DEFAULT_WIDTH = 32;
  localparam int unsigned DEFAULT_DEPTH = 16;

  // Register stages of one stream compaction cell.
  localparam int unsigned CELL_LATENCY = 3;

  // Number of cell levels needed to reduce n_i streams to n_o streams.
  function automatic int unsigned tree_levels(int unsigned n_i, int unsigned n_o);
    int unsigned lv;
    int unsigned cap;
    lv  = 0;
    cap = n_o;
    while (cap < n_i) begin
      cap = cap * 2;
      lv  = lv + 1;
    end
    return lv;
  endfunction

endpackage
