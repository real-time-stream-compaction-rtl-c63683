// sc_env: stimulus and scoreboard for the sparsity_compression top.
//
// It drives the N_I input streams and consumes the N_O output streams of a
// sparsity_compression instance wired to its ports. Every element carries
// its input port (upper half of the word) and a per-port sequence number
// (lower half), so the scoreboard checks that each element arrives exactly
// once. The order of elements is not checked: the tree spreads one input
// stream over several lanes, which may then overtake each other. Phases:
//   1. latency: a lone element must leave an output 3*LEVELS+1 clock edges
//      after it was accepted (LEVELS = ceil(log2(N_I/N_O))): one edge into
//      the input FIFO and three per level;
//   2. saturation: every input valid in every cycle; the outputs must then
//      deliver N_O elements per cycle, and the inputs must see backpressure;
//   3. events: EVENTS windows of PERIOD cycles, each with HITS non-empty
//      elements scattered at random over the first ACTIVE cycles of all
//      ports (by default N_O*PERIOD, what the outputs can carry in one
//      window); no input may see backpressure, and each window must have
//      left the tree once the next window's first elements could have
//      crossed it;
//   4. random sparse traffic with random output backpressure (stalls).
// Each mechanism (input backpressure, output stall, lane balancing) is
// counted and must have occurred. `done` rises at the end with the totals.
module sc_env
  import sc_pkg::*;
#(
  parameter int unsigned N_I    = 16,
  parameter int unsigned N_O    = 2,
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned EVENTS = 20,
  parameter int unsigned PERIOD = 16,
  parameter int unsigned ACTIVE = 9,
  parameter int unsigned HITS   = N_O * PERIOD,
  parameter int unsigned RANDOM_CYCLES = 2000
) (
  input  logic             clk,
  output logic             rst,
  output logic [N_I-1:0]   s_valid,
  input  logic [N_I-1:0]   s_ready,
  output logic [WIDTH-1:0] s_data [N_I],
  input  logic [N_O-1:0]   m_valid,
  output logic [N_O-1:0]   m_ready,
  input  logic [WIDTH-1:0] m_data [N_O],
  output logic             done,
  output int               checks,
  output int               failures
);
  localparam int unsigned LEVELS  = tree_levels(N_I, N_O);
  localparam int unsigned LATENCY = CELL_LATENCY * LEVELS + 1;
  // The paper's formula, 3*ceil(log2(1 + N_I/N_O)), for comparison.
  localparam int unsigned PAPER_LATENCY = CELL_LATENCY * tree_levels(N_I + N_O, N_O);
  localparam int unsigned HW      = WIDTH / 2;

  int cycle = 0;
  logic [WIDTH-1:0] q [N_I][$];
  int seq_gen [N_I];
  int acc_cycle [logic [WIDTH-1:0]];
  int total_in = 0, total_out = 0;
  int lane_cnt [N_O];
  int n_in_bp = 0, n_out_stall = 0;
  int lat_min = 1 << 30, lat_max = 0;
  int out_this_cycle;
  int out_log [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  always_comb begin
    for (int p = 0; p < N_I; p++) begin
      s_valid[p] = q[p].size() != 0;
      s_data[p]  = (q[p].size() != 0) ? q[p][0] : '0;
    end
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      out_this_cycle = 0;
      for (int j = 0; j < N_O; j++) begin
        if (m_valid[j] && !m_ready[j]) n_out_stall++;
        if (m_valid[j] && m_ready[j]) begin
          int src, seq, lat;
          src = int'(m_data[j][WIDTH-1:HW]);
          seq = int'(m_data[j][HW-1:0]);
          if (src < N_I && acc_cycle.exists(m_data[j])) begin
            lat = cycle - acc_cycle[m_data[j]];
            acc_cycle.delete(m_data[j]);
            if (lat < lat_min) lat_min = lat;
            if (lat > lat_max) lat_max = lat;
          end else begin
            check(1'b0, $sformatf("unexpected element port %0d seq %0d", src, seq));
          end
          lane_cnt[j]++;
          total_out++;
          out_this_cycle++;
        end
      end
      out_log.push_back(out_this_cycle);
      for (int p = 0; p < N_I; p++) begin
        if (q[p].size() != 0 && !s_ready[p]) n_in_bp++;
        if (s_valid[p] && s_ready[p]) begin
          acc_cycle[q[p][0]] = cycle;
          void'(q[p].pop_front());
        end
      end
    end
  end

  task automatic push(int p);
    q[p].push_back({HW'(p), HW'(seq_gen[p])});
    seq_gen[p]++;
    total_in++;
  endtask

  task automatic drain(int max_cycles);
    int c;
    c = 0;
    while (total_out != total_in && c < max_cycles) begin
      @(posedge clk); #1; c++;
    end
    check(total_out == total_in, "all elements delivered");
  endtask

  initial begin
    int t0, hits, bp0, late;
    rst = 1'b1; m_ready = '1; done = 1'b0; checks = 0; failures = 0;
    foreach (seq_gen[p]) seq_gen[p] = 0;
    foreach (lane_cnt[j]) lane_cnt[j] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk); #1;

    // 1. latency of a lone element, on the first and on the last port
    for (int k = 0; k < 2; k++) begin
      lat_min = 1 << 30; lat_max = 0;
      push(k == 0 ? 0 : N_I - 1);
      drain(10 * LATENCY + 10);
      check(lat_min == LATENCY && lat_max == LATENCY, "latency 3*LEVELS+1 cycles");
      $display("latency: %0d cycles for %0d levels (paper formula: %0d)", lat_min, LEVELS,
               PAPER_LATENCY);
    end

    // 2. saturation: all ports valid every cycle
    bp0 = n_in_bp;
    for (int k = 0; k < 40; k++) begin
      for (int p = 0; p < N_I; p++) if (q[p].size() < 2) push(p);
      @(posedge clk); #1;
    end
    begin
      // 30 cycles in the middle of the run must move N_O elements each.
      int sum;
      sum = 0;
      for (int k = 0; k < 30; k++) begin
        for (int p = 0; p < N_I; p++) if (q[p].size() < 2) push(p);
        @(posedge clk); #1;
        sum += out_log[$];
      end
      check(sum == 30 * N_O, "saturated output rate of N_O per cycle");
      $display("saturation: %0d elements in 30 cycles", sum);
    end
    check(n_in_bp > bp0, "input backpressure under saturation");
    drain(N_I * 20 + 100);

    // 3. event windows of N_O*PERIOD non-empty elements
    bp0 = n_in_bp;
    late = 0;
    for (int e = 0; e < EVENTS; e++) begin
      bit [N_I-1:0] grid [ACTIVE];
      foreach (grid[c]) grid[c] = '0;
      hits = 0;
      while (hits < HITS && hits < N_I * ACTIVE) begin
        int c, p;
        c = $urandom % ACTIVE;
        p = $urandom % N_I;
        if (!grid[c][p]) begin grid[c][p] = 1'b1; hits++; end
      end
      for (int c = 0; c < PERIOD; c++) begin
        if (c < ACTIVE) for (int p = 0; p < N_I; p++) if (grid[c][p]) push(p);
        @(posedge clk); #1;
        // The previous window must be out once this window's first
        // elements could have crossed the tree.
        if (c == LATENCY % PERIOD && total_out + hits < total_in - hits) late++;
      end
    end
    drain(PERIOD * 4 + LATENCY);
    check(n_in_bp == bp0, "no input backpressure during the event windows");
    check(late == 0, "every window drained in time");
    $display("events: %0d windows, %0d late, input backpressure cycles %0d", EVENTS, late, n_in_bp - bp0);

    // 4. random sparse traffic with output backpressure
    for (int k = 0; k < RANDOM_CYCLES; k++) begin
      for (int p = 0; p < N_I; p++)
        if (($urandom % (4 * N_I / N_O)) == 0 && q[p].size() < 4) push(p);
      m_ready = N_O'($urandom);
      @(posedge clk); #1;
    end
    m_ready = '1;
    drain(N_I * 40 + 200);

    check(n_out_stall > 0, "output stall happened");
    begin
      int mx, mn;
      mx = 0; mn = 1 << 30;
      foreach (lane_cnt[j]) begin
        if (lane_cnt[j] > mx) mx = lane_cnt[j];
        if (lane_cnt[j] < mn) mn = lane_cnt[j];
      end
      check(mn > 0 && mx - mn <= 1, "output lanes balanced");
      $display("lanes: min %0d max %0d elements", mn, mx);
    end
    check(acc_cycle.size() == 0, "no element left behind");
    $display("mechanisms: input backpressure %0d, output stalls %0d, elements %0d",
             n_in_bp, n_out_stall, total_out);
    done = 1'b1;
  end
endmodule
