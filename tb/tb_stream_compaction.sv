// tb_stream_compaction: self-checking testbench of one stream compaction
// cell (N_O = 2, i.e. 4 -> 2).
//
// The inputs behave like FIFO heads fed from per-port queues. Every element
// is tagged with its input port and a sequence number, so the scoreboard
// can check that each element leaves exactly once and that each input
// stream keeps its order. Phases:
//   1. latency: a lone element at a FIFO head in cycle t is offered on an
//      output in cycle t+2 (written into the downstream FIFO at the third
//      edge), on lane 0;
//   2. throughput: with all inputs full and outputs ready the cell emits
//      N_O elements in every cycle;
//   3. balance: one element per cycle, the output lanes alternate;
//   4. random traffic with random output backpressure (stalls counted).
// A second cell with BALANCE = 0 replays the worked example of the design
// description: prefetch slots holding elements on ports 0, 2 and 3 (valid
// 1,0,1,1) send ports 0 and 2 to outputs 0 and 1 first, and port 3 to
// output 0 one cycle later.
module tb_stream_compaction;
  localparam int unsigned N_O = 2;
  localparam int unsigned N   = 2 * N_O;
  localparam int unsigned W   = 16;

  logic clk = 1'b0;
  logic rst;
  logic [N-1:0]   in_valid, in_ready;
  logic [W-1:0]   in_data [N];
  logic [N_O-1:0] out_valid, out_ready;
  logic [W-1:0]   out_data [N_O];

  int checks = 0, failures = 0;
  int cycle = 0;
  logic [W-1:0] q [N][$];
  int next_seq [N];
  int recv [$];          // cycles of received elements
  int lane_cnt [N_O];
  int per_cycle_out;
  int stalls = 0;
  int total_in = 0, total_out = 0;

  stream_compaction #(.N_O(N_O), .WIDTH(W)) dut (.*);

  // Fixed-mapping cell for the worked example.
  logic [N-1:0]   ex_in_valid, ex_in_ready;
  logic [W-1:0]   ex_in_data [N];
  logic [N_O-1:0] ex_out_valid;
  logic [W-1:0]   ex_out_data [N_O];

  stream_compaction #(.N_O(N_O), .WIDTH(W), .BALANCE(1'b0)) dut_fixed (
    .clk(clk), .rst(rst), .in_valid(ex_in_valid), .in_ready(ex_in_ready),
    .in_data(ex_in_data), .out_valid(ex_out_valid), .out_ready(2'b11),
    .out_data(ex_out_data));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // Input heads follow the queues.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      in_valid[i] = q[i].size() != 0;
      in_data[i]  = (q[i].size() != 0) ? q[i][0] : '0;
    end
  end

  // Monitor and queue update at each edge.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      per_cycle_out = 0;
      for (int j = 0; j < N_O; j++) begin
        if (out_valid[j] && !out_ready[j]) stalls++;
        if (out_valid[j] && out_ready[j]) begin
          int src, seq;
          src = int'(out_data[j][W-1 -: 4]);
          seq = int'(out_data[j][W-5:0]);
          check(src < N && seq == next_seq[src], "per-stream order / duplicate");
          if (src < N && seq != next_seq[src]) $display("  src=%0d seq=%0d exp=%0d lane=%0d", src, seq, next_seq[src], j);
          if (src < N) next_seq[src] = seq + 1;
          recv.push_back(cycle);
          lane_cnt[j]++;
          per_cycle_out++;
          total_out++;
        end
      end
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_ready[i]) void'(q[i].pop_front());
    end
  end

  int seq_gen [N];
  task automatic push(int i);
    q[i].push_back({4'(i), 12'(seq_gen[i])});
    seq_gen[i]++;
    total_in++;
  endtask

  task automatic wait_empty(int max_cycles);
    int c;
    c = 0;
    while (total_out != total_in && c < max_cycles) begin
      @(posedge clk); #1; c++;
    end
    check(total_out == total_in, "all elements delivered");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n_before, c0;
    rst = 1'b1; out_ready = '1;
    foreach (next_seq[i]) begin next_seq[i] = 0; seq_gen[i] = 0; end
    foreach (lane_cnt[j]) lane_cnt[j] = 0;
    ex_in_valid = '0;
    foreach (ex_in_data[i]) ex_in_data[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk); #1;

    // 0. worked example on the fixed-mapping cell
    ex_in_valid = 4'b1101;
    foreach (ex_in_data[i]) ex_in_data[i] = W'(16'ha000 + i);
    check(ex_in_ready == 4'b1111, "empty prefetch slots accept");
    @(posedge clk); #1;
    ex_in_valid = '0;
    @(posedge clk); #1;
    check(ex_out_valid == 2'b11 && ex_out_data[0] == 16'ha000 && ex_out_data[1] == 16'ha002,
          "example: ports 0 and 2 on outputs 0 and 1");
    @(posedge clk); #1;
    check(ex_out_valid == 2'b01 && ex_out_data[0] == 16'ha003,
          "example: port 3 on output 0 one cycle later");
    @(posedge clk); #1;
    check(ex_out_valid == 2'b00, "example: nothing left");

    // 1. latency
    t0 = cycle;
    recv.delete();
    push(1);
    wait_empty(20);
    check(recv.size() == 1 && recv[0] == t0 + 2, "cell latency: offered 2 cycles after the head");
    check(lane_cnt[0] == 1, "first element on lane 0");
    $display("latency: head in cycle %0d, offered in cycle %0d", t0, recv.size() ? recv[0] : -1);

    // 2. throughput with full inputs
    for (int k = 0; k < 25; k++) for (int i = 0; i < N; i++) push(i);
    recv.delete();
    wait_empty(200);
    check(recv.size() == 100, "100 elements out");
    if (recv.size() == 100)
      check(recv[99] - recv[0] == 100 / N_O - 1, "N_O elements per cycle");

    // 3. balance: one element per cycle on random ports
    foreach (lane_cnt[j]) lane_cnt[j] = 0;
    for (int k = 0; k < 40; k++) begin
      push($urandom % N);
      @(posedge clk); #1;
    end
    wait_empty(50);
    check(lane_cnt[0] == 20 && lane_cnt[1] == 20, "lanes balanced");
    $display("balance: lane0=%0d lane1=%0d", lane_cnt[0], lane_cnt[1]);

    // 4. random traffic with backpressure
    for (int k = 0; k < 3000; k++) begin
      for (int i = 0; i < N; i++)
        if (($urandom % 4) == 0 && q[i].size() < 8) push(i);
      out_ready = N_O'($urandom);
      @(posedge clk); #1;
    end
    out_ready = '1;
    wait_empty(200);
    check(stalls > 0, "output backpressure exercised");
    $display("stalls=%0d elements=%0d", stalls, total_out);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
