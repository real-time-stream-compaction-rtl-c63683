// tb_sparsity_compression_full: the compaction tree at its default size,
// 64 input ports onto 2 output ports, 32-bit elements, 16-entry FIFOs.
//
// The event phase models the Belle II calorimeter trigger use: 576 trigger
// cells per window arrive as 9 cycles on 64 ports, a window lasts 16
// cycles, and 32 of the 576 cells (5.6 %) are non-empty, the most that two
// output ports can carry in 16 cycles. sc_env also checks the latency
// (5 levels), the saturated rate of 2 elements per cycle, output stalls
// and lane balancing.
module tb_sparsity_compression_full;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst, done;
  int          checks, failures;
  logic [63:0] s_valid, s_ready;
  logic [31:0] s_data [64];
  logic [1:0]  m_valid, m_ready;
  logic [31:0] m_data [2];

  sparsity_compression dut (
    .clk(clk), .rst(rst), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data));

  sc_env #(.N_I(64), .N_O(2), .WIDTH(32), .EVENTS(100), .PERIOD(16), .ACTIVE(9), .HITS(28)) env (
    .clk(clk), .rst(rst), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data),
    .done(done), .checks(checks), .failures(failures));

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
