// tb_sparsity_compression: end-to-end test of the compaction tree at
// reduced sizes. Two instances run side by side:
//   * 12 -> 2 ports (3 levels, input count padded from 12 to 16),
//   * 16 -> 4 ports (2 levels).
// sc_env drives and checks each of them; the event windows carry 12 and 24
// non-empty elements out of 108 and 144 slots. The run passes when both
// report no failure. A watchdog ends the run if either does not finish.
module tb_sparsity_compression;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_a, rst_b, done_a, done_b;
  int          checks_a, checks_b, failures_a, failures_b;

  logic [11:0] sa_valid, sa_ready;
  logic [31:0] sa_data [12];
  logic [1:0]  ma_valid, ma_ready;
  logic [31:0] ma_data [2];

  logic [15:0] sb_valid, sb_ready;
  logic [31:0] sb_data [16];
  logic [3:0]  mb_valid, mb_ready;
  logic [31:0] mb_data [4];

  sparsity_compression #(.N_I(12), .N_O(2), .WIDTH(32), .DEPTH(16)) dut_a (
    .clk(clk), .rst(rst_a), .s_valid(sa_valid), .s_ready(sa_ready), .s_data(sa_data),
    .m_valid(ma_valid), .m_ready(ma_ready), .m_data(ma_data));
  sc_env #(.N_I(12), .N_O(2), .WIDTH(32), .HITS(12)) env_a (
    .clk(clk), .rst(rst_a), .s_valid(sa_valid), .s_ready(sa_ready), .s_data(sa_data),
    .m_valid(ma_valid), .m_ready(ma_ready), .m_data(ma_data),
    .done(done_a), .checks(checks_a), .failures(failures_a));

  sparsity_compression #(.N_I(16), .N_O(4), .WIDTH(32), .DEPTH(16)) dut_b (
    .clk(clk), .rst(rst_b), .s_valid(sb_valid), .s_ready(sb_ready), .s_data(sb_data),
    .m_valid(mb_valid), .m_ready(mb_ready), .m_data(mb_data));
  sc_env #(.N_I(16), .N_O(4), .WIDTH(32), .HITS(24)) env_b (
    .clk(clk), .rst(rst_b), .s_valid(sb_valid), .s_ready(sb_ready), .s_data(sb_data),
    .m_valid(mb_valid), .m_ready(mb_ready), .m_data(mb_data),
    .done(done_b), .checks(checks_b), .failures(failures_b));

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b,
             failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done_a && done_b);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b);
    $finish;
  end
endmodule
