// tb_sc_configs: evaluated configurations side by side.
//
// The evaluated sizes are N_I = 64, 128, 256 input ports, each with
// N_O = 2, 4, 8 output ports, all with 32-bit elements and 16-entry FIFOs.
// The tables below hold three of them, which between them use every N_I
// and every N_O value once (64 -> 2 runs in tb_sparsity_compression_full).
// Listing all nine works as well (set NCFG to 9 and extend the tables);
// the simulation then still takes seconds, but building it takes several
// minutes. Every instance is driven and
// checked by its own sc_env: latency of 3*levels+1 cycles, N_O elements per
// cycle when saturated, event windows of 16 cycles holding 7/8 of the
// N_O*16 elements the outputs can carry, random traffic with output
// stalls, and balanced output lanes. The run passes when every instance
// reports no failure.
module tb_sc_configs;
  localparam int unsigned NCFG = 3;
  localparam int unsigned NI_TAB [NCFG] = '{64, 128, 256};
  localparam int unsigned NO_TAB [NCFG] = '{8, 4, 2};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] done;
  int checks [NCFG];
  int failures [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned NI = NI_TAB[g];
    localparam int unsigned NO = NO_TAB[g];
    logic             rst;
    logic [NI-1:0]    s_valid, s_ready;
    logic [31:0]      s_data [NI];
    logic [NO-1:0]    m_valid, m_ready;
    logic [31:0]      m_data [NO];

    sparsity_compression #(.N_I(NI), .N_O(NO), .WIDTH(32), .DEPTH(16)) dut (
      .clk(clk), .rst(rst), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
      .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data));
    sc_env #(.N_I(NI), .N_O(NO), .WIDTH(32), .EVENTS(20), .PERIOD(16), .ACTIVE(9),
             .HITS(NO * 14), .RANDOM_CYCLES(1000)) env (
      .clk(clk), .rst(rst), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
      .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data),
      .done(done[g]), .checks(checks[g]), .failures(failures[g]));
  end

  function automatic int total(input int v [NCFG]);
    int s;
    s = 0;
    for (int i = 0; i < NCFG; i++) s += v[i];
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", total(checks), total(failures) + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (&done);
    @(posedge clk);
    for (int i = 0; i < NCFG; i++)
      $display("N_I=%0d N_O=%0d: checks %0d failures %0d", NI_TAB[i], NO_TAB[i], checks[i], failures[i]);
    $display("TB_RESULT checks=%0d failures=%0d", total(checks), total(failures));
    $finish;
  end
endmodule
