// tb_prefetch_regs: self-checking testbench of prefetch_regs.
//
// Random FIFO heads and random consume patterns (only on valid slots) are
// compared with a per-slot model: a slot that is empty or consumed loads
// the FIFO head (popping it) or becomes empty; an unconsumed valid slot
// keeps its element.
module tb_prefetch_regs;
  localparam int unsigned N = 4;
  localparam int unsigned W = 8;
  int checks = 0, failures = 0;

  logic clk = 1'b0;
  logic rst;
  logic [N-1:0] fifo_valid, fifo_ready, consume, reg_valid;
  logic [W-1:0] fifo_data [N];
  logic [W-1:0] reg_data [N];
  bit       m_valid [N];
  logic [W-1:0] m_data [N];

  prefetch_regs #(.N(N), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; fifo_valid = '0; consume = '0;
    foreach (fifo_data[i]) fifo_data[i] = '0;
    foreach (m_valid[i]) m_valid[i] = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 2000; t++) begin
      fifo_valid = N'($urandom);
      foreach (fifo_data[i]) fifo_data[i] = W'($urandom);
      consume = N'($urandom) & reg_valid;
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (reg_valid[i] != m_valid[i] || (m_valid[i] && reg_data[i] != m_data[i])) begin
          failures++; $display("FAIL slot %0d t=%0d", i, t);
        end
        checks++;
        if (fifo_ready[i] != (!m_valid[i] || consume[i])) begin
          failures++; $display("FAIL ready %0d t=%0d", i, t);
        end
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (!m_valid[i] || consume[i]) begin
          m_valid[i] = fifo_valid[i];
          if (fifo_valid[i]) m_data[i] = fifo_data[i];
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
