// tb_sc_fifo: self-checking testbench of sc_fifo.
//
// Random pushes and pops are compared against a queue model: the data
// order, out_valid (not empty), in_ready (not full, reaching full at
// exactly DEPTH words) and the one-cycle delay from a write into an empty
// FIFO to out_valid are checked. A watchdog ends the run after a fixed
// number of cycles.
module tb_sc_fifo;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 4;

  logic clk = 1'b0;
  logic rst;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];

  sc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; out_ready = 1'b0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // Latency: write one word into the empty FIFO.
    check(!out_valid && in_ready, "empty after reset");
    in_valid = 1'b1; in_data = 16'hbeef;
    @(posedge clk); #1;
    in_valid = 1'b0;
    check(out_valid && out_data == 16'hbeef, "visible one cycle after write");
    out_ready = 1'b1;
    @(posedge clk); #1;
    out_ready = 1'b0;
    check(!out_valid, "empty after pop");
    // Fill to full.
    for (int i = 0; i < DEPTH; i++) begin
      check(in_ready, "ready below DEPTH");
      in_valid = 1'b1; in_data = WIDTH'(i + 100);
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    check(!in_ready, "full at DEPTH");
    for (int i = 0; i < DEPTH; i++) begin
      check(out_valid && out_data == WIDTH'(i + 100), "drain order");
      out_ready = 1'b1;
      @(posedge clk); #1;
    end
    out_ready = 1'b0;
    check(!out_valid, "empty after drain");
    // Random traffic against the queue model.
    for (int cyc = 0; cyc < 3000; cyc++) begin
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = WIDTH'($urandom);
      #1;
      check(out_valid == (model.size() != 0), "out_valid vs model");
      check(in_ready == (model.size() < DEPTH), "in_ready vs model");
      if (out_valid) check(out_data == model[0], "data vs model");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
