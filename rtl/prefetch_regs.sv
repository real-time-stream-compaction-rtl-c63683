// prefetch_regs: one holding register per input of a stream compaction
// cell (pipeline stage 1).
//
// Slot i holds at most one element taken from the head of input FIFO i.
// A slot is (re)loaded when it is empty or when its element is forwarded
// in this cycle (consume[i]); it then pops the FIFO head if there is one
// and otherwise becomes empty. An element that is valid but not forwarded
// (more valid slots than output ports) stays in place and competes again in
// the next cycle, which keeps the order of each input stream. fifo_ready
// depends on consume, which the cell derives combinationally from the slot
// contents, never from fifo_valid, so no combinational loop forms.
//
// The prefetch registers are the paper's; the load rule is this design's
// choice. Reset (synchronous, active high) empties every slot.
module prefetch_regs #(
  parameter int unsigned N     = 4,
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst,
  // heads of the input FIFOs
  input  logic [N-1:0]     fifo_valid,
  output logic [N-1:0]     fifo_ready,
  input  logic [WIDTH-1:0] fifo_data [N],
  // slots forwarded in this cycle
  input  logic [N-1:0]     consume,
  // slot contents
  output logic [N-1:0]     reg_valid,
  output logic [WIDTH-1:0] reg_data  [N]
);

  logic [N-1:0] load;

  assign load       = ~reg_valid | consume;
  assign fifo_ready = load;

  always_ff @(posedge clk) begin
    if (rst) begin
      reg_valid <= '0;
    end else begin
      for (int unsigned i = 0; i < N; i++)
        if (load[i]) reg_valid[i] <= fifo_valid[i];
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++)
      if (load[i] && fifo_valid[i]) reg_data[i] <= fifo_data[i];
  end

  // A slot may only be consumed while it holds an element.
  a_consume_valid: assert property (@(posedge clk) disable iff (rst)
    (consume & ~reg_valid) == '0);

endmodule
