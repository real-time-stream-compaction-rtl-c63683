// sc_fifo: synchronous first-in-first-out buffer with a valid/ready
// (AXI-Stream style) handshake on both sides.
//
// The compaction tree uses it in three places: one per input port, between
// the levels of compaction cells (where it decouples the cells so that each
// runs freely), and one per output port. It is a circular buffer of DEPTH
// words with read and write pointers and an occupancy counter. The head is
// shown without a read latency (first-word fall-through): a word written at
// one clock edge is visible on out_data, with out_valid high, from the
// next cycle on. in_ready is simply "not full", so a full FIFO accepts no
// word even if it is read in the same cycle; this keeps in_ready free of
// any combinational path from out_ready.
//
// The FIFO role and the depth of 16 entries follow the paper; the
// fall-through head, the full rule and the synchronous active-high reset
// (which empties the buffer) are choices of this design.
module sc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  // write side
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  // read side
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0]    mem [DEPTH];
  logic [AW-1:0]       wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  logic push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Storage needs no reset: a word is only read after it was written.
  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: an offered word stays offered and unchanged until taken.
  property p_hold;
    @(posedge clk) disable iff (rst)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
