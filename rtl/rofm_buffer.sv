// rofm_buffer -- the Rofm data buffer: a queue of packet-wide entries.
//
// Partial sums and group sums that arrive before their partner wait here
// and leave in arrival order, which is the order in which the streaming
// dataflow needs them back ("the group-sums are queued in the buffer").
// The paper sizes the buffer at 16 KiB per Rofm; with 256-lane, 8-bit
// packets that is 64 entries, the default here. Organising it as a
// first-in first-out queue (rather than an addressed memory) is this
// design's choice.
//
// Interface: one push and one pop per cycle, both allowed together. `head`
// is the oldest entry (zero when the queue is empty), readable
// combinationally so that the adder can use
// it in the same cycle it is popped. A push into a full queue or a pop
// from an empty one is dropped and sets the sticky `overflow` /
// `underflow` flag; assertions flag the same events in simulation.
module rofm_buffer #(
  parameter int unsigned W     = 2048,   // packet width in bits
  parameter int unsigned DEPTH = 64      // 16 KiB / (W/8)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               push_data,
  input  logic                       pop,
  output logic [W-1:0]               head,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow,
  output logic                       underflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign head    = empty ? '0 : mem[rd_ptr];   // an empty queue adds nothing
  assign do_pop  = pop && !empty;
  // A push into a full queue is still taken when a pop frees a slot.
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      unique case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (push && !do_push) overflow  <= 1'b1;
      if (pop && empty)     underflow <= 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $warning("rofm_buffer: push into a full buffer dropped");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $warning("rofm_buffer: pop from an empty buffer");
endmodule
