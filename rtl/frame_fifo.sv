// frame_fifo: first-in first-out queue of frame descriptors.
//
// The forwarding steps of the switch hand frames to each other through
// queues (the FIFO<Frame> arguments of the forwarding algorithms); this is
// that queue. It is a circular buffer of DEPTH descriptors with valid/ready
// handshakes on both sides: a descriptor is written when in_valid and
// in_ready are both high on a rising clock edge, and read when out_valid and
// out_ready are both high. in_ready is low only when the queue is full, and
// a descriptor written into an empty queue appears on the output on the next
// cycle. Depth and the handshake are this design's choices.
module frame_fifo
  import swa_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  frame_t in_frame,
  output logic   out_valid,
  input  logic   out_ready,
  output frame_t out_frame,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  frame_t          mem [DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic            push, pop;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign out_frame = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
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

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_frame;
  end

  // A held output must stay stable until it is taken.
  property p_stable_out;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_frame));
  endproperty
  assert property (p_stable_out);

endmodule
