// sync_fifo -- single-clock first-in first-out queue with a valid/ready
// interface on both sides, generic in the element type.
//
// Used twice in the pipeline: as the burst FIFO between the LIF event filter
// and graph generation, and (shallow) as the local buffer in front of every
// PointNetConv layer, whose not-full flag is the READY signal of the
// back-pressure scheduler. The storage is a plain array (a block RAM or
// distributed RAM on an FPGA); the head element is read combinationally.
//
// Interface: push when in_valid && in_ready (in_ready = not full); pop when
// out_valid && out_ready (out_valid = not empty). Push and pop may happen in
// the same cycle whenever the queue is neither empty nor full. `count` is the
// current fill level, `overflow` pulses when in_valid arrives while full
// (the element is then refused; a producer that cannot wait loses it).
// Depth is a parameter; a power of two is not required.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  T                           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output T                           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;
  logic            push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];
  assign overflow  = in_valid && !in_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: an offered element stays until taken (checked at pop side).
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> out_valid;
  endproperty
  a_hold: assert property (p_hold);

endmodule
