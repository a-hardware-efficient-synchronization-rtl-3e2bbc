// delay_line -- fixed delay of DEPTH sample-enables, built as a circular
// buffer (a memory array with one write pointer, so it maps onto distributed
// or block RAM rather than a chain of registers).
//
// On every cycle with en = 1 the word din is written at the pointer and the
// pointer advances.  dout is read combinationally at the same address, so it
// shows the din that was written DEPTH enables earlier.  Until the buffer has
// been filled once after reset dout is forced to zero, which lets the
// recursive sums downstream start from an all-zero history without clearing
// the memory.  The synchronizer architecture only calls for "Delay L" and
// "Delay 2L" buffers; the circular-buffer form and the zero history are this
// design's choices.
//
// Timing: dout is combinational from the memory and the pointer; din is
// written on the clock edge of an enabled cycle.
module delay_line #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          filled;

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      filled <= 1'b0;
    end else if (en) begin
      if (ptr == AW'(DEPTH - 1)) begin
        ptr    <= '0;
        filled <= 1'b1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  assign dout = filled ? mem[ptr] : '0;
endmodule
