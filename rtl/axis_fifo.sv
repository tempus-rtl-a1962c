// axis_fifo: synchronous streaming FIFO placed on every PLIO stream.
//
// The programmable-logic side of the design holds no large buffers, only
// shallow FIFOs between the DMA and the stream interfaces; they let the DMA
// read ahead while a kernel is busy and decouple the concurrent A, B and C
// transfers. Depth is a power of two (default 16, the paper's FIFO depth).
//
// Interface: valid/ready write side, valid/ready read side, count of words
// held. Timing: first-word latency one clock (registered storage, read data
// from the array at the head pointer); full throughput of one word per clock
// in both directions, also when full and read in the same clock.
module axis_fifo #(
  parameter int unsigned W     = tempus_pkg::PLIO_W,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [W-1:0]             out_data,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("axis_fifo: DEPTH must be a power of two");
endmodule
