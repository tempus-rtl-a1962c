// axis_bcast: broadcast (circuit-switched multicast) of one stream to N
// receivers.
//
// The A operand is the same for every split of the compute block, so each A
// PLIO stream is delivered to the kernel at the same cascade position in all
// SPLIT chains. A word is consumed from the input once every receiver has
// taken it; receivers may take it in different clocks (a per-output "taken"
// bit remembers who already has it), so one slow receiver only holds the
// stream, never duplicates or drops a word.
//
// Interface: valid/ready in, N valid/ready outs sharing one data bus.
// Timing: no register on the data path; a word passes in the clock every
// receiver is ready, else over several clocks.
//
// The paper specifies broadcast circuit switching of the A streams; the
// handshake details are this design's own.
module axis_bcast #(
  parameter int unsigned N = 2,
  parameter int unsigned W = tempus_pkg::PLIO_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid [N],
  input  logic         out_ready [N],
  output logic [W-1:0] out_data
);
  logic [N-1:0] taken, acc;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      out_valid[i] = in_valid && !taken[i];
      acc[i]       = taken[i] || out_ready[i];
    end
    in_ready = &acc;
  end
  assign out_data = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) taken <= '0;
    else if (in_valid) begin
      if (in_ready) taken <= '0;
      else for (int i = 0; i < N; i++)
        if (out_ready[i]) taken[i] <= 1'b1;
    end
  end

  // every receiver sees each word exactly once
  no_dup: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));
endmodule
