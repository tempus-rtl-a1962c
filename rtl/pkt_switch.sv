// pkt_switch: packet switch that spreads one B PLIO stream over the kernels
// of one split.
//
// The B operand differs per split and per cascade position. To save PLIO
// channels a single stream may be time-multiplexed over several kernels:
// every B tile travels as a packet, a header word naming the destination
// kernel followed by exactly PKT_WORDS data words (one B tile). The switch
// reads the header, then steers the body to that output. With NDEST = 1
// (one PLIO per kernel) the switch still checks each header.
//
// Header word: bits [PLIO_W-1 -: 8] = PKT_MARK, bits [7:0] = destination.
// A header without the marker or with an out-of-range destination sets the
// sticky err flag; the packet is then dropped (body consumed, not
// forwarded) so the stream stays aligned.
//
// Interface: valid/ready input, NDEST valid/ready outputs sharing one data
// bus. Timing: the header costs one clock; body words pass combinationally.
//
// The paper specifies packet switching for the B streams; the header format
// and the fixed packet length are this design's own.
module pkt_switch #(
  parameter int unsigned NDEST     = 1,
  parameter int unsigned PKT_WORDS = 2048,
  localparam int unsigned W        = tempus_pkg::PLIO_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid [NDEST],
  input  logic         out_ready [NDEST],
  output logic [W-1:0] out_data,
  output logic         err
);
  import tempus_pkg::*;

  localparam int unsigned DW = (NDEST > 1) ? $clog2(NDEST) : 1;
  localparam int unsigned CW = $clog2(PKT_WORDS + 1);

  logic          body, drop;
  logic [DW-1:0] dest;
  logic [CW-1:0] cnt;
  logic          hdr_ok;

  assign hdr_ok = (in_data[W-1 -: 8] == PKT_MARK) &&
                  (in_data[PKT_ID_W-1:0] < PKT_ID_W'(NDEST));

  always_comb begin
    for (int i = 0; i < NDEST; i++)
      out_valid[i] = in_valid && body && !drop && (DW'(i) == dest);
    if (!body) in_ready = 1'b1;
    else if (drop) in_ready = 1'b1;
    else in_ready = out_ready[dest];
  end
  assign out_data = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      body <= 1'b0; drop <= 1'b0; dest <= '0; cnt <= '0; err <= 1'b0;
    end else if (in_valid && in_ready) begin
      if (!body) begin
        body <= 1'b1;
        cnt  <= '0;
        dest <= DW'(in_data[PKT_ID_W-1:0]);
        drop <= !hdr_ok;
        if (!hdr_ok) err <= 1'b1;
      end else if (cnt == CW'(PKT_WORDS - 1)) begin
        body <= 1'b0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
