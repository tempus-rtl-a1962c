// dma_rd_engine: burst read engine used by dma_hls for each input matrix.
//
// After start it reads `words` consecutive 128-bit words from `base`:
// read-address requests of BURST beats (the last one shorter), at most
// OUTSTANDING bursts in flight. Read data is accepted only while
// sink_ready is high; `beat` is the index of the word currently on the
// read-data channel, which the caller uses to pick the destination stream.
// running stays high until the last word has been accepted.
//
// Interface: simplified AXI4 read channels with word addresses.
// Timing: one address request per clock while the outstanding limit allows,
// one data word per clock while the sink accepts.
module dma_rd_engine #(
  parameter int unsigned ADDR_W      = 32,
  parameter int unsigned BURST       = 32,
  parameter int unsigned OUTSTANDING = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       words,
  output logic              running,
  output logic              arvalid,
  input  logic              arready,
  output logic [ADDR_W-1:0] araddr,
  output logic [7:0]        arlen,
  input  logic              rvalid,
  output logic              rready,
  input  logic              rlast,
  input  logic              sink_ready,
  output logic [31:0]       beat
);
  logic [31:0]       total, issued;
  logic [ADDR_W-1:0] addr0;
  logic [$clog2(OUTSTANDING+1)-1:0] inflight;
  logic [31:0]       left;
  logic              ar_fire, r_fire, last_fire;

  assign left      = total - issued;
  assign arvalid   = running && (issued < total) &&
                     (inflight < $bits(inflight)'(OUTSTANDING));
  assign araddr    = addr0 + ADDR_W'(issued);
  assign arlen     = (left >= BURST) ? 8'(BURST - 1) : 8'(left - 1);
  assign rready    = running && sink_ready;
  assign ar_fire   = arvalid && arready;
  assign r_fire    = rvalid && rready;
  assign last_fire = r_fire && rlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; total <= '0; issued <= '0; addr0 <= '0;
      inflight <= '0; beat <= '0;
    end else if (start) begin
      running <= (words != 0); total <= words; issued <= '0; addr0 <= base;
      inflight <= '0; beat <= '0;
    end else if (running) begin
      if (ar_fire) issued <= issued + ((left >= BURST) ? BURST : left);
      inflight <= inflight + $bits(inflight)'(ar_fire) - $bits(inflight)'(last_fire);
      if (r_fire) begin
        beat <= beat + 1;
        if (beat + 1 == total) running <= 1'b0;
      end
    end
  end

  burst_end: assert property (@(posedge clk) disable iff (!rst_n)
    r_fire && (beat + 1 == total) |-> rlast);
endmodule
