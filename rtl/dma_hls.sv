// dma_hls: the programmable-logic data mover between external memory and
// the compute block.
//
// Three engines run concurrently (the dataflow arrangement of the kernel):
//  * A reader: reads a_words 128-bit words from the A stream image at
//    a_base in bursts and hands word i to A stream (i mod NUM_A);
//  * B reader: the same for the B stream image, word i to B stream
//    (i mod NUM_B);
//  * C writer: collects the SPLIT result streams and writes them back,
//    taking word i from C stream (i mod SPLIT), i.e. the streams'
//    words interleaved pairwise for SPLIT = 2, to c_base + i.
// Every stream passes through an axis_fifo of FIFO_DEPTH words. Because the
// readers and the writer are independent, result collection never waits
// for input reading to finish, which keeps the loop free of deadlock.
//
// Memory side: three simplified AXI4 masters with word (128-bit) addresses:
// read address (addr, len = beats-1), read data (data, last); write address,
// write data (data, last), write response. Bursts are BURST beats long (the
// last one shorter); at most OUTSTANDING read bursts are in flight per
// reader. A read beat is accepted only when its stream FIFO has room, so a
// stalled kernel back-pressures the memory rather than losing data.
//
// Control: start (one clock) latches the bases and lengths; busy is high
// until every C word has been written and acknowledged, then done pulses.
//
// Timing: each reader moves one word per clock when its FIFO has room, the
// writer one word per clock when the C streams have data.
//
// From the paper: 128-bit burst transfers at one word per clock, modulo
// distribution over NUM_A = 8 / NUM_B = 16 streams, lightweight streaming
// FIFOs only, concurrent C collection with pairwise writes. Own choices:
// FIFO depth 16, bursts of 32 beats with 32 in flight, word addressing, the
// simplified AXI channel set, and the C image layout.
//
// Lint notes: the FIFO occupancy outputs (fa_cnt, fb_cnt, fc_cnt) are left
// unused on purpose; the readers use the ready flags only.
module dma_hls #(
  parameter int unsigned NUM_A       = 8,
  parameter int unsigned NUM_B       = 16,
  parameter int unsigned SPLIT       = 2,
  parameter int unsigned ADDR_W      = 32,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned BURST       = 32,
  parameter int unsigned OUTSTANDING = 32,
  localparam int unsigned PW         = tempus_pkg::PLIO_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] b_base,
  input  logic [ADDR_W-1:0] c_base,
  input  logic [31:0]       a_words,
  input  logic [31:0]       b_words,
  input  logic [31:0]       c_words,
  output logic              busy,
  output logic              done,
  // A read master
  output logic              a_arvalid,
  input  logic              a_arready,
  output logic [ADDR_W-1:0] a_araddr,
  output logic [7:0]        a_arlen,
  input  logic              a_rvalid,
  output logic              a_rready,
  input  logic [PW-1:0]     a_rdata,
  input  logic              a_rlast,
  // B read master
  output logic              b_arvalid,
  input  logic              b_arready,
  output logic [ADDR_W-1:0] b_araddr,
  output logic [7:0]        b_arlen,
  input  logic              b_rvalid,
  output logic              b_rready,
  input  logic [PW-1:0]     b_rdata,
  input  logic              b_rlast,
  // C write master
  output logic              c_awvalid,
  input  logic              c_awready,
  output logic [ADDR_W-1:0] c_awaddr,
  output logic [7:0]        c_awlen,
  output logic              c_wvalid,
  input  logic              c_wready,
  output logic [PW-1:0]     c_wdata,
  output logic              c_wlast,
  input  logic              c_bvalid,
  output logic              c_bready,
  // PLIO streams towards the compute block
  output logic              sa_valid [NUM_A],
  input  logic              sa_ready [NUM_A],
  output logic [PW-1:0]     sa_data  [NUM_A],
  output logic              sb_valid [NUM_B],
  input  logic              sb_ready [NUM_B],
  output logic [PW-1:0]     sb_data  [NUM_B],
  // PLIO streams from the compute block
  input  logic              sc_valid [SPLIT],
  output logic              sc_ready [SPLIT],
  input  logic [PW-1:0]     sc_data  [SPLIT]
);
  localparam int unsigned CNTW = $clog2(FIFO_DEPTH) + 1;
  localparam int unsigned SAW  = (NUM_A > 1) ? $clog2(NUM_A) : 1;
  localparam int unsigned SBW  = (NUM_B > 1) ? $clog2(NUM_B) : 1;
  localparam int unsigned SCW  = (SPLIT > 1) ? $clog2(SPLIT) : 1;

  logic run_a, run_b;

  // ------------------------------------------------------------ readers
  logic          fa_iv [NUM_A];
  logic          fa_ir [NUM_A];
  logic          fb_iv [NUM_B];
  logic          fb_ir [NUM_B];
  logic [CNTW-1:0] fa_cnt [NUM_A];
  logic [CNTW-1:0] fb_cnt [NUM_B];
  logic [31:0]   a_rbeat, b_rbeat;
  logic [SAW-1:0] a_sel;
  logic [SBW-1:0] b_sel;

  dma_rd_engine #(.ADDR_W(ADDR_W), .BURST(BURST), .OUTSTANDING(OUTSTANDING)) u_rd_a (
    .clk, .rst_n, .start, .base(a_base), .words(a_words), .running(run_a),
    .arvalid(a_arvalid), .arready(a_arready), .araddr(a_araddr), .arlen(a_arlen),
    .rvalid(a_rvalid), .rready(a_rready), .rlast(a_rlast),
    .sink_ready(fa_ir[a_sel]), .beat(a_rbeat)
  );
  dma_rd_engine #(.ADDR_W(ADDR_W), .BURST(BURST), .OUTSTANDING(OUTSTANDING)) u_rd_b (
    .clk, .rst_n, .start, .base(b_base), .words(b_words), .running(run_b),
    .arvalid(b_arvalid), .arready(b_arready), .araddr(b_araddr), .arlen(b_arlen),
    .rvalid(b_rvalid), .rready(b_rready), .rlast(b_rlast),
    .sink_ready(fb_ir[b_sel]), .beat(b_rbeat)
  );

  // stream_idx = i mod NUM_X (sequential distribution)
  assign a_sel = $bits(a_sel)'(a_rbeat % NUM_A);
  assign b_sel = $bits(b_sel)'(b_rbeat % NUM_B);

  for (genvar i = 0; i < NUM_A; i++) begin : g_fa
    assign fa_iv[i] = a_rvalid && a_rready && (a_sel == $bits(a_sel)'(i));
    axis_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(fa_iv[i]), .in_ready(fa_ir[i]), .in_data(a_rdata),
      .out_valid(sa_valid[i]), .out_ready(sa_ready[i]), .out_data(sa_data[i]),
      .count(fa_cnt[i])
    );
  end
  for (genvar i = 0; i < NUM_B; i++) begin : g_fb
    assign fb_iv[i] = b_rvalid && b_rready && (b_sel == $bits(b_sel)'(i));
    axis_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(fb_iv[i]), .in_ready(fb_ir[i]), .in_data(b_rdata),
      .out_valid(sb_valid[i]), .out_ready(sb_ready[i]), .out_data(sb_data[i]),
      .count(fb_cnt[i])
    );
  end

  // ------------------------------------------------------------ C writer
  logic          fc_ov [SPLIT];
  logic          fc_or [SPLIT];
  logic [PW-1:0] fc_od [SPLIT];
  logic [CNTW-1:0] fc_cnt [SPLIT];

  for (genvar s = 0; s < SPLIT; s++) begin : g_fc
    axis_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(sc_valid[s]), .in_ready(sc_ready[s]), .in_data(sc_data[s]),
      .out_valid(fc_ov[s]), .out_ready(fc_or[s]), .out_data(fc_od[s]),
      .count(fc_cnt[s])
    );
  end

  logic              c_run;
  logic [31:0]       c_total, aw_sent, w_sent, b_got;
  logic [ADDR_W-1:0] c_addr;
  logic [7:0]        w_inburst;
  logic [SCW-1:0] c_sel;
  logic [31:0]       aw_left;

  assign c_sel   = $bits(c_sel)'(w_sent % SPLIT);
  assign aw_left = c_total - aw_sent;
  assign c_awvalid = c_run && (aw_sent < c_total);
  assign c_awaddr  = c_addr + ADDR_W'(aw_sent);
  assign c_awlen   = (aw_left >= BURST) ? 8'(BURST - 1) : 8'(aw_left - 1);
  assign c_wvalid  = c_run && (w_sent < c_total) && fc_ov[c_sel];
  assign c_wdata   = fc_od[c_sel];
  assign c_wlast   = (w_inburst == 8'(BURST - 1)) || (w_sent == c_total - 1);
  assign c_bready  = 1'b1;

  always_comb
    for (int s = 0; s < SPLIT; s++)
      fc_or[s] = c_run && (w_sent < c_total) && c_wready && (c_sel == $bits(c_sel)'(s));

  logic [31:0] c_bursts;
  assign c_bursts = (c_total + BURST - 1) / BURST;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_run <= 1'b0; c_total <= '0; aw_sent <= '0; w_sent <= '0; b_got <= '0;
      c_addr <= '0; w_inburst <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        c_run <= 1'b1; c_total <= c_words; c_addr <= c_base;
        aw_sent <= '0; w_sent <= '0; b_got <= '0; w_inburst <= '0;
      end else if (c_run) begin
        if (c_awvalid && c_awready)
          aw_sent <= aw_sent + ((aw_left >= BURST) ? BURST : aw_left);
        if (c_wvalid && c_wready) begin
          w_sent    <= w_sent + 1;
          w_inburst <= c_wlast ? 8'd0 : w_inburst + 1'b1;
        end
        if (c_bvalid) b_got <= b_got + 1;
        if (c_bvalid && (b_got + 1 == c_bursts)) begin
          c_run <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = c_run || run_a || run_b;

  // a read beat is only taken when the FIFO it belongs to has room
  rd_a_guard: assert property (@(posedge clk) disable iff (!rst_n)
    a_rvalid && a_rready |-> fa_ir[a_sel]);
endmodule
