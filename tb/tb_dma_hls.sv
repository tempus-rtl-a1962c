// tb_dma_hls: unit test of the PL data mover.
//
// NUM_A = 2 A streams, NUM_B = 4 B streams, SPLIT = 2 C streams; bursts of
// 8 beats with at most 4 in flight, FIFOs of 16 words. The A and B images
// in the memory model hold numbered words; word i of an image must appear
// on stream i mod NUM_X, in order. Two C sources each push a numbered
// sequence; C word i of the image in memory must come from source
// i mod SPLIT. Run 1 keeps every consumer ready and the memory never
// stalling and checks the transfer rate: the A image of 512 words must be
// delivered within 512 + 64 clocks of start (one word per clock plus
// latency). Run 2 stalls the stream consumers and the C sources at random;
// data and order are checked again, and a full FIFO holding the memory back
// must have been seen.
module tb_dma_hls;
  localparam int NA = 2, NB = 4, SP = 2, BURST = 8, OUTST = 4, FD = 16;
  localparam int AWD = 512, BWD = 768, CWD = 256;
  localparam int A_BASE = 0, B_BASE = 1024, C_BASE = 2048, MEMW = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic start, busy, done;
  logic         sa_valid [NA];
  logic         sa_ready [NA];
  logic [127:0] sa_data  [NA];
  logic         sb_valid [NB];
  logic         sb_ready [NB];
  logic [127:0] sb_data  [NB];
  logic         sc_valid [SP];
  logic         sc_ready [SP];
  logic [127:0] sc_data  [SP];

  // memory-side channels, two read ports (A, B) and one write port (C)
  logic         arvalid [2];
  logic         arready [2];
  logic [31:0]  araddr  [2];
  logic [7:0]   arlen   [2];
  logic         rvalid  [2];
  logic         rready  [2];
  logic [127:0] rdata   [2];
  logic         rlast   [2];
  logic         awvalid [1];
  logic         awready [1];
  logic [31:0]  awaddr  [1];
  logic [7:0]   awlen   [1];
  logic         wvalid  [1];
  logic         wready  [1];
  logic [127:0] wdata   [1];
  logic         wlast   [1];
  logic         bvalid  [1];
  logic         bready  [1];
  int unsigned  oob0, oob1;

  dma_hls #(.NUM_A(NA), .NUM_B(NB), .SPLIT(SP), .FIFO_DEPTH(FD), .BURST(BURST),
            .OUTSTANDING(OUTST)) dut (
    .clk, .rst_n, .start, .a_base(32'(A_BASE)), .b_base(32'(B_BASE)), .c_base(32'(C_BASE)),
    .a_words(32'(AWD)), .b_words(32'(BWD)), .c_words(32'(CWD)), .busy, .done,
    .a_arvalid(arvalid[0]), .a_arready(arready[0]), .a_araddr(araddr[0]), .a_arlen(arlen[0]),
    .a_rvalid(rvalid[0]), .a_rready(rready[0]), .a_rdata(rdata[0]), .a_rlast(rlast[0]),
    .b_arvalid(arvalid[1]), .b_arready(arready[1]), .b_araddr(araddr[1]), .b_arlen(arlen[1]),
    .b_rvalid(rvalid[1]), .b_rready(rready[1]), .b_rdata(rdata[1]), .b_rlast(rlast[1]),
    .c_awvalid(awvalid[0]), .c_awready(awready[0]), .c_awaddr(awaddr[0]), .c_awlen(awlen[0]),
    .c_wvalid(wvalid[0]), .c_wready(wready[0]), .c_wdata(wdata[0]), .c_wlast(wlast[0]),
    .c_bvalid(bvalid[0]), .c_bready(bready[0]),
    .sa_valid, .sa_ready, .sa_data, .sb_valid, .sb_ready, .sb_data,
    .sc_valid, .sc_ready, .sc_data
  );

  axi_mem_model #(.NR(2), .NW(1), .WORDS(MEMW), .STALL(0)) u_mem0 (
    .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .oob_cnt(oob0)
  );

  int checks = 0, failures = 0, cyc = 0, run = 0, full_hold = 0;
  int ga [NA];
  int gb [NB];
  int pc [SP];

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  function automatic logic [127:0] img_word(int base, int i);
    return {32'(run), 32'(base), 32'(i), 32'hC0DE};
  endfunction

  int a_all_t;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int k = 0; k < NA; k++) begin
        if (sa_valid[k] && sa_ready[k]) begin
          checks++;
          if (sa_data[k] !== img_word(A_BASE, ga[k] * NA + k)) fail($sformatf("A stream %0d word %0d", k, ga[k]));
          ga[k]++;
        end
        sa_ready[k] <= (run == 0) || ($urandom % 3 == 0);
      end
      for (int k = 0; k < NB; k++) begin
        if (sb_valid[k] && sb_ready[k]) begin
          checks++;
          if (sb_data[k] !== img_word(B_BASE, gb[k] * NB + k)) fail($sformatf("B stream %0d word %0d", k, gb[k]));
          gb[k]++;
        end
        sb_ready[k] <= (run == 0) || ($urandom % 3 == 0);
      end
      for (int s = 0; s < SP; s++) begin
        int n;
        n = pc[s] + ((sc_valid[s] && sc_ready[s]) ? 1 : 0);
        pc[s] = n;
        sc_valid[s] <= (n < CWD / SP) && ((sc_valid[s] && !sc_ready[s]) || run == 0 || $urandom % 2 == 0);
        sc_data[s]  <= {32'(run), 32'(s), 32'(n), 32'hCCCC};
      end
      if (ga[0] + ga[1] == AWD && a_all_t == 0) a_all_t = cyc;
      // the A reader has data but the FIFO it belongs to is full
      if (rvalid[0] && !rready[0]) full_hold++;
    end
  end

  task automatic do_run(int r);
    int t0;
    run = r;
    for (int i = 0; i < AWD; i++) u_mem0.mem[A_BASE + i] = img_word(A_BASE, i);
    for (int i = 0; i < BWD; i++) u_mem0.mem[B_BASE + i] = img_word(B_BASE, i);
    for (int i = 0; i < CWD; i++) u_mem0.mem[C_BASE + i] = '0;
    for (int k = 0; k < NA; k++) ga[k] = 0;
    for (int k = 0; k < NB; k++) gb[k] = 0;
    for (int s = 0; s < SP; s++) pc[s] = 0;
    a_all_t = 0;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cyc;
    // done follows the last C write; the A and B streams are independent of
    // the C sources here, so also wait for them to drain
    wait (done);
    wait (ga[0] + ga[1] == AWD && gb[0] + gb[1] + gb[2] + gb[3] == BWD);
    @(posedge clk);
    checks++;
    if (busy) fail("busy after all transfers");
    for (int i = 0; i < CWD; i++) begin
      checks++;
      if (u_mem0.mem[C_BASE + i] !== {32'(r), 32'(i % SP), 32'(i / SP), 32'hCCCC})
        fail($sformatf("C image word %0d = %h", i, u_mem0.mem[C_BASE + i]));
    end
    checks++;
    if (ga[0] + ga[1] != AWD || gb[0] + gb[1] + gb[2] + gb[3] != BWD) fail("stream word totals");
    if (r == 0) begin
      checks++;
      if (a_all_t - t0 > AWD / NA * NA + 64) fail($sformatf("A image took %0d clocks", a_all_t - t0));
    end
  endtask

  initial begin
    start = 0;
    for (int k = 0; k < NA; k++) sa_ready[k] = 0;
    for (int k = 0; k < NB; k++) sb_ready[k] = 0;
    for (int s = 0; s < SP; s++) begin sc_valid[s] = 0; sc_data[s] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    do_run(0);
    do_run(1);
    checks++;
    if (full_hold == 0) fail("no read was ever held back by a full FIFO");
    checks++;
    if (oob0 != 0) fail("write outside memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
