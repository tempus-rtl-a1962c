// tb_axis_fifo: unit test of the stream FIFO.
//
// A random producer and a random consumer (each stalling about a third of
// the clocks) move 2000 words through a DEPTH = 16 FIFO; every word must
// come out once, in order. The test also checks that the FIFO fills to
// exactly DEPTH words (in_ready low only when full), that count tracks the
// occupancy, and that with both sides always ready the FIFO passes one word
// per clock after the first.
module tb_axis_fifo;
  localparam int W = 32, DEPTH = 16, NW = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH):0] count;
  axis_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int sent = 0, got = 0, occ = 0, mode = 0, full_seen = 0, cyc = 0, t_q = 0, t_last = 0;

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s (sent %0d got %0d)", m, sent, got);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      int s2, o2;
      s2 = sent + ((in_valid && in_ready) ? 1 : 0);
      o2 = got;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== W'(got)) fail($sformatf("data %0d", out_data));
        if (got == NW - NW / 4) t_q = cyc;
        t_last = cyc;
        o2 = got + 1;
      end
      // occupancy and ready flag
      checks++;
      if (count != occ) fail($sformatf("count %0d vs %0d", count, occ));
      checks++;
      if (in_ready != (occ < DEPTH)) fail("in_ready does not match free space");
      if (occ == DEPTH) full_seen++;
      occ = occ + ((in_valid && in_ready) ? 1 : 0) - ((out_valid && out_ready) ? 1 : 0);
      sent = s2; got = o2;
      in_valid  <= (s2 < NW) && (mode == 1 || $urandom % 3 != 0);
      in_data   <= W'(s2);
      out_ready <= (mode == 1) || ($urandom % 3 == 0) || (mode == 2 && $urandom % 2 == 0);
    end
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // first half: slow consumer (fills the FIFO); then free flow
    wait (sent >= NW / 2);
    mode = 2;
    wait (got >= NW / 2 && occ == 0);
    mode = 1;
    wait (got == NW);
    repeat (3) @(posedge clk);
    checks++;
    if (full_seen == 0) fail("FIFO never became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // free-flow rate: the last quarter of the words leave one per clock
  always @(posedge clk) if (got == NW && t_q != 0) begin
    checks++;
    if (t_last - t_q != NW / 4 - 1)
      fail($sformatf("free-flow rate: %0d clocks for %0d words", t_last - t_q, NW / 4 - 1));
    t_q = 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
