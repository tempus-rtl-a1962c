// tb_axis_bcast: unit test of the A-stream broadcast.
//
// One source sends 1500 numbered words to N = 2 receivers, each of which
// stalls at random. Every receiver must see every word exactly once, in
// order; the source may advance only after all receivers have taken the
// word. The test counts the clocks in which one receiver took a word while
// the other stalled (the word is held for it) and requires such holds to
// happen. With all receivers ready the broadcast must pass one word per
// clock.
module tb_axis_bcast;
  localparam int N = 2, W = 32, NW = 1500;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic in_valid, in_ready;
  logic [W-1:0] in_data, out_data;
  logic out_valid [N];
  logic out_ready [N];
  axis_bcast #(.N(N), .W(W)) dut (.*);

  int checks = 0, failures = 0, sent = 0, holds = 0, cyc = 0, mode = 0;
  int got [N];
  int t0, t1;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      int part;
      part = 0;
      for (int i = 0; i < N; i++)
        if (out_valid[i] && out_ready[i]) begin
          checks++;
          if (out_data !== W'(got[i])) begin
            failures++;
            if (failures < 10) $display("FAIL rx %0d got %0d expected %0d", i, out_data, got[i]);
          end
          got[i]++;
          part++;
        end
      if (part != 0 && !(in_valid && in_ready)) holds++;
      if (in_valid && in_ready) begin
        sent++;
        // the source only advances once every receiver has the word
        checks++;
        for (int i = 0; i < N; i++)
          if (got[i] != sent) begin failures++; $display("FAIL source advanced early"); break; end
      end
      in_valid <= (sent < NW);
      in_data  <= W'(sent);
      for (int i = 0; i < N; i++) out_ready[i] <= (mode == 1) || ($urandom % 2 == 0);
    end
  end

  initial begin
    in_valid = 0; in_data = '0;
    for (int i = 0; i < N; i++) begin out_ready[i] = 0; got[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (sent == NW - 500);
    mode = 1;
    repeat (5) @(posedge clk);
    t0 = cyc; t1 = sent;
    repeat (100) @(posedge clk);
    checks++;
    if (sent - t1 != 100) begin failures++; $display("FAIL rate %0d words in 100 clocks", sent - t1); end
    wait (sent == NW);
    repeat (3) @(posedge clk);
    checks++;
    if (holds == 0) begin failures++; $display("FAIL no partial take was ever held"); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] != NW) begin failures++; $display("FAIL rx %0d got %0d words", i, got[i]); end
    end
    $display("holds=%0d", holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
