// tb_pkt_switch: unit test of the B-stream packet switch.
//
// NDEST = 4 outputs, packets of PKT_WORDS = 8 data words after a header.
// A random sequence of 200 packets is sent, each to a random destination;
// about one in ten headers is corrupted (wrong marker or destination out of
// range). Good packets must arrive complete and in order at their own
// output only; bad packets must be dropped whole and raise the sticky err
// flag. Outputs stall at random. The header costs one clock: a packet of
// PKT_WORDS words with no stalls passes in PKT_WORDS + 1 clocks.
module tb_pkt_switch;
  import tempus_pkg::*;
  localparam int ND = 4, PK = 8, NP = 200, W = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic in_valid, in_ready, err;
  logic [W-1:0] in_data, out_data;
  logic out_valid [ND];
  logic out_ready [ND];
  pkt_switch #(.NDEST(ND), .PKT_WORDS(PK)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, mode = 0;
  logic [W-1:0] stim [$];
  logic [W-1:0] exp_q [ND][$];
  int nbad = 0, words_in = 0, t_hs0 = -1, t_hs1 = -1;

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  // stimulus driver
  int idx = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      int n;
      n = idx + ((in_valid && in_ready) ? 1 : 0);
      if (in_valid && in_ready) begin
        words_in++;
        if (mode == 1) begin if (t_hs0 < 0) t_hs0 = cyc; t_hs1 = cyc; end
      end
      idx = n;
      in_valid <= (n < stim.size()) && (mode == 1 || $urandom % 4 != 0);
      in_data  <= (n < stim.size()) ? stim[n] : '0;
      for (int d = 0; d < ND; d++) out_ready[d] <= (mode == 1) || ($urandom % 3 != 0);
      for (int d = 0; d < ND; d++)
        if (out_valid[d] && out_ready[d]) begin
          checks++;
          if (exp_q[d].size() == 0) fail($sformatf("unexpected word at output %0d", d));
          else if (out_data !== exp_q[d].pop_front()) fail($sformatf("data at output %0d", d));
        end
    end
  end

  initial begin
    in_valid = 0; in_data = '0;
    for (int d = 0; d < ND; d++) out_ready[d] = 0;
    for (int p = 0; p < NP; p++) begin
      int dst, bad;
      logic [W-1:0] h, wd;
      dst = $urandom % ND;
      bad = ($urandom % 10 == 0);
      h = pkt_header(8'(dst));
      if (bad) begin
        if ($urandom % 2) h[W-1 -: 8] = 8'h3C; else h[7:0] = 8'(ND + $urandom % 8);
        nbad++;
      end
      stim.push_back(h);
      for (int i = 0; i < PK; i++) begin
        wd = {$urandom, $urandom, $urandom, $urandom};
        stim.push_back(wd);
        if (!bad) exp_q[dst].push_back(wd);
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (idx == stim.size());
    repeat (20) @(posedge clk);
    for (int d = 0; d < ND; d++) begin
      checks++;
      if (exp_q[d].size() != 0) fail($sformatf("output %0d missing %0d words", d, exp_q[d].size()));
    end
    checks++;
    if (nbad != 0 && !err) fail("err not raised for bad headers");

    // timing: with nothing stalling, one good packet takes PK + 1 clocks
    rst_n <= 0;
    mode = 1;
    stim.delete();
    stim.push_back(pkt_header(8'd2));
    for (int i = 0; i < PK; i++) begin stim.push_back(W'(i)); exp_q[2].push_back(W'(i)); end
    idx = 0;
    for (int d = 0; d < ND; d++) out_ready[d] = 1;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    begin
      wait (idx == stim.size());
      checks++;
      if (t_hs1 - t_hs0 + 1 != PK + 1) fail($sformatf("packet took %0d clocks", t_hs1 - t_hs0 + 1));
      checks++;
      if (err) fail("err set by a good packet");
    end
    repeat (3) @(posedge clk);
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
