// axi_mem_model: behavioural model of the external DRAM seen through the
// network-on-chip, for simulation only (not synthesizable logic).
//
// One array of WORDS 128-bit words shared by NR read ports and NW write
// ports, all using the simplified AXI4 channels of the design (word
// addresses, len = beats-1). Each port queues address requests and serves one
// data beat per clock; a write response follows the last beat of each burst.
// With STALL > 0 every ready/valid the model drives is withheld at random
// in about STALL percent of the clocks, to exercise back-pressure. Reads of
// words beyond WORDS return zero; writes there are dropped and counted in
// oob_cnt.
module axi_mem_model #(
  parameter int unsigned NR     = 1,
  parameter int unsigned NW     = 1,
  parameter int unsigned WORDS  = 1024,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned STALL  = 0,
  parameter int unsigned LAT    = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arvalid [NR],
  output logic              arready [NR],
  input  logic [ADDR_W-1:0] araddr  [NR],
  input  logic [7:0]        arlen   [NR],
  output logic              rvalid  [NR],
  input  logic              rready  [NR],
  output logic [127:0]      rdata   [NR],
  output logic              rlast   [NR],
  input  logic              awvalid [NW],
  output logic              awready [NW],
  input  logic [ADDR_W-1:0] awaddr  [NW],
  input  logic [7:0]        awlen   [NW],
  input  logic              wvalid  [NW],
  output logic              wready  [NW],
  input  logic [127:0]      wdata   [NW],
  input  logic              wlast   [NW],
  output logic              bvalid  [NW],
  input  logic              bready  [NW],
  output int unsigned       oob_cnt
);
  logic [127:0] mem [WORDS];

  function automatic bit stall_now();
    return (STALL != 0) && (($urandom % 100) < STALL);
  endfunction

  // ------------------------------------------------------------ reads
  for (genvar p = 0; p < NR; p++) begin : g_rd
    typedef struct { int unsigned addr; int unsigned beats; longint unsigned due; } req_t;
    req_t        q[$];
    int unsigned beat;
    longint unsigned now;

    always_ff @(posedge clk) now <= rst_n ? now + 1 : 0;

    always_comb begin
      rvalid[p] = 1'b0; rdata[p] = '0; rlast[p] = 1'b0;
      if (q.size() != 0 && q[0].due <= now) begin
        rvalid[p] = 1'b1;
        rdata[p]  = (q[0].addr + beat < WORDS) ? mem[q[0].addr + beat] : '0;
        rlast[p]  = (beat + 1 == q[0].beats);
      end
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        q.delete(); beat <= 0; arready[p] <= 1'b0;
      end else begin
        arready[p] <= !stall_now() && q.size() < 64;
        if (arvalid[p] && arready[p])
          q.push_back('{addr: araddr[p], beats: arlen[p] + 1, due: now + LAT});
        if (rvalid[p] && rready[p]) begin
          if (rlast[p]) begin void'(q.pop_front()); beat <= 0; end
          else beat <= beat + 1;
        end
      end
    end
  end

  // ------------------------------------------------------------ writes
  int unsigned oob [NW];
  always_comb begin
    oob_cnt = 0;
    for (int p = 0; p < NW; p++) oob_cnt += oob[p];
  end

  for (genvar p = 0; p < NW; p++) begin : g_wr
    int unsigned aq[$];
    int unsigned beat, bpend;

    assign bvalid[p] = (bpend != 0);

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        aq.delete(); beat <= 0; bpend <= 0; oob[p] <= 0;
        awready[p] <= 1'b0; wready[p] <= 1'b0;
      end else begin
        awready[p] <= !stall_now();
        // data is taken only for a burst whose address has arrived
        wready[p]  <= !stall_now() &&
                      (aq.size() + ((awvalid[p] && awready[p]) ? 1 : 0)
                       - ((wvalid[p] && wready[p] && wlast[p]) ? 1 : 0) > 0);
        if (awvalid[p] && awready[p]) aq.push_back(awaddr[p]);
        if (wvalid[p] && wready[p]) begin
          if (aq.size() == 0) $fatal(1, "axi_mem_model: write data before address");
          if (aq[0] + beat < WORDS) mem[aq[0] + beat] <= wdata[p];
          else oob[p] <= oob[p] + 1;
          if (wlast[p]) begin void'(aq.pop_front()); beat <= 0; end
          else beat <= beat + 1;
        end
        bpend <= bpend + ((wvalid[p] && wready[p] && wlast[p]) ? 1 : 0)
                       - ((bvalid[p] && bready[p]) ? 1 : 0);
      end
    end
  end
endmodule
