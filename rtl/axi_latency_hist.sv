// axi_latency_hist: histogram of the read turnaround time of a group of AXI
// read ports, used to monitor the HBM pseudo-channels behind HBM2DO and
// HBM2TF.
//
// How it works: a free-running cycle counter is stamped into a per-channel
// ring of DEPTH entries at every accepted read address (ar_valid && ar_ready)
// and taken out at every accepted read beat (r_valid && r_ready).  Reads of
// one pseudo-channel return in order, so the oldest stamp belongs to the
// returning beat.  The difference (cycles from address to data) selects bin
// min(latency >> BIN_SHIFT, NBINS-1); the last bin collects everything
// slower.  Several channels may return in the same cycle: each bin adds the
// number of channels that hit it.  Counters saturate.  The module only
// watches the handshakes, it never stalls them.
//
// Interface: the AR/R valid and ready bits of NCH channels, a synchronous
// clear (all bins to zero, rings kept) and a combinational read port
// rd_bin -> rd_count.  Timing: a beat is counted in the cycle after its
// handshake.  DEPTH must be at least the number of reads a channel can have
// outstanding (16 with 4-bit AXI IDs); a return with an empty ring is ignored.
//
// Paper: latency histograms inside the AXI interfaces that monitor the read
// data turnaround time.  Bin count, bin width, counter width and the way they
// are read out are this design's choices.
module axi_latency_hist #(
  parameter int NCH       = 2,
  parameter int DEPTH     = 16,
  parameter int NBINS     = 16,
  parameter int BIN_SHIFT = 2,
  parameter int CNT_W     = 32,
  parameter int TS_W      = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NCH-1:0]           ar_valid,
  input  logic [NCH-1:0]           ar_ready,
  input  logic [NCH-1:0]           r_valid,
  input  logic [NCH-1:0]           r_ready,
  input  logic                     clear,
  input  logic [$clog2(NBINS)-1:0] rd_bin,
  output logic [CNT_W-1:0]         rd_count
);
  localparam int AW = $clog2(DEPTH);
  localparam int BW = $clog2(NBINS);
  localparam int NW = $clog2(NCH+1);

  logic [TS_W-1:0]  now;
  logic [TS_W-1:0]  ts   [NCH][DEPTH];
  logic [AW-1:0]    wp   [NCH];
  logic [AW-1:0]    rp   [NCH];
  logic [AW:0]      fill [NCH];
  logic [CNT_W-1:0] hist [NBINS];

  logic [NCH-1:0]   push, pop;
  logic [BW-1:0]    bin  [NCH];
  logic [NW-1:0]    hits [NBINS];

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      logic [TS_W-1:0] lat;
      push[c] = ar_valid[c] && ar_ready[c];
      pop[c]  = r_valid[c] && r_ready[c] && (fill[c] != '0);
      lat     = now - ts[c][rp[c]];
      bin[c]  = ((lat >> BIN_SHIFT) >= TS_W'(NBINS-1)) ? BW'(NBINS-1) : BW'(lat >> BIN_SHIFT);
    end
    for (int b = 0; b < NBINS; b++) begin
      hits[b] = '0;
      for (int c = 0; c < NCH; c++)
        if (pop[c] && bin[c] == BW'(b)) hits[b] = hits[b] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCH; c++)
      if (push[c]) ts[c][wp[c]] <= now;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0;
      for (int c = 0; c < NCH; c++) begin
        wp[c] <= '0; rp[c] <= '0; fill[c] <= '0;
      end
      for (int b = 0; b < NBINS; b++) hist[b] <= '0;
    end else begin
      now <= now + 1'b1;
      for (int c = 0; c < NCH; c++) begin
        if (push[c]) wp[c] <= wp[c] + 1'b1;
        if (pop[c])  rp[c] <= rp[c] + 1'b1;
        fill[c] <= fill[c] + (AW+1)'(push[c]) - (AW+1)'(pop[c]);
      end
      for (int b = 0; b < NBINS; b++) begin
        if (clear)
          hist[b] <= '0;
        else if (hits[b] != '0)
          hist[b] <= (hist[b] > ~CNT_W'(0) - CNT_W'(hits[b])) ? ~CNT_W'(0) : hist[b] + CNT_W'(hits[b]);
      end
    end
  end

  assign rd_count = hist[rd_bin];

  initial begin
    assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");
  end
endmodule
