// data_organiser: on-the-fly database of the clusters of one event, indexed
// by super-strip (SSID), from which the clusters of every matched pattern
// (road) are fetched for the track fit.
//
// Queueing: each of the eight layers has a FIFO (QDEPTH) that holds the
// incoming {SSID, cluster} words, and the end-of-event marker, while the
// previous event is still being read out.
//
// Write phase, all layers in parallel: clusters must arrive with all
// clusters of one SSID in one uninterrupted run.  Each cluster is appended to
// the Cluster List Memory (CLM) at the layer's write pointer.  The first
// cluster of a run writes its CLM address into the Cluster List Pointer
// memory at the SSID, and every cluster of the run writes the running count
// into the Cluster Counter Memory at the SSID.  When every layer has seen
// its end-of-event marker the block switches to the read phase.
//
// Read phase: the Interface forwards each roadID from the AM side to the
// HBM (hreq_*) with a requestID and remembers the roadID under it.  For each
// returned pattern (sectorID and one SSID per layer) the lookup reads the
// pointer and count of each layer's SSID in the cycle it accepts the
// pattern, then reads up to MAXCL clusters from the CLM (one per cycle, all
// layers in parallel, one cycle of read latency) and offers the road with
// its clusters to the Track Fitter.  With kmax = max(1, min(max count,
// MAXCL)) the road is offered kmax + 2 cycles after the pattern is accepted
// and the next pattern can be accepted kmax + 3 cycles after the previous
// one: 4 cycles per road with one cluster per layer, one more than the 3
// the original firmware needs.  The pointer memory is never
// cleared: the CLM stores the SSID with each cluster, and a pointer is
// trusted only if it points below this event's write pointer at a cluster
// with the same SSID (a stale pointer can not pass this test because the
// runs are contiguous).  When the road stream's end-of-event has been seen
// and every request has been answered, the write pointers reset and the
// next event is taken from the queues.
//
// The three memories per layer and the queueing follow the paper; the
// stale-pointer test, MAXCL, the sizes and the handshakes are this design's
// choices.  Clusters beyond CLM_DEPTH in one layer are dropped and counted.
module data_organiser
  import prm_pkg::*;
#(
  parameter int CLM_DEPTH = 2048,
  parameter int QDEPTH    = 64,
  parameter int RID_W     = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic     [NLAYERS-1:0]        cl_valid,
  input  do_in_t   [NLAYERS-1:0]        cl_word,
  output logic     [NLAYERS-1:0]        cl_ready,
  input  logic                          road_valid,
  input  road_word_t                    road_word,
  output logic                          road_ready,
  output logic                          hreq_valid,
  output logic [ROAD_W-1:0]             hreq_road,
  output logic [RID_W-1:0]              hreq_id,
  input  logic                          hreq_ready,
  input  logic                          hrsp_valid,
  input  logic [RID_W-1:0]              hrsp_id,
  input  patt_rec_t                     hrsp_patt,
  output logic                          hrsp_ready,
  output logic                          tf_valid,
  output do_road_t                      tf_road,
  input  logic                          tf_ready,
  output logic [15:0]                   events,      // events completed
  output logic [15:0]                   overflows    // clusters dropped
);
  localparam int CAW = $clog2(CLM_DEPTH);
  localparam int KW  = $clog2(MAXCL+1);

  typedef enum logic {P_WRITE, P_READ} phase_e;
  typedef enum logic [1:0] {L_IDLE, L_CL, L_OUT} lk_e;
  phase_e phase;
  lk_e    lk;

  logic [NLAYERS-1:0] done, ovf;
  logic               road_ee;
  logic [RID_W:0]     outstanding;
  logic [RID_W-1:0]   next_id;
  logic [ROAD_W-1:0]  road_tab [2**RID_W];
  patt_rec_t          patt_q;
  logic [ROAD_W-1:0]  road_q;
  logic [KW-1:0]      k, kmax;
  logic               lk_accept;

  // ---------------- Interface: roads to the HBM ----------------
  logic fwd;
  assign hreq_valid = phase == P_READ && road_valid && !road_word.eoe && !road_ee &&
                      !outstanding[RID_W];
  assign hreq_road  = road_word.road;
  assign hreq_id    = next_id;
  assign fwd        = hreq_valid && hreq_ready;
  assign road_ready = fwd || (phase == P_READ && road_valid && road_word.eoe && !road_ee);
  always_ff @(posedge clk) if (fwd) road_tab[next_id] <= road_word.road;

  assign lk_accept  = (lk == L_IDLE) && hrsp_valid;
  assign hrsp_ready = (lk == L_IDLE);

  // ---------------- per-layer memories ----------------
  logic [NLAYERS-1:0][CAW-1:0] ptr_q;
  logic [NLAYERS-1:0][7:0]     cnt_q;
  logic [NLAYERS-1:0][CLW-1:0]        ncl_r;
  logic [NLAYERS-1:0][MAXCL-1:0][31:0] cl_r;

  for (genvar l = 0; l < NLAYERS; l++) begin : g_layer
    // Queueing
    logic    q_valid, q_pop;
    do_in_t  q_word;
    sync_fifo #(.W($bits(do_in_t)), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .in_valid(cl_valid[l]), .in_ready(cl_ready[l]), .in_data(cl_word[l]),
      .out_valid(q_valid), .out_ready(q_pop), .out_data(q_word), .count());

    logic [CAW:0]        wptr;
    logic [SSID_W-1:0]   last_ssid;
    logic [7:0]          run;
    logic                wr, newrun;
    assign q_pop  = phase == P_WRITE && !done[l] && q_valid;
    assign wr     = q_pop && !q_word.eoe && !wptr[CAW];
    assign newrun = (wptr == '0) || (q_word.ssid != last_ssid);

    // Cluster List Memory, Cluster List Pointer, Cluster Counter Memory
    logic [SSID_W+31:0] clm     [CLM_DEPTH];
    logic [CAW-1:0]     ptr_mem [2**SSID_W];
    logic [7:0]         cnt_mem [2**SSID_W];
    logic [SSID_W+31:0] clm_q;
    logic [CAW-1:0]     rd_addr;
    assign rd_addr = ptr_q[l] + CAW'(k);

    always_ff @(posedge clk) begin
      if (wr) begin
        clm[wptr[CAW-1:0]] <= {q_word.ssid, q_word.cl};
        cnt_mem[q_word.ssid] <= newrun ? 8'd1 : run + 8'd1;
        if (newrun) ptr_mem[q_word.ssid] <= wptr[CAW-1:0];
      end
      if (lk_accept) begin
        ptr_q[l] <= ptr_mem[hrsp_patt.ssid[l]];
        cnt_q[l] <= cnt_mem[hrsp_patt.ssid[l]];
      end
      clm_q <= clm[rd_addr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wptr <= '0; last_ssid <= '0; run <= '0; done[l] <= 1'b0; ovf[l] <= 1'b0;
      end else begin
        ovf[l] <= q_pop && !q_word.eoe && wptr[CAW];
        if (q_pop) begin
          if (q_word.eoe) done[l] <= 1'b1;
          else if (wr) begin
            wptr      <= wptr + 1'b1;
            last_ssid <= q_word.ssid;
            run       <= newrun ? 8'd1 : run + 8'd1;
          end
        end
        if (phase == P_READ && road_ee && outstanding == '0 && lk == L_IDLE) begin
          wptr    <= '0;
          done[l] <= 1'b0;
        end
      end
    end

    // lookup data path: k = 1 delivers the first cluster and the pointer check
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ncl_r[l] <= '0;
        cl_r[l]  <= '0;
      end else if (lk == L_CL && k != '0) begin
        if (k == KW'(1)) begin
          ncl_r[l] <= ((clm_q[SSID_W+31:32] == patt_q.ssid[l]) && ({1'b0, ptr_q[l]} < wptr))
                            ? ((cnt_q[l] > 8'(MAXCL)) ? CLW'(MAXCL) : CLW'(cnt_q[l])) : '0;
        end
        cl_r[l][k-1'b1] <= clm_q[31:0];
      end
    end
  end

  // ---------------- lookup controller ----------------
  always_comb begin
    kmax = KW'(1);
    for (int l = 0; l < NLAYERS; l++)
      if (cnt_q[l] > 8'(kmax)) kmax = (cnt_q[l] > 8'(MAXCL)) ? KW'(MAXCL) : KW'(cnt_q[l]);
  end

  assign tf_valid       = (lk == L_OUT);
  assign tf_road.road   = road_q;
  assign tf_road.sector = patt_q.sector;
  assign tf_road.ncl    = ncl_r;
  assign tf_road.cl     = cl_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_WRITE; lk <= L_IDLE; road_ee <= 1'b0; outstanding <= '0; next_id <= '0;
      patt_q <= '0; road_q <= '0; k <= '0; events <= '0; overflows <= '0;
    end else begin
      if (|ovf) overflows <= overflows + 1'b1;
      if (fwd) next_id <= next_id + 1'b1;
      outstanding <= outstanding + (fwd ? 1'b1 : 1'b0) - ((tf_valid && tf_ready) ? 1'b1 : 1'b0);
      case (phase)
        P_WRITE: if (&done) phase <= P_READ;
        P_READ: begin
          if (road_valid && road_ready && road_word.eoe) road_ee <= 1'b1;
          if (road_ee && outstanding == '0 && lk == L_IDLE) begin
            phase   <= P_WRITE;
            road_ee <= 1'b0;
            events  <= events + 1'b1;
          end
        end
        default: phase <= P_WRITE;
      endcase
      case (lk)
        L_IDLE: if (lk_accept) begin
          patt_q <= hrsp_patt;
          road_q <= road_tab[hrsp_id];
          k      <= '0;
          lk     <= L_CL;
        end
        L_CL: begin
          if (k == kmax) lk <= L_OUT;
          else           k  <= k + 1'b1;
        end
        L_OUT: if (tf_ready) lk <= L_IDLE;
        default: lk <= L_IDLE;
      endcase
    end
  end
endmodule
