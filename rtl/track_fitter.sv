// track_fitter: linearised track fit of the roads found by pattern matching.
//
// Track Distributor: for each road it walks all combinations of one cluster
// per layer (an odometer over the per-layer cluster counts, one candidate per
// cycle) and hands each candidate to one of NLANES lanes, round-robin over
// the lanes whose candidate FIFO has room.  A road with an empty layer gives
// no candidate (tracks with missing clusters are not supported).
//
// Lane (one per Chi Square Unit): takes the next candidate, requests the
// chi2 constant set (S, h) of its sector from the HBM interface, waits until
// the whole set has arrived, then issues the candidate to its
// chi_square_unit.  Candidates passing the chi2 cut wait, with their chi2,
// in a per-lane FIFO.  A lane keeps one constant request outstanding; the
// other candidates stay buffered in its FIFO.
//
// HBM Interface: a round-robin arbiter forwards the constant requests of the
// four lanes and of the Parameter Calculator (tags 0..NLANES) to hbm2tf, and
// the returned 32-byte chunks are written, by tag and chunk index, into one
// assembly buffer per requester; the chunk flagged last completes the set.
//
// Parameter Calculator stage: the passing candidates of all lanes are merged
// round-robin; for each one the parameter constant set (C, q) is requested,
// then parameter_calculator computes the five parameters, and the track
// (roadID, five 16-bit parameters, 16-bit integer chi2, eight clusters) is
// output on trk_*.  Parameter constants are requested only after the chi2
// cut, as in the original firmware.
//
// Constant layout inside a set (32-bit words, little end first): chi2 set
// S[i][j] at i*NCOO+j then h[i]; parameter set C[i][j] at i*NCOO+j then q[i].
module track_fitter
  import prm_pkg::*;
#(
  parameter int NLANES = 4,
  parameter int CFIFO  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [63:0]          thresh,       // chi2 cut, Q16.16
  input  logic                 road_valid,
  input  do_road_t             road,
  output logic                 road_ready,
  output logic                 hreq_valid,
  output logic [SECTOR_W-1:0]  hreq_sector,
  output logic                 hreq_kind,
  output logic [TAG_W-1:0]     hreq_tag,
  input  logic                 hreq_ready,
  input  logic                 ck_valid,
  input  chunk_t               ck,
  output logic                 ck_ready,
  output logic                 trk_valid,
  output track_t               trk,
  input  logic                 trk_ready,
  output logic [31:0]          n_cand,       // candidates fitted (chi2)
  output logic [31:0]          n_pass,       // candidates passing the cut
  output logic [31:0]          n_wait        // lane-cycles waiting for constants
);
  localparam int NREQ = NLANES + 1;
  localparam int LW   = (NLANES > 1) ? $clog2(NLANES) : 1;
  localparam int SETW = MAX_CHUNKS * HBM_DW;

  // ---------------- HBM interface ----------------
  logic [SETW-1:0]  abuf [NREQ];
  logic [NREQ-1:0]  set_done, set_clr, rq_valid, rq_grant;
  logic [SECTOR_W-1:0] rq_sector [NREQ];
  logic [NREQ-1:0]  rq_kind;

  assign ck_ready = 1'b1;
  always_ff @(posedge clk) if (ck_valid) abuf[ck.tag][ck.idx*HBM_DW +: HBM_DW] <= ck.data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) set_done <= '0;
    else for (int t = 0; t < NREQ; t++)
      if (set_clr[t]) set_done[t] <= 1'b0;
      else if (ck_valid && ck.last && ck.tag == TAG_W'(t)) set_done[t] <= 1'b1;
  end

  logic [TAG_W-1:0] rq_rr, rq_sel;
  logic             rq_any;
  always_comb begin
    rq_any = 1'b0; rq_sel = '0;
    for (int k = 0; k < NREQ; k++) begin
      if (!rq_any && rq_valid[((int'(rq_rr) + k) % NREQ)]) begin rq_any = 1'b1; rq_sel = TAG_W'(((int'(rq_rr) + k) % NREQ)); end
    end
    hreq_valid  = rq_any;
    hreq_sector = rq_sector[rq_sel];
    hreq_kind   = rq_kind[rq_sel];
    hreq_tag    = rq_sel;
    for (int t = 0; t < NREQ; t++) rq_grant[t] = rq_any && hreq_ready && rq_sel == TAG_W'(t);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rq_rr <= '0;
    else if (rq_any && hreq_ready) rq_rr <= (rq_sel == TAG_W'(NREQ-1)) ? '0 : rq_sel + 1'b1;
  end

  // ---------------- Track Distributor ----------------
  logic                     td_busy;
  do_road_t                 td_road;
  logic [NLAYERS-1:0][CLW-1:0] idx;
  logic [NLANES-1:0]        lq_ready;
  logic [LW-1:0]            td_rr, td_lane;
  logic                     td_ok, td_push, td_lastc, td_empty;
  cand_t                    td_cand;

  always_comb begin
    td_ok = 1'b0; td_lane = '0;
    for (int k = 0; k < NLANES; k++) begin
      if (!td_ok && lq_ready[((int'(td_rr) + k) % NLANES)]) begin td_ok = 1'b1; td_lane = LW'(((int'(td_rr) + k) % NLANES)); end
    end
    td_cand.road   = td_road.road;
    td_cand.sector = td_road.sector;
    td_lastc = 1'b1;
    td_empty = 1'b0;
    for (int l = 0; l < NLAYERS; l++) begin
      td_cand.cl[l] = td_road.cl[l][idx[l]];
      if (idx[l] != td_road.ncl[l] - 1'b1) td_lastc = 1'b0;
      if (td_road.ncl[l] == '0) td_empty = 1'b1;
    end
    td_push = td_busy && !td_empty && td_ok;
  end
  assign road_ready = !td_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      td_busy <= 1'b0; td_road <= '0; idx <= '0; td_rr <= '0;
    end else if (!td_busy) begin
      if (road_valid) begin td_busy <= 1'b1; td_road <= road; idx <= '0; end
    end else if (td_empty) begin
      td_busy <= 1'b0;
    end else if (td_push) begin
      td_rr <= (td_lane == LW'(NLANES-1)) ? '0 : td_lane + 1'b1;
      if (td_lastc) td_busy <= 1'b0;
      else begin
        // odometer: layer 0 fastest
        logic carry;
        carry = 1'b1;
        for (int l = 0; l < NLAYERS; l++) if (carry) begin
          if (idx[l] == td_road.ncl[l] - 1'b1) idx[l] <= '0;
          else begin idx[l] <= idx[l] + 1'b1; carry = 1'b0; end
        end
      end
    end
  end

  // ---------------- lanes with Chi Square Units ----------------
  localparam int PFW = $bits(cand_t) + 16;
  logic [NLANES-1:0]  pf_valid, pf_ready, l_wait, l_fire;
  logic [PFW-1:0]     pf_data [NLANES];

  for (genvar g = 0; g < NLANES; g++) begin : g_lane
    typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_RUN} lst_e;
    lst_e    st;
    logic    cq_valid, cq_pop, o_valid, o_pass, pf_in_ready;
    cand_t   cq, o_meta;
    logic [63:0] o_chi2;
    logic [$clog2(4+1)-1:0] pf_cnt;

    sync_fifo #(.W($bits(cand_t)), .DEPTH(CFIFO)) u_cq (
      .clk, .rst_n, .in_valid(td_push && td_lane == LW'(g)), .in_ready(lq_ready[g]), .in_data(td_cand),
      .out_valid(cq_valid), .out_ready(cq_pop), .out_data(cq), .count());

    assign rq_valid[g]  = (st == S_REQ);
    assign rq_sector[g] = cq.sector;
    assign rq_kind[g]   = 1'b0;
    assign l_fire[g]    = (st == S_WAIT) && set_done[g] && pf_in_ready;
    assign set_clr[g]   = l_fire[g];
    assign cq_pop       = l_fire[g];
    assign l_wait[g]    = (st == S_WAIT) && !set_done[g];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) st <= S_IDLE;
      else case (st)
        S_IDLE: if (cq_valid) st <= S_REQ;
        S_REQ:  if (rq_grant[g]) st <= S_WAIT;
        S_WAIT: if (l_fire[g]) st <= S_RUN;
        S_RUN:  if (o_valid) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end

    logic signed [NDOF-1:0][NCOO-1:0][CONST_W-1:0] s;
    logic signed [NDOF-1:0][CONST_W-1:0]           h;
    always_comb begin
      for (int i = 0; i < NDOF; i++) begin
        for (int j = 0; j < NCOO; j++) s[i][j] = abuf[g][(i*NCOO+j)*CONST_W +: CONST_W];
        h[i] = abuf[g][(NDOF*NCOO+i)*CONST_W +: CONST_W];
      end
    end

    chi_square_unit #(.META_W($bits(cand_t))) u_csu (
      .clk, .rst_n, .in_valid(l_fire[g]), .x(coords(cq.cl)), .s, .h, .in_meta(cq),
      .thresh, .out_valid(o_valid), .chi2(o_chi2), .pass(o_pass), .out_meta(o_meta));

    // passing candidates; one in flight per lane, so room is checked at issue
    logic [15:0] chi16;
    assign chi16 = (|o_chi2[63:FRAC+16]) ? 16'hFFFF : o_chi2[FRAC +: 16];
    sync_fifo #(.W(PFW), .DEPTH(4)) u_pf (
      .clk, .rst_n, .in_valid(o_valid && o_pass), .in_ready(pf_in_ready), .in_data({o_meta, chi16}),
      .out_valid(pf_valid[g]), .out_ready(pf_ready[g]), .out_data(pf_data[g]), .count(pf_cnt));
  end

  // ---------------- Parameter Calculator stage ----------------
  typedef enum logic [1:0] {P_IDLE, P_REQ, P_WAIT, P_RUN} pst_e;
  pst_e            pst;
  logic [LW-1:0]   p_rr, p_sel;
  logic            p_any, p_fire, pc_valid;
  logic [PFW-1:0]  p_cur;
  cand_t           p_cand, pc_meta_c;
  logic [PFW-1:0]  pc_meta;
  logic [NPAR-1:0][15:0] pc_p;

  always_comb begin
    p_any = 1'b0; p_sel = '0;
    for (int k = 0; k < NLANES; k++) begin
      if (!p_any && pf_valid[((int'(p_rr) + k) % NLANES)]) begin p_any = 1'b1; p_sel = LW'(((int'(p_rr) + k) % NLANES)); end
    end
    for (int l = 0; l < NLANES; l++) pf_ready[l] = (pst == P_IDLE) && !trk_valid && p_any && p_sel == LW'(l);
  end
  assign p_cand          = cand_t'(p_cur[PFW-1:16]);
  assign rq_valid[NLANES]  = (pst == P_REQ);
  assign rq_sector[NLANES] = p_cand.sector;
  assign rq_kind[NLANES]   = 1'b1;
  assign p_fire            = (pst == P_WAIT) && set_done[NLANES];
  assign set_clr[NLANES]   = p_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst <= P_IDLE; p_rr <= '0; p_cur <= '0;
    end else case (pst)
      P_IDLE: if (p_any && !trk_valid) begin
        p_cur <= pf_data[p_sel];
        p_rr  <= (p_sel == LW'(NLANES-1)) ? '0 : p_sel + 1'b1;
        pst   <= P_REQ;
      end
      P_REQ:  if (rq_grant[NLANES]) pst <= P_WAIT;
      P_WAIT: if (p_fire) pst <= P_RUN;
      P_RUN:  if (pc_valid) pst <= P_IDLE;
      default: pst <= P_IDLE;
    endcase
  end

  logic signed [NPAR-1:0][NCOO-1:0][CONST_W-1:0] cc;
  logic signed [NPAR-1:0][CONST_W-1:0]           qq;
  always_comb begin
    for (int i = 0; i < NPAR; i++) begin
      for (int j = 0; j < NCOO; j++) cc[i][j] = abuf[NLANES][(i*NCOO+j)*CONST_W +: CONST_W];
      qq[i] = abuf[NLANES][(NPAR*NCOO+i)*CONST_W +: CONST_W];
    end
  end

  parameter_calculator #(.META_W(PFW)) u_pc (
    .clk, .rst_n, .in_valid(p_fire), .x(coords(p_cand.cl)), .c(cc), .q(qq), .in_meta(p_cur),
    .out_valid(pc_valid), .p(pc_p), .out_meta(pc_meta));
  assign pc_meta_c = cand_t'(pc_meta[PFW-1:16]);

  // output register; a new track is started only when it is empty
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trk_valid <= 1'b0; trk <= '0;
    end else begin
      if (trk_valid && trk_ready) trk_valid <= 1'b0;
      if (pc_valid) begin
        trk_valid <= 1'b1;
        trk.road  <= pc_meta_c.road;
        trk.par   <= pc_p;
        trk.chi2  <= pc_meta[15:0];
        trk.cl    <= pc_meta_c.cl;
      end
    end
  end

  // statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cand <= '0; n_pass <= '0; n_wait <= '0;
    end else begin
      n_cand <= n_cand + 32'($countones(l_fire));
      n_wait <= n_wait + 32'($countones(l_wait));
      if (pc_valid) n_pass <= n_pass + 1'b1;
    end
  end

  a_no_track_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    pc_valid |-> !trk_valid || trk_ready);
endmodule
