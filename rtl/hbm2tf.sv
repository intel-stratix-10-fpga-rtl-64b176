// hbm2tf: HBM user logic serving the Track Fitter with sets of fit constants.
//
// A request names a sectorID, the kind of set (0: chi2 constants S and h,
// 1: parameter constants C and q) and a requester tag.  The Read Request
// Scheduler hands it round-robin to one of NPC pseudo-channels, skipping any
// that is busy (its sequencer is issuing or its request FIFO is not empty).
// In each pseudo-channel interface a FIFO (the CDC FIFO of the original)
// feeds Sector2AXI, which issues the consecutive 32-byte reads of one set:
// CHI_CHUNKS reads from CONST_BASE + sector*512, or PAR_CHUNKS reads from
// CONST_BASE + sector*512 + 256.  Reads return in order per pseudo-channel,
// so Last Chunk counts the returning beats against a FIFO of outstanding
// sets and flags the last chunk of each.  Returned chunks wait in a
// per-channel FIFO and are merged round-robin onto one registered chunk
// stream carrying {tag, chunk index, last, 256-bit data}.
//
// NPC = 6, round-robin with busy check and the last-chunk flag follow the
// paper; the address map and FIFO depths are this design's choices.
module hbm2tf
  import prm_pkg::*;
#(
  parameter int NPC = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  logic [SECTOR_W-1:0]   req_sector,
  input  logic                  req_kind,
  input  logic [TAG_W-1:0]      req_tag,
  output logic                  req_ready,
  output logic    [NPC-1:0]     ar_valid,
  output axi_ar_t [NPC-1:0]     ar,
  input  logic    [NPC-1:0]     ar_ready,
  input  logic    [NPC-1:0]     r_valid,
  input  axi_r_t  [NPC-1:0]     r,
  output logic    [NPC-1:0]     r_ready,
  output logic                  ck_valid,
  output chunk_t                ck,
  input  logic                  ck_ready
);
  localparam int CW = (NPC > 1) ? $clog2(NPC) : 1;
  localparam int QW = SECTOR_W + 1 + TAG_W;
  localparam int RW = TAG_W + 3 + 1 + HBM_DW;

  logic [NPC-1:0] busy, q_in_ready;
  logic [CW-1:0]  rr, ch;
  logic           ch_ok;

  // Read Request Scheduler
  always_comb begin
    ch_ok = 1'b0; ch = '0;
    for (int k = 0; k < NPC; k++) begin
      if (!ch_ok && !busy[((int'(rr) + k) % NPC)] && q_in_ready[((int'(rr) + k) % NPC)]) begin ch_ok = 1'b1; ch = CW'(((int'(rr) + k) % NPC)); end
    end
  end
  assign req_ready = ch_ok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (req_valid && req_ready) rr <= (ch == CW'(NPC-1)) ? '0 : ch + 1'b1;
  end

  logic [NPC-1:0]   m_valid, m_ready;
  logic [RW-1:0]    m_data [NPC];

  for (genvar c = 0; c < NPC; c++) begin : g_pc
    // CDC FIFO
    logic          q_valid, q_ready;
    logic [QW-1:0] q_data;
    logic [1:0]    q_cnt;
    sync_fifo #(.W(QW), .DEPTH(2)) u_q (
      .clk, .rst_n,
      .in_valid(req_valid && req_ready && ch == CW'(c)), .in_ready(q_in_ready[c]),
      .in_data({req_sector, req_kind, req_tag}),
      .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count(q_cnt));

    // Sector2AXI
    logic                active;
    logic [2:0]          k, n;
    logic [HBM_AW-1:0]   base;
    logic                o_in_ready;
    logic                o_valid, o_ready;
    logic [TAG_W+3-1:0]  o_data;
    logic [2:0]          q_n;
    assign q_n     = q_data[TAG_W] ? 3'(PAR_CHUNKS) : 3'(CHI_CHUNKS);
    assign q_ready = q_valid && !active && o_in_ready;
    assign busy[c] = active || q_valid;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        active <= 1'b0; k <= '0; n <= '0; base <= '0;
        ar_valid[c] <= 1'b0; ar[c] <= '0;
      end else begin
        if (ar_valid[c] && ar_ready[c]) ar_valid[c] <= 1'b0;
        if (q_ready) begin
          active <= 1'b1; k <= '0; n <= q_n;
          base   <= CONST_BASE + (HBM_AW'(q_data[QW-1 -: SECTOR_W]) << 9)
                               + (q_data[TAG_W] ? HBM_AW'(256) : '0);
        end else if (active && (!ar_valid[c] || ar_ready[c])) begin
          ar_valid[c]   <= 1'b1;
          ar[c].addr    <= base + (HBM_AW'(k) << 5);
          ar[c].id      <= AXI_ID_W'(c);
          k             <= k + 1'b1;
          if (k == n - 1'b1) active <= 1'b0;
        end
      end
    end

    // outstanding sets, in issue order
    sync_fifo #(.W(TAG_W+3), .DEPTH(4)) u_out (
      .clk, .rst_n,
      .in_valid(q_ready), .in_ready(o_in_ready), .in_data({q_data[TAG_W-1:0], q_n}),
      .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data), .count());

    // Last Chunk
    logic [2:0] beat;
    logic       r_in_ready, last;
    assign last       = (beat == o_data[2:0] - 1'b1);
    assign r_ready[c] = r_in_ready && o_valid;
    assign o_ready    = r_valid[c] && r_ready[c] && last;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) beat <= '0;
      else if (r_valid[c] && r_ready[c]) beat <= last ? '0 : beat + 1'b1;
    end

    // return FIFO
    sync_fifo #(.W(RW), .DEPTH(8)) u_ret (
      .clk, .rst_n,
      .in_valid(r_valid[c] && r_ready[c]), .in_ready(r_in_ready),
      .in_data({o_data[TAG_W+2:3], beat, last, r[c].data}),
      .out_valid(m_valid[c]), .out_ready(m_ready[c]), .out_data(m_data[c]), .count());

    a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
      ar_valid[c] && !ar_ready[c] |=> ar_valid[c] && $stable(ar[c]));
  end

  // merge of the returned chunk streams
  logic [CW-1:0] rr_m, sel;
  logic          sel_ok, load;
  always_comb begin
    sel_ok = 1'b0; sel = '0;
    for (int k = 0; k < NPC; k++) begin
      if (!sel_ok && m_valid[((int'(rr_m) + k) % NPC)]) begin sel_ok = 1'b1; sel = CW'(((int'(rr_m) + k) % NPC)); end
    end
    load = sel_ok && (!ck_valid || ck_ready);
    for (int c = 0; c < NPC; c++) m_ready[c] = load && sel == CW'(c);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ck_valid <= 1'b0; ck <= '0; rr_m <= '0;
    end else if (!ck_valid || ck_ready) begin
      ck_valid <= sel_ok;
      if (sel_ok) begin
        ck   <= chunk_t'(m_data[sel]);
        rr_m <= (sel == CW'(NPC-1)) ? '0 : sel + 1'b1;
      end
    end
  end
endmodule
