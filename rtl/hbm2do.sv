// hbm2do: HBM user logic serving the Data Organiser with pattern records.
//
// A request is a roadID paired with a requestID.  It passes a FIFO (the
// clock-domain-crossing FIFO of the original; one clock here), then Road2AXI
// turns the roadID into the AXI address PATT_BASE + roadID*32: one pattern
// record (8 SSIDs and a sectorID, 18 bytes) per 32-byte read.  The Read
// Request Scheduler gives each read a free AXI-ID, stores the requestID in a
// table indexed by that ID, and sends the read to one of NPC pseudo-channels
// round-robin, skipping a channel whose address register is still occupied.
// On return the Read Data Scheduler merges the channels round-robin, looks
// the requestID up by the returned AXI-ID, frees the ID and pushes
// {requestID, sectorID, SSIDs} into the output FIFO.  Responses can return
// out of request order across pseudo-channels; the requestID identifies them.
//
// AXI: one beat per read, registered AR per channel held until ar_ready.
// NPC = 2 follows the paper; ID width, FIFO depths and the address map are
// this design's choices.
module hbm2do
  import prm_pkg::*;
#(
  parameter int NPC   = 2,
  parameter int RID_W = 8,
  parameter int IDS   = 16     // AXI-IDs in flight (<= 2**AXI_ID_W)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  logic [ROAD_W-1:0]     req_road,
  input  logic [RID_W-1:0]      req_id,
  output logic                  req_ready,
  output logic    [NPC-1:0]     ar_valid,
  output axi_ar_t [NPC-1:0]     ar,
  input  logic    [NPC-1:0]     ar_ready,
  input  logic    [NPC-1:0]     r_valid,
  input  axi_r_t  [NPC-1:0]     r,
  output logic    [NPC-1:0]     r_ready,
  output logic                  rsp_valid,
  output logic [RID_W-1:0]      rsp_id,
  output patt_rec_t             rsp_patt,
  input  logic                  rsp_ready
);
  localparam int CW = (NPC > 1) ? $clog2(NPC) : 1;
  localparam int OW = RID_W + $bits(patt_rec_t);

  // request FIFO (CDC FIFO)
  logic                    q_valid, q_ready;
  logic [ROAD_W+RID_W-1:0] q_data;
  sync_fifo #(.W(ROAD_W+RID_W), .DEPTH(8)) u_req_fifo (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data({req_road, req_id}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count());

  // Road2AXI
  logic [HBM_AW-1:0] q_addr;
  assign q_addr = PATT_BASE + (HBM_AW'(q_data[RID_W +: ROAD_W]) << 5);

  // AXI-ID pool and requestID table
  logic [IDS-1:0]   id_busy;
  logic [RID_W-1:0] rid_tab [IDS];
  logic             id_ok;
  logic [AXI_ID_W-1:0] free_id;
  always_comb begin
    id_ok = 1'b0; free_id = '0;
    for (int i = IDS-1; i >= 0; i--) if (!id_busy[i]) begin id_ok = 1'b1; free_id = AXI_ID_W'(i); end
  end

  // Read Request Scheduler
  logic [CW-1:0] rr_req, ch;
  logic          ch_ok;
  always_comb begin
    ch_ok = 1'b0; ch = '0;
    for (int k = 0; k < NPC; k++) begin
      if (!ch_ok && (!ar_valid[((int'(rr_req) + k) % NPC)] || ar_ready[((int'(rr_req) + k) % NPC)])) begin ch_ok = 1'b1; ch = CW'(((int'(rr_req) + k) % NPC)); end
    end
  end
  logic issue;
  assign issue   = q_valid && id_ok && ch_ok;
  assign q_ready = issue;

  // Read Data Scheduler
  logic [CW-1:0] rr_rsp, rs;
  logic          rs_ok, o_ready, take;
  always_comb begin
    rs_ok = 1'b0; rs = '0;
    for (int k = 0; k < NPC; k++) begin
      if (!rs_ok && r_valid[((int'(rr_rsp) + k) % NPC)]) begin rs_ok = 1'b1; rs = CW'(((int'(rr_rsp) + k) % NPC)); end
    end
    take = rs_ok && o_ready;
    for (int c = 0; c < NPC; c++) r_ready[c] = take && rs == CW'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_valid <= '0;
      ar       <= '0;
      id_busy  <= '0;
      rr_req   <= '0;
      rr_rsp   <= '0;
    end else begin
      for (int c = 0; c < NPC; c++) if (ar_valid[c] && ar_ready[c]) ar_valid[c] <= 1'b0;
      if (take) begin
        id_busy[r[rs].id[$clog2(IDS)-1:0]] <= 1'b0;
        rr_rsp <= (rs == CW'(NPC-1)) ? '0 : rs + 1'b1;
      end
      if (issue) begin
        ar_valid[ch]   <= 1'b1;
        ar[ch].addr    <= q_addr;
        ar[ch].id      <= free_id;
        id_busy[free_id[$clog2(IDS)-1:0]] <= 1'b1;
        rr_req         <= (ch == CW'(NPC-1)) ? '0 : ch + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) if (issue) rid_tab[free_id[$clog2(IDS)-1:0]] <= q_data[RID_W-1:0];

  // output FIFO: split into requestID, sectorID and SSIDs
  logic [OW-1:0] o_data;
  sync_fifo #(.W(OW), .DEPTH(16)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(take), .in_ready(o_ready),
    .in_data({rid_tab[r[rs].id[$clog2(IDS)-1:0]], r[rs].data[$bits(patt_rec_t)-1:0]}),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(o_data), .count());
  assign rsp_id   = o_data[OW-1 -: RID_W];
  assign rsp_patt = o_data[$bits(patt_rec_t)-1:0];

  // AXI rule: an address, once offered, stays until accepted
  for (genvar c = 0; c < NPC; c++) begin : g_chk
    a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
      ar_valid[c] && !ar_ready[c] |=> ar_valid[c] && $stable(ar[c]));
  end
endmodule
