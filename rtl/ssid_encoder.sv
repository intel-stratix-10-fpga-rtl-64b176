// ssid_encoder: Cluster-to-SSID Encoding and per-layer Sorting.
//
// Encoding: a cluster's super-strip is its coordinate divided by the
// super-strip size.  Strip layers: SSID = x / SS_STRIP.  Pixel layers
// (layer < NPIX): SSID = {x / SS_PIX_X, y / SS_PIX_Y}, 8 bits each.
// Coordinates are taken as unsigned.  Defaults are the barrel sizes used in
// the HTT simulation (33x402 pixel, 40 strip).
//
// Sorting: each layer collects the encoded clusters of one event in a buffer
// of SORT_DEPTH entries.  The input's end-of-event word starts the flush:
// every cycle each layer emits its smallest remaining SSID (ties in arrival
// order), so equal SSIDs come out as one contiguous run as the Data
// Organiser requires; then it emits an end-of-event word.  Input is accepted
// (in_ready) only while no layer is flushing.  Clusters arriving at a full
// buffer are dropped and counted in `dropped`.
//
// Division by the super-strip size and the selection sort are this design's
// choices; the paper names the Encoding and Sorting steps only.
module ssid_encoder
  import prm_pkg::*;
#(
  parameter int SS_STRIP   = 40,
  parameter int SS_PIX_X   = 33,
  parameter int SS_PIX_Y   = 402,
  parameter int SORT_DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [2:0]               in_layer,
  input  cluster_t                 in_cl,
  input  logic                     in_eoe,
  output logic                     in_ready,
  output logic   [NLAYERS-1:0]     out_valid,
  output do_in_t [NLAYERS-1:0]     out_word,
  input  logic   [NLAYERS-1:0]     out_ready,
  output logic [15:0]              dropped
);
  localparam int IW = $clog2(SORT_DEPTH);

  // Encoding
  logic [SSID_W-1:0] enc;
  logic [15:0]       ux, uy;
  assign ux = in_cl.x;
  assign uy = in_cl.y;
  always_comb begin
    if (int'(in_layer) < NPIX) enc = {8'(ux / 16'(SS_PIX_X)), 8'(uy / 16'(SS_PIX_Y))};
    else                       enc = SSID_W'(ux / 16'(SS_STRIP));
  end

  logic [NLAYERS-1:0] flushing, drop;
  assign in_ready = (flushing == '0);

  for (genvar l = 0; l < NLAYERS; l++) begin : g_sort
    logic [SORT_DEPTH-1:0] occ;
    logic [SSID_W-1:0]     ssid [SORT_DEPTH];
    cluster_t              cl   [SORT_DEPTH];
    logic [IW-1:0]         slot, mn;
    logic                  has_free;
    logic                  take;

    always_comb begin
      has_free = 1'b0; slot = '0;
      for (int i = SORT_DEPTH-1; i >= 0; i--) if (!occ[i]) begin has_free = 1'b1; slot = IW'(i); end
      mn = '0;
      for (int i = SORT_DEPTH-1; i >= 0; i--)
        if (occ[i] && (!occ[mn] || ssid[i] <= ssid[mn])) mn = IW'(i);
    end
    // out: smallest SSID while flushing, end-of-event when empty
    assign out_valid[l]     = flushing[l];
    assign out_word[l].eoe  = (occ == '0);
    assign out_word[l].ssid = (occ == '0) ? '0 : ssid[mn];
    assign out_word[l].cl   = (occ == '0) ? '0 : cl[mn];
    assign take    = in_valid && in_ready && !in_eoe && in_layer == 3'(l);
    assign drop[l] = take && !has_free;

    always_ff @(posedge clk) begin
      if (take && has_free) begin ssid[slot] <= enc; cl[slot] <= in_cl; end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        occ <= '0; flushing[l] <= 1'b0;
      end else begin
        if (take && has_free) occ[slot] <= 1'b1;
        if (in_valid && in_ready && in_eoe) flushing[l] <= 1'b1;
        if (flushing[l] && out_ready[l]) begin
          if (occ == '0) flushing[l] <= 1'b0;
          else           occ[mn] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dropped <= '0;
    else if (|drop) dropped <= dropped + 1'b1;
  end
endmodule
