// prm_pkg: types and constants shared by the Pattern Recognition Mezzanine
// (PRM) track-reconstruction pipeline.
//
// The PRM processes eight detector layers; in the studied configuration one
// pixel layer (two coordinates) and seven strip layers (one coordinate), so a
// track candidate has NCOO = 9 coordinates, five fitted parameters and
// NDOF = 4 degrees of freedom.  Layer counts, the 5 track parameters and the
// 32-byte HBM read granularity follow the paper.  Field widths (16-bit SSID,
// sectorID and coordinates, 21-bit roadID, 2-bit stream tags) are this
// design's choices: a 16-bit SSID and sectorID make a pattern record of
// 18 bytes, the size quoted for one pattern, and 21 bits address the
// ~1.97 million patterns of one group of five AM chips.
//
// Arithmetic is fixed point: fit constants are signed 32-bit Q16.16,
// cluster coordinates signed 16-bit integers (the original firmware uses
// single-precision floating point DSPs).
package prm_pkg;

  localparam int NLAYERS  = 8;
  localparam int NPIX     = 1;                       // pixel layers come first
  localparam int NCOO     = 2*NPIX + (NLAYERS-NPIX); // 9
  localparam int NPAR     = 5;                       // eta, phi, pT, d0, z0
  localparam int NDOF     = NCOO - NPAR;             // 4
  localparam int SSID_W   = 16;
  localparam int SECTOR_W = 16;
  localparam int ROAD_W   = 21;
  localparam int COORD_W  = 16;
  localparam int CONST_W  = 32;
  localparam int FRAC     = 16;                      // Q16.16 constants
  localparam int MAXCL    = 4;                       // clusters per layer per road
  localparam int CLW      = $clog2(MAXCL+1);         // cluster count field

  // HBM: 32-byte (256-bit) read per request, burst length 4 on a 64-bit
  // pseudo-channel; 256 MB per pseudo-channel.
  localparam int HBM_DW   = 256;
  localparam int HBM_AW   = 28;
  localparam int AXI_ID_W = 4;
  localparam int WPC      = HBM_DW / CONST_W;        // 32-bit words per chunk = 8
  localparam int CHI_WORDS = NDOF*NCOO + NDOF;       // 40 -> 5 chunks
  localparam int PAR_WORDS = NPAR*NCOO + NPAR;       // 50 -> 7 chunks
  localparam int CHI_CHUNKS = (CHI_WORDS + WPC - 1) / WPC;
  localparam int PAR_CHUNKS = (PAR_WORDS + WPC - 1) / WPC;
  localparam int MAX_CHUNKS = PAR_CHUNKS;
  localparam logic [HBM_AW-1:0] PATT_BASE  = '0;          // roadID*32
  localparam logic [HBM_AW-1:0] CONST_BASE = 28'h800_0000; // + sector*512
  localparam int TAG_W    = 3;                       // constant requester id

  // cluster: two signed coordinates; strips use only x
  typedef struct packed {
    logic signed [COORD_W-1:0] y;
    logic signed [COORD_W-1:0] x;
  } cluster_t;

  // per-layer cluster stream into the Data Organiser
  typedef struct packed {
    logic                eoe;    // end of event marker (no cluster)
    logic [SSID_W-1:0]   ssid;
    cluster_t            cl;
  } do_in_t;

  // AM input bus: idle, SSID data or command
  typedef enum logic [1:0] {AM_IDLE = 2'd0, AM_DATA = 2'd1, AM_CMD = 2'd2} am_kind_e;
  typedef enum logic [1:0] {CMD_NONE = 2'd0, CMD_INIT = 2'd1, CMD_END = 2'd2} am_cmd_e;
  typedef struct packed {
    am_kind_e            kind;
    am_cmd_e             cmd;
    logic [2:0]          layer;
    logic [SSID_W-1:0]   ssid;
  } am_word_t;

  // road stream out of the AM (emulators): roadID or end of event
  typedef struct packed {
    logic                eoe;
    logic [ROAD_W-1:0]   road;
  } road_word_t;

  // pattern record as stored in the HBM (low 144 bits of a 32-byte word)
  typedef struct packed {
    logic [NLAYERS-1:0][SSID_W-1:0] ssid;
    logic [SECTOR_W-1:0]            sector;
  } patt_rec_t;

  // road with its clusters, Data Organiser -> Track Fitter
  typedef struct packed {
    logic [ROAD_W-1:0]                  road;
    logic [SECTOR_W-1:0]                sector;
    logic [NLAYERS-1:0][CLW-1:0]        ncl;
    logic [NLAYERS-1:0][MAXCL-1:0][31:0] cl;
  } do_road_t;

  // one track candidate
  typedef struct packed {
    logic [ROAD_W-1:0]             road;
    logic [SECTOR_W-1:0]           sector;
    logic [NLAYERS-1:0][31:0]      cl;
  } cand_t;

  // fitted track, 16-bit fixed point results
  typedef struct packed {
    logic [ROAD_W-1:0]                 road;
    logic [NPAR-1:0][15:0]             par;
    logic [15:0]                       chi2;
    logic [NLAYERS-1:0][31:0]          cl;
  } track_t;

  // AXI read channels (one beat per request, in-order per pseudo-channel)
  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [HBM_AW-1:0]   addr;
  } axi_ar_t;
  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [HBM_DW-1:0]   data;
  } axi_r_t;

  // chunk of a constant set returned to the Track Fitter
  typedef struct packed {
    logic [TAG_W-1:0]    tag;
    logic [2:0]          idx;
    logic                last;
    logic [HBM_DW-1:0]   data;
  } chunk_t;

  // coordinate vector of a candidate: pixel layers give x and y
  function automatic logic signed [NCOO-1:0][COORD_W-1:0] coords(input logic [NLAYERS-1:0][31:0] cl);
    logic signed [NCOO-1:0][COORD_W-1:0] x;
    int k;
    k = 0;
    for (int l = 0; l < NLAYERS; l++) begin
      x[k] = cl[l][15:0]; k++;
      if (l < NPIX) begin x[k] = cl[l][31:16]; k++; end
    end
    return x;
  endfunction

endpackage
