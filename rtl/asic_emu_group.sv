// asic_emu_group: one group of five emulated AM chips with its ASIC
// Interface, standing in for a group of five daisy-chained AM ASICs.
//
// The Input Manager broadcasts every input-bus word to all five emulators
// (the word is taken when all of them are ready).  Pattern writes (cfg_*)
// select the emulator with cfg_emu.  As on the demonstrator, the road
// outputs form three daisy chains of up to two emulators: 1 -> 0, 3 -> 2
// and 4 alone (the grouping is this design's choice; the paper gives only
// the count).  The ASIC Interface arbiter merges the three chain heads
// round-robin into one road stream to the Data Organiser with a single
// end-of-event word per event.  Emulator e owns roadIDs e*NPATT .. e*NPATT+NPATT-1.
module asic_emu_group
  import prm_pkg::*;
#(
  parameter int NEMU  = 5,
  parameter int NPATT = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  am_word_t                 in_word,
  output logic                     in_ready,
  input  logic                     cfg_we,
  input  logic [2:0]               cfg_emu,
  input  logic [$clog2(NPATT)-1:0] cfg_patt,
  input  logic [2:0]               cfg_layer,
  input  logic [SSID_W-1:0]        cfg_ssid,
  output logic                     road_valid,
  output road_word_t               road_word,
  input  logic                     road_ready
);
  localparam int NCHAIN = (NEMU + 1) / 2;
  logic [NEMU-1:0]        e_in_ready, e_out_valid, e_out_ready, e_up_ready;
  road_word_t [NEMU-1:0]  e_out_word;

  // Input Manager
  assign in_ready = &e_in_ready;

  for (genvar e = 0; e < NEMU; e++) begin : g_emu
    localparam bit HAS_UP = (e % 2 == 0) && (e + 1 < NEMU);
    logic       up_v;
    road_word_t up_w;
    if (HAS_UP) begin : g_up
      assign up_v = e_out_valid[e+1];
      assign up_w = e_out_word[e+1];
    end else begin : g_noup
      assign up_v = 1'b0;
      assign up_w = '0;
    end
    asic_emulator #(.NPATT(NPATT), .INST_ID(e), .HAS_UP(HAS_UP)) u_emu (
      .clk, .rst_n,
      .in_valid (in_valid && in_ready),
      .in_word,
      .in_ready (e_in_ready[e]),
      .cfg_we   (cfg_we && cfg_emu == 3'(e)),
      .cfg_patt, .cfg_layer, .cfg_ssid,
      .up_valid (up_v),
      .up_word  (up_w),
      .up_ready (e_up_ready[e]),
      .out_valid(e_out_valid[e]),
      .out_word (e_out_word[e]),
      .out_ready(e_out_ready[e])
    );
  end

  // chain wiring: odd emulators feed their even neighbour, heads feed the arbiter
  logic [NCHAIN-1:0]       c_valid, c_ready;
  road_word_t [NCHAIN-1:0] c_word;
  for (genvar e = 0; e < NEMU; e++) begin : g_link
    if (e % 2 == 1) begin : g_tail
      assign e_out_ready[e] = e_up_ready[e-1];
    end else begin : g_head
      assign c_valid[e/2]   = e_out_valid[e];
      assign c_word[e/2]    = e_out_word[e];
      assign e_out_ready[e] = c_ready[e/2];
    end
  end

  // ASIC Interface arbiter
  road_merge #(.N(NCHAIN)) u_if_arb (
    .clk, .rst_n,
    .in_valid(c_valid), .in_word(c_word), .in_ready(c_ready),
    .out_valid(road_valid), .out_word(road_word), .out_ready(road_ready)
  );
endmodule
