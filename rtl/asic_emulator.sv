// asic_emulator: emulation of the core of one Associative Memory (AM) chip.
//
// It holds NPATT patterns, each a list of eight SSIDs (one per layer),
// written at run time through the Registers Database port (cfg_*).  The
// input bus carries three word types: idle, SSID data and commands.  The
// Input Decoder sends data words to the Core and commands to the Controls.
// CMD_INIT clears the per-pattern, per-layer match flags; every data word
// (layer, SSID) sets the flag of each enabled pattern whose SSID on that
// layer is equal, all patterns compared in parallel in one cycle; CMD_END
// freezes the patterns with all eight flags set and starts the readout.
// Matched roadIDs (INST_ID*NPATT + pattern index) are read out in series,
// one per cycle, lowest index first, followed by an end-of-event word.  The
// Arbiter (road_merge) combines this local stream with the road stream of
// the next emulator of the daisy chain (up_*), so a chain head sends the
// roads of all its emulators and a single end-of-event.
//
// in_ready is low from CMD_END until the local end-of-event has left, so a
// new event can not start during readout.  A full 8/8 match (no majority
// threshold) and the bus word format are this design's choices; 16 patterns
// per instance and the block split follow the paper.
module asic_emulator
  import prm_pkg::*;
#(
  parameter int NPATT   = 16,
  parameter int INST_ID = 0,
  parameter bit HAS_UP  = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input bus
  input  logic                     in_valid,
  input  am_word_t                 in_word,
  output logic                     in_ready,
  // Registers Database write port
  input  logic                     cfg_we,
  input  logic [$clog2(NPATT)-1:0] cfg_patt,
  input  logic [2:0]               cfg_layer,
  input  logic [SSID_W-1:0]        cfg_ssid,
  // daisy chain input from the next emulator
  input  logic                     up_valid,
  input  road_word_t               up_word,
  output logic                     up_ready,
  // road output
  output logic                     out_valid,
  output road_word_t               out_word,
  input  logic                     out_ready
);
  typedef enum logic [1:0] {S_IDLE, S_EVT, S_READ} state_e;
  state_e state;

  // Registers Database
  logic [SSID_W-1:0]  patt [NPATT][NLAYERS];
  logic [NPATT-1:0]   en;
  // Core
  logic [NLAYERS-1:0] match [NPATT];
  logic [NPATT-1:0]   pend;

  logic       take, is_data, is_init, is_end;
  assign in_ready = (state != S_READ);
  assign take     = in_valid && in_ready;
  // Input Decoder
  assign is_data  = take && in_word.kind == AM_DATA;
  assign is_init  = take && in_word.kind == AM_CMD && in_word.cmd == CMD_INIT;
  assign is_end   = take && in_word.kind == AM_CMD && in_word.cmd == CMD_END;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) en <= '0;
    else if (cfg_we) en[cfg_patt] <= 1'b1;
  end
  always_ff @(posedge clk) if (cfg_we) patt[cfg_patt][cfg_layer] <= cfg_ssid;

  // local readout stream
  logic [$clog2(NPATT)-1:0] first;
  logic                     loc_valid, loc_ready;
  road_word_t               loc_word;
  always_comb begin
    first = '0;
    for (int p = NPATT-1; p >= 0; p--) if (pend[p]) first = p[$clog2(NPATT)-1:0];
    loc_valid     = (state == S_READ);
    loc_word.eoe  = (pend == '0);
    loc_word.road = ROAD_W'(INST_ID*NPATT) + ROAD_W'(first);
  end

  // Core and Controls
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pend  <= '0;
      for (int p = 0; p < NPATT; p++) match[p] <= '0;
    end else begin
      case (state)
        S_IDLE, S_EVT: begin
          if (is_init) begin
            for (int p = 0; p < NPATT; p++) match[p] <= '0;
            state <= S_EVT;
          end else if (is_data && state == S_EVT) begin
            for (int p = 0; p < NPATT; p++)
              if (en[p] && patt[p][in_word.layer] == in_word.ssid)
                match[p][in_word.layer] <= 1'b1;
          end else if (is_end && state == S_EVT) begin
            for (int p = 0; p < NPATT; p++) pend[p] <= &match[p];
            state <= S_READ;
          end
        end
        S_READ: begin
          if (loc_valid && loc_ready) begin
            if (loc_word.eoe) state <= S_IDLE;
            else              pend[first] <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Arbiter
  logic [1:0]       m_valid, m_ready;
  road_word_t [1:0] m_word;
  assign m_valid[0] = loc_valid;
  assign m_word[0]  = loc_word;
  assign loc_ready  = m_ready[0];
  assign m_valid[1] = HAS_UP ? up_valid : 1'b1;
  assign m_word[1]  = HAS_UP ? up_word : road_word_t'{eoe: 1'b1, road: '0};
  assign up_ready   = HAS_UP ? m_ready[1] : 1'b0;

  road_merge #(.N(2)) u_arb (
    .clk, .rst_n,
    .in_valid(m_valid), .in_word(m_word), .in_ready(m_ready),
    .out_valid, .out_word, .out_ready
  );
endmodule
