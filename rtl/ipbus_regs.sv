// ipbus_regs: the "Registers and Memories" slave behind the IPbus core.
//
// IPbus transactions (strobe, write, 32-bit word address and data; one-cycle
// ack per access, the master holds strobe until ack) reach a small register
// map that configures the Data Generator and the chi2 cut, loads the Data
// Generator RAMs and reads the status counters of the pipeline:
//   0x00 CTRL      W: [0] start_init pulse, [1] start_inject pulse, [2] fake_en
//   0x01 STATUS    R: [0] busy, [2] fake_en
//   0x02..0x06     n_const_chunks, n_patterns, n_expected, n_events, gap
//   0x07, 0x08     chi2 cut (Q16.16) low and high word
//   0x09 RAM_CTRL  [17:16] RAM select, [15:0] word address
//   0x0A RAM_DATA  W: writes one RAM word and increments the address
//   0x10..0x1F     R: status counters stat[0..15]
// Other addresses read zero and are acknowledged with err.  The register
// map is this design's; the paper lists only what is configured and read.
module ipbus_regs #(
  parameter logic [63:0] THRESH_RST = 64'h0000_0010_0000_0000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ipb_strobe,
  input  logic                 ipb_write,
  input  logic [31:0]          ipb_addr,
  input  logic [31:0]          ipb_wdata,
  output logic [31:0]          ipb_rdata,
  output logic                 ipb_ack,
  output logic                 ipb_err,
  // configuration
  output logic                 start_init,
  output logic                 start_inject,
  output logic                 fake_en,
  output logic [15:0]          n_const_chunks,
  output logic [15:0]          n_patterns,
  output logic [15:0]          n_expected,
  output logic [15:0]          n_events,
  output logic [15:0]          gap,
  output logic [63:0]          thresh,
  output logic                 ram_we,
  output logic [1:0]           ram_sel,
  output logic [15:0]          ram_addr,
  output logic [31:0]          ram_wdata,
  // status
  input  logic                 busy,
  input  logic [15:0][31:0]    stat
);
  logic acc, wr;
  logic [31:0] rd;
  logic        known;
  assign acc = ipb_strobe && !ipb_ack && !ipb_err;
  assign wr  = acc && ipb_write;

  always_comb begin
    known = 1'b1; rd = '0;
    case (ipb_addr[7:0])
      8'h00: rd = {29'd0, fake_en, 2'b00};
      8'h01: rd = {29'd0, fake_en, 1'b0, busy};
      8'h02: rd = {16'd0, n_const_chunks};
      8'h03: rd = {16'd0, n_patterns};
      8'h04: rd = {16'd0, n_expected};
      8'h05: rd = {16'd0, n_events};
      8'h06: rd = {16'd0, gap};
      8'h07: rd = thresh[31:0];
      8'h08: rd = thresh[63:32];
      8'h09: rd = {14'd0, ram_sel, ram_addr};
      8'h0A: rd = '0;
      default: if (ipb_addr[7:4] == 4'h1) rd = stat[ipb_addr[3:0]];
               else known = 1'b0;
    endcase
    if (|ipb_addr[31:8]) known = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ipb_ack <= 1'b0; ipb_err <= 1'b0; ipb_rdata <= '0;
      start_init <= 1'b0; start_inject <= 1'b0; fake_en <= 1'b0;
      n_const_chunks <= '0; n_patterns <= '0; n_expected <= '0; n_events <= '0; gap <= '0;
      thresh <= THRESH_RST; ram_we <= 1'b0; ram_sel <= '0; ram_addr <= '0; ram_wdata <= '0;
    end else begin
      ipb_ack      <= acc && known;
      ipb_err      <= acc && !known;
      ipb_rdata    <= rd;
      start_init   <= 1'b0;
      start_inject <= 1'b0;
      ram_we       <= 1'b0;
      if (ram_we) ram_addr <= ram_addr + 1'b1;
      if (wr && known) case (ipb_addr[7:0])
        8'h00: begin start_init <= ipb_wdata[0]; start_inject <= ipb_wdata[1]; fake_en <= ipb_wdata[2]; end
        8'h02: n_const_chunks <= ipb_wdata[15:0];
        8'h03: n_patterns     <= ipb_wdata[15:0];
        8'h04: n_expected     <= ipb_wdata[15:0];
        8'h05: n_events       <= ipb_wdata[15:0];
        8'h06: gap            <= ipb_wdata[15:0];
        8'h07: thresh[31:0]   <= ipb_wdata;
        8'h08: thresh[63:32]  <= ipb_wdata;
        8'h09: begin ram_sel <= ipb_wdata[17:16]; ram_addr <= ipb_wdata[15:0]; end
        8'h0A: begin ram_we <= 1'b1; ram_wdata <= ipb_wdata; end
        default: ;
      endcase
    end
  end
endmodule
