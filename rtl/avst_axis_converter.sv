// avst_axis_converter: bridge between the Ethernet MAC's Avalon-ST packet
// interface and the AXI4-Stream interface of the IPbus core, both directions.
//
// Receive (MAC -> IPbus): Avalon-ST carries the first byte of a beat in the
// most significant symbol and marks the last beat with eop and the number of
// unused symbols with `empty`; AXI-Stream carries the first byte in tdata's
// low byte, marks the last beat with tlast and the used bytes with tkeep.
// The converter reverses the byte order, turns empty into a tkeep mask on
// the last beat (tkeep = all ones elsewhere) and drops sop.
// Transmit (IPbus -> MAC): the reverse; sop is regenerated on the first beat
// after a tlast (or after reset) and empty = bytes - popcount(tkeep) on the
// last beat.  Each direction has one register stage (one cycle latency,
// full throughput, standard valid/ready).  The byte-order convention is this
// design's assumption; the paper names the converter only.
module avst_axis_converter #(
  parameter int DATA_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // receive: Avalon-ST sink
  input  logic                     rx_avst_valid,
  output logic                     rx_avst_ready,
  input  logic [DATA_W-1:0]        rx_avst_data,
  input  logic                     rx_avst_sop,
  input  logic                     rx_avst_eop,
  input  logic [$clog2(DATA_W/8)-1:0] rx_avst_empty,
  // receive: AXI-Stream source
  output logic                     rx_axis_tvalid,
  input  logic                     rx_axis_tready,
  output logic [DATA_W-1:0]        rx_axis_tdata,
  output logic [DATA_W/8-1:0]      rx_axis_tkeep,
  output logic                     rx_axis_tlast,
  // transmit: AXI-Stream sink
  input  logic                     tx_axis_tvalid,
  output logic                     tx_axis_tready,
  input  logic [DATA_W-1:0]        tx_axis_tdata,
  input  logic [DATA_W/8-1:0]      tx_axis_tkeep,
  input  logic                     tx_axis_tlast,
  // transmit: Avalon-ST source
  output logic                     tx_avst_valid,
  input  logic                     tx_avst_ready,
  output logic [DATA_W-1:0]        tx_avst_data,
  output logic                     tx_avst_sop,
  output logic                     tx_avst_eop,
  output logic [$clog2(DATA_W/8)-1:0] tx_avst_empty
);
  localparam int NB = DATA_W / 8;
  localparam int EW = $clog2(NB);

  function automatic logic [DATA_W-1:0] swap(input logic [DATA_W-1:0] d);
    for (int b = 0; b < NB; b++) swap[b*8 +: 8] = d[(NB-1-b)*8 +: 8];
  endfunction

  // receive
  logic [NB-1:0] keep_rx;
  always_comb begin
    keep_rx = '1;
    if (rx_avst_eop)
      for (int b = 0; b < NB; b++) keep_rx[b] = (b < NB - int'(rx_avst_empty));
  end
  assign rx_avst_ready = !rx_axis_tvalid || rx_axis_tready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_axis_tvalid <= 1'b0; rx_axis_tdata <= '0; rx_axis_tkeep <= '0; rx_axis_tlast <= 1'b0;
    end else if (rx_avst_ready) begin
      rx_axis_tvalid <= rx_avst_valid;
      if (rx_avst_valid) begin
        rx_axis_tdata <= swap(rx_avst_data);
        rx_axis_tkeep <= keep_rx;
        rx_axis_tlast <= rx_avst_eop;
      end
    end
  end

  // transmit
  logic first;
  logic [EW:0] used;
  always_comb begin
    used = '0;
    for (int b = 0; b < NB; b++) used = used + (EW+1)'(tx_axis_tkeep[b]);
  end
  assign tx_axis_tready = !tx_avst_valid || tx_avst_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_avst_valid <= 1'b0; tx_avst_data <= '0; tx_avst_sop <= 1'b0; tx_avst_eop <= 1'b0;
      tx_avst_empty <= '0; first <= 1'b1;
    end else if (tx_axis_tready) begin
      tx_avst_valid <= tx_axis_tvalid;
      if (tx_axis_tvalid) begin
        tx_avst_data  <= swap(tx_axis_tdata);
        tx_avst_sop   <= first;
        tx_avst_eop   <= tx_axis_tlast;
        tx_avst_empty <= tx_axis_tlast ? EW'((EW+1)'(NB) - used) : '0;
        first         <= tx_axis_tlast;
      end
    end
  end
endmodule
