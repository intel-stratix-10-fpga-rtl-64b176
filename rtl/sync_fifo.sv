// sync_fifo: single-clock first-word-fall-through FIFO used for queueing,
// back-pressure and (in this single-clock build) the clock-domain-crossing
// FIFOs of the HBM interfaces.  valid/ready on both sides; a word is
// accepted when in_valid && in_ready and leaves when out_valid && out_ready.
// Storage is an array, so large depths map to block RAM.  count is the
// fill level.  Reset empties the FIFO.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end
endmodule
