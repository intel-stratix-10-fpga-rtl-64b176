// ipbus_to_apb: translator from an IPbus slave port to an APB master, used
// to monitor and configure the HBM controller.
//
// An IPbus access (strobe held until ack) starts an APB transfer: one SETUP
// cycle (psel high, penable low, address, direction and write data stable),
// then ACCESS cycles (penable high) until pready.  The APB read data and
// pslverr are returned with a one-cycle ack or err; then one idle cycle lets
// the master drop strobe.  IPbus word addresses become APB byte addresses
// (x4).  The protocol mapping is this design's; the paper names the
// translator only.
module ipbus_to_apb #(
  parameter int AW = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ipb_strobe,
  input  logic           ipb_write,
  input  logic [31:0]    ipb_addr,
  input  logic [31:0]    ipb_wdata,
  output logic [31:0]    ipb_rdata,
  output logic           ipb_ack,
  output logic           ipb_err,
  output logic           psel,
  output logic           penable,
  output logic           pwrite,
  output logic [AW-1:0]  paddr,
  output logic [31:0]    pwdata,
  input  logic [31:0]    prdata,
  input  logic           pready,
  input  logic           pslverr
);
  typedef enum logic [1:0] {A_IDLE, A_SETUP, A_ACCESS, A_DONE} ast_e;
  ast_e st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; psel <= 1'b0; penable <= 1'b0; pwrite <= 1'b0; paddr <= '0; pwdata <= '0;
      ipb_rdata <= '0; ipb_ack <= 1'b0; ipb_err <= 1'b0;
    end else begin
      ipb_ack <= 1'b0;
      ipb_err <= 1'b0;
      case (st)
        A_IDLE: if (ipb_strobe) begin
          psel   <= 1'b1;
          pwrite <= ipb_write;
          paddr  <= AW'({ipb_addr, 2'b00});
          pwdata <= ipb_wdata;
          st     <= A_SETUP;
        end
        A_SETUP: begin penable <= 1'b1; st <= A_ACCESS; end
        A_ACCESS: if (pready) begin
          psel <= 1'b0; penable <= 1'b0;
          ipb_rdata <= prdata;
          ipb_ack   <= !pslverr;
          ipb_err   <= pslverr;
          st <= A_DONE;
        end
        A_DONE: st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

  a_apb_stable: assert property (@(posedge clk) disable iff (!rst_n)
    psel && penable && !pready |=> psel && penable && $stable(paddr) && $stable(pwrite));
endmodule
