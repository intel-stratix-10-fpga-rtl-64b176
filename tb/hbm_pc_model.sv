// hbm_pc_model: behavioural model of one HBM2 pseudo-channel behind the
// vendor controller's AXI read port (not synthesizable; for testbenches).
//
// Reads (one 32-byte beat per address) return in order after LAT cycles;
// every REFI cycles the channel refreshes for RFC cycles and returns nothing,
// which produces the latency tails of a DRAM.  Up to QD reads are
// accepted.  Memory is sparse (an associative array of 32-byte words,
// unwritten words read zero) and written through a simple write port.
// n_refresh_stalls counts cycles in which a due read waited for a refresh.
module hbm_pc_model
  import prm_pkg::*;
#(
  parameter int LAT  = 20,
  parameter int REFI = 975,
  parameter int RFC  = 88,
  parameter int QD   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ar_valid,
  input  axi_ar_t             ar,
  output logic                ar_ready,
  output logic                r_valid,
  output axi_r_t              r,
  input  logic                r_ready,
  input  logic                we,
  input  logic [HBM_AW-1:0]   waddr,
  input  logic [HBM_DW-1:0]   wdata,
  output int                  n_reads,
  output int                  n_refresh_stalls
);
  typedef struct packed {
    longint              due;
    logic [AXI_ID_W-1:0] id;
    logic [HBM_AW-1:0]   addr;
  } req_t;
  req_t q[$];
  logic [HBM_DW-1:0] mem [longint];
  longint cyc;
  logic refresh;

  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
      cyc = 0;
      r_valid <= 1'b0;
      r <= '0;
      ar_ready <= 1'b0;
      n_reads <= 0;
      n_refresh_stalls <= 0;
    end else begin
      cyc = cyc + 1;
      refresh = (cyc % REFI) < RFC;
      if (we) mem[longint'(waddr >> 5)] = wdata;
      if (ar_valid && ar_ready) begin
        q.push_back('{due: cyc + LAT, id: ar.id, addr: ar.addr});
        n_reads <= n_reads + 1;
      end
      if (r_valid && r_ready) begin
        void'(q.pop_front());
        r_valid <= 1'b0;
      end
      if (!(r_valid && !r_ready)) begin
        if (q.size() > 0 && q[0].due <= cyc && !(r_valid && r_ready && q.size() == 0)) begin
          if (refresh) n_refresh_stalls <= n_refresh_stalls + 1;
          else begin
            r_valid <= 1'b1;
            r.id    <= q[0].id;
            r.data  <= mem.exists(longint'(q[0].addr >> 5)) ? mem[longint'(q[0].addr >> 5)] : '0;
          end
        end
      end
      ar_ready <= (q.size() < QD - 1);
    end
  end
endmodule
