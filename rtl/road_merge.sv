// road_merge: arbiter for road streams.  N input streams each carry roadIDs
// of one event followed by one end-of-event (EOE) word.  Roads are forwarded
// round-robin; the EOE word of each input is absorbed and latched, and input
// i is held off once its EOE is latched so that roads of the next event can
// not overtake.  When every input has delivered its EOE one EOE word is sent
// and the latches clear.  The output is registered (one cycle latency);
// valid/ready handshake on all ports.  Used as the Arbiter inside an ASIC
// emulator (local core + daisy-chain input) and as the ASIC Interface
// arbiter over the chains.  The round-robin policy and the EOE merge rule are
// this design's own.
module road_merge
  import prm_pkg::*;
#(
  parameter int N = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         in_valid,
  input  road_word_t [N-1:0]   in_word,
  output logic [N-1:0]         in_ready,
  output logic                 out_valid,
  output road_word_t           out_word,
  input  logic                 out_ready
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [N-1:0]  ee_seen;
  logic [IW-1:0] rr;          // input with priority
  logic          can_load, grant_any, emit_ee;
  logic [IW-1:0] grant;

  assign can_load = !out_valid || out_ready;

  always_comb begin
    grant_any = 1'b0;
    grant     = '0;
    for (int k = 0; k < N; k++) begin
      if (!grant_any && in_valid[((int'(rr) + k) % N)] && !in_word[((int'(rr) + k) % N)].eoe && !ee_seen[((int'(rr) + k) % N)]) begin
        grant_any = 1'b1;
        grant     = IW'((int'(rr) + k) % N);
      end
    end
    emit_ee = can_load && !grant_any && (&ee_seen);
    for (int i = 0; i < N; i++)
      in_ready[i] = (in_valid[i] && in_word[i].eoe && !ee_seen[i]) ||
                    (can_load && grant_any && grant == IW'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ee_seen   <= '0;
      rr        <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_word[i].eoe && !ee_seen[i]) ee_seen[i] <= 1'b1;
      if (can_load) begin
        if (grant_any) begin
          out_valid <= 1'b1;
          out_word  <= in_word[grant];
          rr        <= (grant == IW'(N-1)) ? '0 : grant + 1'b1;
        end else if (emit_ee) begin
          out_valid     <= 1'b1;
          out_word.eoe  <= 1'b1;
          out_word.road <= '0;
          ee_seen       <= '0;
        end else begin
          out_valid <= 1'b0;
        end
      end
    end
  end
endmodule
