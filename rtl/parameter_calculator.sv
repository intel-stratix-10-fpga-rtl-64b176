// parameter_calculator: linearised track parameters of one track per cycle.
//
//   p_i = sum_j=1..NCOO C_ij * x_j + q_i,   i = 1..NPAR (eta, phi, pT, d0, z0)
//
// Stage 1 forms the NPAR*NCOO products in parallel, stage 2 the sums plus
// q_i (Q16.16), stage 3 converts each parameter to a signed 16-bit fixed
// point number with OUT_FRAC fractional bits, saturating.  Latency LAT = 3
// cycles, one track per cycle.  The paper prints the offset inside the sum
// over j; as in the usual linear fit it is added once here.  Fixed point and
// the 16-bit output format are this design's choices.
module parameter_calculator
  import prm_pkg::*;
#(
  parameter int META_W   = 32,
  parameter int OUT_FRAC = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic signed [NCOO-1:0][COORD_W-1:0]    x,
  input  logic signed [NPAR-1:0][NCOO-1:0][CONST_W-1:0] c,
  input  logic signed [NPAR-1:0][CONST_W-1:0]    q,
  input  logic [META_W-1:0]                      in_meta,
  output logic                                   out_valid,
  output logic [NPAR-1:0][15:0]                  p,
  output logic [META_W-1:0]                      out_meta
);
  localparam int PW = CONST_W + COORD_W;
  localparam int TW = PW + $clog2(NCOO + 1) + 1;
  localparam int SH = FRAC - OUT_FRAC;

  logic [2:0]              v;
  logic [META_W-1:0]       m1, m2;
  logic signed [PW-1:0]    prod [NPAR][NCOO];
  logic signed [CONST_W-1:0] q1 [NPAR];
  logic signed [TW-1:0]    t [NPAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
    end else begin
      v <= {v[1:0], in_valid};
    end
  end
  assign out_valid = v[2];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NPAR; i++) begin
      for (int j = 0; j < NCOO; j++) prod[i][j] <= PW'($signed(c[i][j])) * PW'($signed(x[j]));
      q1[i] <= $signed(q[i]);
    end
    m1 <= in_meta;
    for (int i = 0; i < NPAR; i++) begin
      logic signed [TW-1:0] a;
      a = TW'(q1[i]);
      for (int j = 0; j < NCOO; j++) a = a + TW'(prod[i][j]);
      t[i] <= a;
    end
    m2 <= m1;
    for (int i = 0; i < NPAR; i++) begin
      logic signed [TW-1:0] r;
      r = t[i] >>> SH;
      if (r > TW'(32767))        p[i] <= 16'h7FFF;
      else if (r < -TW'(32768))  p[i] <= 16'h8000;
      else                       p[i] <= r[15:0];
    end
    out_meta <= m2;
  end
endmodule
