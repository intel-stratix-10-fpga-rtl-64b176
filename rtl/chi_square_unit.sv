// chi_square_unit: pipelined chi-square of one track candidate per cycle.
//
//   chi2 = sum_i=1..NDOF ( sum_j=1..NCOO S_ij * x_j + h_i )^2
//
// Stage 1 forms all NDOF*NCOO products S_ij*x_j in parallel, stage 2 the
// inner sums plus h_i, stage 3 the squares and stage 4 the outer sum, so a
// new candidate is accepted every cycle and the result appears LAT = 4
// cycles later with its metadata.  x_j are signed 16-bit coordinates,
// S_ij and h_i signed Q16.16; the inner sums are kept exact (53 bits) and
// chi2 is returned in Q16.16, saturated to 64 bits.  pass = (chi2 <= thresh)
// is the chi2 cut.  The parallel inner/outer sums and the one-per-cycle,
// fixed-latency pipeline follow the paper; fixed point instead of the
// original floating point is this design's choice.
module chi_square_unit
  import prm_pkg::*;
#(
  parameter int META_W = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic signed [NCOO-1:0][COORD_W-1:0]    x,
  input  logic signed [NDOF-1:0][NCOO-1:0][CONST_W-1:0] s,
  input  logic signed [NDOF-1:0][CONST_W-1:0]    h,
  input  logic [META_W-1:0]                      in_meta,
  input  logic [63:0]                            thresh,
  output logic                                   out_valid,
  output logic [63:0]                            chi2,
  output logic                                   pass,
  output logic [META_W-1:0]                      out_meta
);
  localparam int PW = CONST_W + COORD_W;          // 48
  localparam int TW = PW + $clog2(NCOO + 1) + 1;  // inner sum
  localparam int QW = 2*TW + $clog2(NDOF) + 1;    // outer sum

  logic [3:0]                        v;
  logic [META_W-1:0]                 m1, m2, m3;
  logic signed [PW-1:0]              prod [NDOF][NCOO];
  logic signed [CONST_W-1:0]         h1 [NDOF];
  logic signed [TW-1:0]              t [NDOF];
  logic signed [2*TW-1:0]            sq [NDOF];
  logic [QW-1:0]                     acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < NDOF; i++) acc = acc + QW'($unsigned(sq[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; out_valid <= 1'b0; chi2 <= '0; pass <= 1'b0;
    end else begin
      v <= {v[2:0], in_valid};
      out_valid <= v[2];
      if (v[2]) begin
        logic [QW-1:0] c;
        c    = acc >> FRAC;
        chi2 <= (|c[QW-1:64]) ? '1 : c[63:0];
        pass <= ((|c[QW-1:64]) ? 64'hFFFF_FFFF_FFFF_FFFF : c[63:0]) <= thresh;
      end
    end
  end

  always_ff @(posedge clk) begin
    // stage 1: products
    for (int i = 0; i < NDOF; i++) begin
      for (int j = 0; j < NCOO; j++) prod[i][j] <= PW'($signed(s[i][j])) * PW'($signed(x[j]));
      h1[i] <= $signed(h[i]);
    end
    m1 <= in_meta;
    // stage 2: inner sums
    for (int i = 0; i < NDOF; i++) begin
      logic signed [TW-1:0] a;
      a = TW'(h1[i]);
      for (int j = 0; j < NCOO; j++) a = a + TW'(prod[i][j]);
      t[i] <= a;
    end
    m2 <= m1;
    // stage 3: squares
    for (int i = 0; i < NDOF; i++) sq[i] <= t[i] * t[i];
    m3 <= m2;
    // stage 4 (outer sum) registered into chi2 above
    out_meta <= m3;
  end
endmodule
