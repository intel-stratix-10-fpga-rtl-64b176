// tb_chi_square_unit: random candidates and constants, one per cycle, with
// some idle cycles; each result is compared with the reference chi2 and cut,
// and must appear exactly 4 cycles after its input.
module tb_chi_square_unit;
  import prm_pkg::*;
  import prm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid;
  logic signed [NCOO-1:0][COORD_W-1:0] x;
  logic signed [NDOF-1:0][NCOO-1:0][CONST_W-1:0] s;
  logic signed [NDOF-1:0][CONST_W-1:0] h;
  logic [31:0] in_meta, out_meta;
  logic [63:0] thresh, chi2;
  logic out_valid, pass;

  chi_square_unit #(.META_W(32)) dut (.*);

  typedef struct { logic [63:0] chi2; int t; } exp_t;
  exp_t expq[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (expq.size() == 0) begin failures++; checks++; end
    else begin
      e = expq.pop_front();
      checks += 3;
      if (chi2 !== e.chi2) begin failures++; $display("chi2 %h exp %h", chi2, e.chi2); end
      if (pass !== (e.chi2 <= thresh)) failures++;
      if (cyc - e.t != 4) begin failures++; $display("latency %0d", cyc - e.t); end
    end
  end

  initial begin
    xvec_t xr; int sr[NDOF][NCOO]; int hr[NDOF];
    in_valid = 0; x = '0; s = '0; h = '0; in_meta = 0;
    thresh = 64'h0000_0000_4000_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int j = 0; j < NCOO; j++) begin
        xr[j] = (n < 5) ? 16'sh7FFF : 16'($urandom_range(0, 2000)) - 16'sd1000;
        x[j] = xr[j];
      end
      for (int i = 0; i < NDOF; i++) begin
        for (int j = 0; j < NCOO; j++) begin
          sr[i][j] = (n < 5) ? 32'sh7FFF_FFFF : int'($urandom_range(0, 131072)) - 65536;
          s[i][j] = sr[i][j];
        end
        hr[i] = int'($urandom_range(0, 2000000)) - 1000000;
        h[i] = hr[i];
      end
      in_meta = n;
      if (in_valid) expq.push_back('{chi2: ref_chi2(xr, sr, hr), t: cyc});
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
