// tb_parameter_calculator: random tracks and constants, including saturating
// ones; each parameter set is compared with the reference arithmetic and must
// appear 3 clock edges after its input.
module tb_parameter_calculator;
  import prm_pkg::*;
  import prm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic signed [NCOO-1:0][COORD_W-1:0] x;
  logic signed [NPAR-1:0][NCOO-1:0][CONST_W-1:0] c;
  logic signed [NPAR-1:0][CONST_W-1:0] q;
  logic [31:0] in_meta, out_meta;
  logic [NPAR-1:0][15:0] p;

  parameter_calculator #(.META_W(32)) dut (.*);

  typedef struct { logic [NPAR-1:0][15:0] p; int t; int meta; } exp_t;
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
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      e = expq.pop_front();
      if (p !== e.p) begin failures++; $display("p %h exp %h", p, e.p); end
      checks += 2;
      if (out_meta != e.meta) failures++;
      if (cyc - e.t != 3) begin failures++; $display("latency %0d", cyc - e.t); end
    end
  end

  initial begin
    xvec_t xr; int cr[NCOO]; int qr;
    exp_t e;
    in_valid = 0; x = '0; c = '0; q = '0; in_meta = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int j = 0; j < NCOO; j++) begin
        xr[j] = 16'($urandom_range(0, 2000)) - 16'sd1000;
        x[j] = xr[j];
      end
      for (int i = 0; i < NPAR; i++) begin
        for (int j = 0; j < NCOO; j++) begin
          cr[j] = (n % 50 == 0) ? 32'sh7FFF_FFFF : int'($urandom_range(0, 40000)) - 20000;
          c[i][j] = cr[j];
        end
        qr = int'($urandom_range(0, 2000000)) - 1000000;
        q[i] = qr;
        e.p[i] = ref_par(xr, cr, qr);
      end
      in_meta = n;
      e.t = cyc; e.meta = n;
      if (in_valid) expq.push_back(e);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
