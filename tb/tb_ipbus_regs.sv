// tb_ipbus_regs: IPbus master tasks write and read back every configuration
// register with random values, check the start pulses last one cycle, load
// 50 RAM words through RAM_CTRL/RAM_DATA (address must auto-increment),
// read the 16 status counters and check that an unmapped address returns
// err.  Every access must be acknowledged one cycle after strobe.
module tb_ipbus_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ipb_strobe, ipb_write, ipb_ack, ipb_err;
  logic [31:0] ipb_addr, ipb_wdata, ipb_rdata;
  logic start_init, start_inject, fake_en, ram_we, busy;
  logic [15:0] n_const_chunks, n_patterns, n_expected, n_events, gap, ram_addr;
  logic [63:0] thresh;
  logic [1:0] ram_sel;
  logic [31:0] ram_wdata;
  logic [15:0][31:0] stat;

  ipbus_regs dut (.*);

  int lat;
  task automatic ipb(input bit w, input logic [31:0] a, input logic [31:0] d, output logic [31:0] q, output bit err);
    @(negedge clk);
    ipb_strobe = 1; ipb_write = w; ipb_addr = a; ipb_wdata = d;
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!ipb_ack && !ipb_err);
    q = ipb_rdata; err = ipb_err;
    @(negedge clk) ipb_strobe = 0;
    checks++; if (lat != 1) begin failures++; $display("ack latency %0d", lat); end
  endtask

  int n_init = 0, n_inj = 0, n_we = 0;
  logic [31:0] ram[4][64];
  always @(posedge clk) begin
    if (start_init) n_init++;
    if (start_inject) n_inj++;
    if (ram_we) begin ram[ram_sel][ram_addr[5:0]] = ram_wdata; n_we++; end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] q, v;
    bit err;
    ipb_strobe = 0; ipb_write = 0; ipb_addr = 0; ipb_wdata = 0; busy = 0;
    for (int i = 0; i < 16; i++) stat[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 2; a <= 8; a++) begin
      v = $urandom;
      if (a < 7) v[31:16] = 0;
      ipb(1, a, v, q, err);
      ipb(0, a, 0, q, err);
      checks++; if (q != v || err) begin failures++; $display("reg %0d readback %h exp %h", a, q, v); end
    end
    ipb(1, 0, 32'h7, q, err);
    ipb(0, 1, 0, q, err);
    checks++; if (q[2] != 1 || !fake_en) failures++;
    busy = 1;
    ipb(0, 1, 0, q, err);
    checks++; if (q[0] != 1) failures++;
    ipb(1, 0, 32'h2, q, err);
    checks++; if (n_init != 1 || n_inj != 2 || fake_en) begin failures++; $display("pulses %0d %0d", n_init, n_inj); end
    // RAM load, select 2 from address 5
    ipb(1, 9, {14'd0, 2'd2, 16'd5}, q, err);
    for (int k = 0; k < 50; k++) ipb(1, 10, 32'hA000_0000 + k, q, err);
    repeat (2) @(posedge clk);
    for (int k = 0; k < 50; k++) begin checks++; if (ram[2][5+k] != 32'hA000_0000 + k) failures++; end
    checks++; if (n_we != 50) failures++;
    for (int i = 0; i < 16; i++) begin
      ipb(0, 32'h10 + i, 0, q, err);
      checks++; if (q != stat[i]) failures++;
    end
    ipb(0, 32'h55, 0, q, err);
    checks++; if (!err) failures++;
    ipb(1, 32'h1234_0000, 1, q, err);
    checks++; if (!err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
