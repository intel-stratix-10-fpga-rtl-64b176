// tb_ipbus_to_apb: an APB slave model with random wait states (pready low
// 0..3 cycles) and a memory of 256 words answers IPbus reads and writes
// through the bridge.  The test checks the data read back, the byte address
// (word address x4), one SETUP cycle before ACCESS, stable signals while
// waiting, and that pslverr (for addresses >= 200) becomes an IPbus err.
// Each transfer must take 3 + wait-state cycles from strobe to ack.
module tb_ipbus_to_apb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ipb_strobe, ipb_write, ipb_ack, ipb_err;
  logic [31:0] ipb_addr, ipb_wdata, ipb_rdata;
  logic psel, penable, pwrite, pready, pslverr;
  logic [15:0] paddr;
  logic [31:0] pwdata, prdata;

  ipbus_to_apb dut (.*);

  // APB slave
  logic [31:0] mem[256];
  int waits, wcnt = 0, nwait_total = 0;
  bit setup_seen;
  always @(posedge clk) begin
    if (psel && !penable) begin
      setup_seen = 1;
      waits = $urandom_range(0, 3);
    end
    if (psel && penable) begin
      checks++;
      if (!setup_seen || paddr[1:0] != 0) failures++;
      if (pready) begin
        if (pwrite && paddr[9:2] < 200) mem[paddr[9:2]] = pwdata;
        setup_seen = 0;
        wcnt = 0;
      end else wcnt++;
    end
  end
  always_comb begin
    pready  = psel && penable && (wcnt >= waits);
    prdata  = (psel && penable && !pwrite) ? mem[paddr[9:2]] : 32'hDEAD_BEEF;
    pslverr = psel && penable && pready && paddr[9:2] >= 200;
  end

  int lat;
  task automatic ipb(input bit w, input logic [31:0] a, input logic [31:0] d, output logic [31:0] q, output bit err);
    @(negedge clk);
    ipb_strobe = 1; ipb_write = w; ipb_addr = a; ipb_wdata = d;
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!ipb_ack && !ipb_err);
    q = ipb_rdata; err = ipb_err;
    @(negedge clk) ipb_strobe = 0;
    checks++; if (lat != 3 + waits) begin failures++; $display("latency %0d waits %0d", lat, waits); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_mem[256];
    logic [31:0] q;
    bit err;
    ipb_strobe = 0; ipb_write = 0; ipb_addr = 0; ipb_wdata = 0;
    for (int i = 0; i < 256; i++) begin mem[i] = 0; ref_mem[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, 255);
      if ($urandom_range(0, 1) == 1) begin
        logic [31:0] d;
        d = $urandom;
        ipb(1, a, d, q, err);
        if (a < 200) ref_mem[a] = d;
      end else begin
        ipb(0, a, 0, q, err);
        if (a < 200) begin checks++; if (q != ref_mem[a]) failures++; end
      end
      checks++; if (err != (a >= 200)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
