// tb_axi_latency_hist: self-checking test of the AXI read-latency histogram.
//
// Three channels are driven by a stand-in for an in-order memory: a read
// address is accepted at random, and its data beat is offered at a random
// latency (1..70 cycles) that never overtakes the previous beat of the same
// channel; r_ready is random, so waiting beats add to the latency.  The test
// bench stamps every accepted address itself and bins every accepted beat
// into its own histogram.  The design's bins are read back and compared
// after each of two phases, a clear is checked in between, and the timing
// rule (a beat is counted in the cycle after its handshake) is checked by
// sampling the bin of one beat before and after.
module tb_axi_latency_hist;
  localparam int NCH = 3, NBINS = 16, SH = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCH-1:0] ar_valid, ar_ready, r_valid, r_ready;
  logic clear;
  logic [3:0]  rd_bin;
  logic [31:0] rd_count;

  axi_latency_hist #(.NCH(NCH), .NBINS(NBINS), .BIN_SHIFT(SH)) dut (
    .clk, .rst_n, .ar_valid, .ar_ready, .r_valid, .r_ready, .clear, .rd_bin, .rd_count);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned ref_hist [NBINS];
  int unsigned issue_t [NCH][$];
  int unsigned due_t   [NCH][$];
  int unsigned last_due [NCH];
  int n_beats = 0, n_slow = 0;
  bit run = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // stimulus and reference, evaluated on the clock edge
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        if (ar_valid[c] && ar_ready[c]) begin
          int unsigned d;
          d = cyc + 1 + ($urandom % 70);
          if (d <= last_due[c]) d = last_due[c] + 1;
          last_due[c] = d;
          issue_t[c].push_back(cyc);
          due_t[c].push_back(d);
        end
        if (r_valid[c] && r_ready[c]) begin
          int unsigned lat, b;
          lat = cyc - issue_t[c].pop_front();
          void'(due_t[c].pop_front());
          b = lat >> SH;
          if (b > NBINS-1) b = NBINS-1;
          if (b == NBINS-1) n_slow++;
          ref_hist[b]++;
          n_beats++;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      ar_valid[c] = run && (issue_t[c].size() < 12) && ($urandom % 4 == 0);
      ar_ready[c] = ($urandom % 3 != 0);
      r_valid[c]  = (due_t[c].size() != 0) && (due_t[c][0] <= cyc);
      r_ready[c]  = ($urandom % 4 != 0);
    end
  end

  task automatic compare(input string phase);
    for (int b = 0; b < NBINS; b++) begin
      rd_bin = 4'(b);
      #1;
      check(rd_count == ref_hist[b],
            $sformatf("%s bin %0d: got %0d expected %0d", phase, b, rd_count, ref_hist[b]));
    end
  endtask

  task automatic drain;
    run = 1'b0;
    while (due_t[0].size() + due_t[1].size() + due_t[2].size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    ar_valid = '0; ar_ready = '0; r_valid = '0; r_ready = '0; clear = 1'b0; rd_bin = '0;
    for (int b = 0; b < NBINS; b++) ref_hist[b] = 0;
    for (int c = 0; c < NCH; c++) last_due[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare("after reset");

    // phase 1
    run = 1'b1;
    repeat (3000) @(posedge clk);
    drain();
    @(negedge clk);
    compare("phase 1");
    check(n_beats > 500, $sformatf("only %0d beats", n_beats));
    check(n_slow > 0, "no beat reached the overflow bin");

    // clear
    clear = 1'b1;
    @(posedge clk);
    #1 clear = 1'b0;
    for (int b = 0; b < NBINS; b++) ref_hist[b] = 0;
    compare("after clear");

    // timing: one beat on channel 0 with a known latency of 9 cycles -> bin 2
    begin
      int unsigned cnt0;
      rd_bin = 4'd2;
      @(negedge clk);
      cnt0 = rd_count;
      force ar_valid = 3'b001; force ar_ready = 3'b001;
      force r_valid = 3'b000;  force r_ready = 3'b000;
      @(negedge clk);
      release ar_valid; release ar_ready;
      force ar_valid = 3'b000;
      repeat (8) @(negedge clk);
      force r_valid = 3'b001; force r_ready = 3'b001;
      @(posedge clk);
      #1;
      check(rd_count == cnt0 + 1, $sformatf("beat not counted one cycle after handshake: %0d -> %0d", cnt0, rd_count));
      @(negedge clk);
      force r_valid = 3'b000; force r_ready = 3'b000;
      @(negedge clk);
      check(rd_count == cnt0 + 1, "beat counted twice");
      release ar_valid; release r_valid; release r_ready; release ar_ready;
    end

    // phase 2
    run = 1'b1;
    repeat (2000) @(posedge clk);
    drain();
    @(negedge clk);
    compare("phase 2");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
