// tb_avst_axis_converter: 60 random packets (1..20 bytes) go MAC -> IPbus
// (Avalon-ST in, AXI-Stream out) and 60 go the other way, both under random
// valid gaps and random ready.  The byte sequence of every packet and its
// length must survive the conversion; sop must mark exactly the first beat
// of each transmitted packet.  The sink checks the one-cycle latency on
// a beat accepted into an empty stage (valid right after that edge).
module tb_avst_axis_converter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_avst_valid, rx_avst_ready, rx_avst_sop, rx_avst_eop;
  logic [31:0] rx_avst_data, rx_axis_tdata, tx_axis_tdata, tx_avst_data;
  logic [1:0] rx_avst_empty, tx_avst_empty;
  logic rx_axis_tvalid, rx_axis_tready, rx_axis_tlast;
  logic [3:0] rx_axis_tkeep, tx_axis_tkeep;
  logic tx_axis_tvalid, tx_axis_tready, tx_axis_tlast;
  logic tx_avst_valid, tx_avst_ready, tx_avst_sop, tx_avst_eop;

  avst_axis_converter dut (.*);

  byte rx_exp[$], tx_exp[$];
  int rx_pk[$], tx_pk[$];
  int rx_len = 0, tx_len = 0, rx_done = 0, tx_done = 0;
  bit tx_first = 1;

  // AXI-Stream sink (receive direction): first byte in the low byte
  always @(posedge clk) if (rst_n && rx_axis_tvalid && rx_axis_tready) begin
    for (int b = 0; b < 4; b++) if (rx_axis_tkeep[b]) begin
      checks++;
      if (rx_exp.size() == 0 || rx_exp.pop_front() != byte'(rx_axis_tdata[b*8 +: 8])) failures++;
      rx_len++;
    end
    if (rx_axis_tlast) begin
      checks++; if (rx_pk.size() == 0 || rx_pk.pop_front() != rx_len) failures++;
      rx_len = 0; rx_done++;
    end
  end
  // Avalon-ST sink (transmit direction): first byte in the high byte
  always @(posedge clk) if (rst_n && tx_avst_valid && tx_avst_ready) begin
    int nb;
    checks++; if (tx_avst_sop != tx_first) failures++;
    nb = tx_avst_eop ? 4 - int'(tx_avst_empty) : 4;
    for (int b = 0; b < nb; b++) begin
      checks++;
      if (tx_exp.size() == 0 || tx_exp.pop_front() != byte'(tx_avst_data[(3-b)*8 +: 8])) failures++;
      tx_len++;
    end
    tx_first = tx_avst_eop;
    if (tx_avst_eop) begin
      checks++; if (tx_pk.size() == 0 || tx_pk.pop_front() != tx_len) failures++;
      tx_len = 0; tx_done++;
    end
  end
  always @(negedge clk) begin
    rx_axis_tready = $urandom_range(0, 3) != 0;
    tx_avst_ready  = $urandom_range(0, 3) != 0;
  end

  // latency: a beat accepted while the output stage is empty appears next cycle
  int lat_checks = 0;
  always @(posedge clk) if (rst_n && rx_avst_valid && rx_avst_ready && !rx_axis_tvalid) begin
    #1;
    checks++; lat_checks++; if (!rx_axis_tvalid) failures++;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Avalon-ST source
  initial begin
    rx_avst_valid = 0; rx_avst_sop = 0; rx_avst_eop = 0; rx_avst_empty = 0; rx_avst_data = 0;
    wait (rst_n);
    for (int p = 0; p < 60; p++) begin
      int len;
      len = $urandom_range(1, 20);
      rx_pk.push_back(len);
      for (int o = 0; o < len; o += 4) begin
        int nb;
        nb = (len - o < 4) ? len - o : 4;
        @(negedge clk);
        rx_avst_data = $urandom;
        for (int b = 0; b < nb; b++) rx_exp.push_back(byte'(rx_avst_data[(3-b)*8 +: 8]));
        rx_avst_valid = 1; rx_avst_sop = (o == 0); rx_avst_eop = (o + 4 >= len);
        rx_avst_empty = rx_avst_eop ? 2'(4 - nb) : 2'd0;
        do @(posedge clk); while (!rx_avst_ready);
        @(negedge clk) rx_avst_valid = 0;
        repeat ($urandom_range(0, 1)) @(negedge clk);
      end
    end
  end
  // AXI-Stream source
  initial begin
    tx_axis_tvalid = 0; tx_axis_tdata = 0; tx_axis_tkeep = 0; tx_axis_tlast = 0;
    wait (rst_n);
    for (int p = 0; p < 60; p++) begin
      int len;
      len = $urandom_range(1, 20);
      tx_pk.push_back(len);
      for (int o = 0; o < len; o += 4) begin
        int nb;
        nb = (len - o < 4) ? len - o : 4;
        @(negedge clk);
        tx_axis_tdata = $urandom;
        for (int b = 0; b < nb; b++) tx_exp.push_back(byte'(tx_axis_tdata[b*8 +: 8]));
        tx_axis_tvalid = 1; tx_axis_tlast = (o + 4 >= len);
        tx_axis_tkeep = 4'((1 << nb) - 1);
        do @(posedge clk); while (!tx_axis_tready);
        @(negedge clk) tx_axis_tvalid = 0;
        repeat ($urandom_range(0, 1)) @(negedge clk);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rx_done == 60 && tx_done == 60);
    repeat (3) @(posedge clk);
    checks++; if (rx_exp.size() != 0 || tx_exp.size() != 0 || lat_checks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
