// tb_asic_emulator: one emulator with a testbench-driven daisy-chain input.
// Patterns p hold SSID 100*p + layer.  Event 1 fully matches patterns 3 and
// 12, and 7 on only seven layers; the upstream sends road 999.  The output
// must be exactly {INST*16+3, INST*16+12, 999} followed by one end-of-event,
// input must be refused during readout, and a second event (pattern 5 only)
// must not repeat the earlier roads.  Then 20 random events: a random subset
// of the patterns is sent on all eight layers, other patterns on up to seven,
// all words shuffled and some repeated; the roads must come out exactly once
// each, lowest pattern first, one per cycle with no gap (the readout rate),
// followed by one end-of-event.
module tb_asic_emulator;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int INST = 2;

  logic in_valid, in_ready, cfg_we, up_valid, up_ready, out_valid, out_ready;
  am_word_t in_word;
  logic [3:0] cfg_patt; logic [2:0] cfg_layer; logic [SSID_W-1:0] cfg_ssid;
  road_word_t up_word, out_word;

  asic_emulator #(.NPATT(16), .INST_ID(INST), .HAS_UP(1'b1)) dut (.*);

  int got[$]; int got_t[$]; int ee = 0; int busy_seen = 0; int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (out_word.eoe) ee++;
      else begin
        got.push_back(int'(out_word.road));
        got_t.push_back(cyc);
      end
    end
    if (!in_ready) busy_seen++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input am_word_t w);
    @(negedge clk);
    in_valid = 1; in_word = w;
    do @(posedge clk); while (!in_ready);
    @(negedge clk) in_valid = 0;
  endtask

  task automatic data(input int l, input int s);
    send('{kind: AM_DATA, cmd: CMD_NONE, layer: 3'(l), ssid: 16'(s)});
  endtask

  initial begin
    in_valid = 0; in_word = '0; cfg_we = 0; cfg_patt = 0; cfg_layer = 0; cfg_ssid = 0;
    up_valid = 0; up_word = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 16; p++)
      for (int l = 0; l < 8; l++) begin
        @(negedge clk);
        cfg_we = 1; cfg_patt = 4'(p); cfg_layer = 3'(l); cfg_ssid = 16'(100*p + l);
      end
    @(negedge clk) cfg_we = 0;
    // event 1
    send('{kind: AM_CMD, cmd: CMD_INIT, layer: 0, ssid: 0});
    for (int l = 0; l < 8; l++) begin
      data(l, 300 + l);
      data(l, 1200 + l);
      if (l != 4) data(l, 700 + l);
      data(l, 5555);
    end
    send('{kind: AM_IDLE, cmd: CMD_NONE, layer: 0, ssid: 0});
    // upstream road and its end-of-event
    @(negedge clk) begin up_valid = 1; up_word = '{eoe: 0, road: 999}; end
    do @(posedge clk); while (!up_ready);
    @(negedge clk) up_word = '{eoe: 1, road: 0};
    do @(posedge clk); while (!up_ready);
    @(negedge clk) up_valid = 0;
    send('{kind: AM_CMD, cmd: CMD_END, layer: 0, ssid: 0});
    // backpressure on the output for a while
    @(negedge clk) out_ready = 0;
    repeat (5) @(posedge clk);
    @(negedge clk) out_ready = 1;
    wait (ee == 1);
    repeat (3) @(posedge clk);
    got.sort();
    checks++; if (got.size() != 3) failures++;
    checks++; if (got.size() == 3 && !(got[0] == INST*16+3 && got[1] == INST*16+12 && got[2] == 999)) failures++;
    checks++; if (busy_seen == 0) failures++;
    // event 2: pattern 5 only, no upstream road (upstream sends only EOE)
    got.delete();
    send('{kind: AM_CMD, cmd: CMD_INIT, layer: 0, ssid: 0});
    for (int l = 0; l < 8; l++) data(l, 500 + l);
    @(negedge clk) begin up_valid = 1; up_word = '{eoe: 1, road: 0}; end
    do @(posedge clk); while (!up_ready);
    @(negedge clk) up_valid = 0;
    send('{kind: AM_CMD, cmd: CMD_END, layer: 0, ssid: 0});
    wait (ee == 2);
    repeat (3) @(posedge clk);
    checks++; if (got.size() != 1 || got[0] != INST*16+5) failures++;
    if (failures) $display("got %p", got);

    // random events
    for (int ev = 0; ev < 20; ev++) begin
      int exp_r[$];
      int words[$];
      got.delete(); got_t.delete(); exp_r.delete(); words.delete();
      for (int p = 0; p < 16; p++) begin
        if ($urandom_range(0, 2) == 0) begin
          exp_r.push_back(INST*16 + p);
          for (int l = 0; l < 8; l++) words.push_back(l*65536 + 100*p + l);
        end else begin
          int skip;
          skip = $urandom_range(0, 7);
          for (int l = 0; l < 8; l++)
            if (l != skip && $urandom_range(0, 1) == 0) words.push_back(l*65536 + 100*p + l);
        end
      end
      for (int k = 0; k < 5 && words.size() > 0; k++) words.push_back(words[$urandom_range(0, words.size()-1)]);
      words.shuffle();
      send('{kind: AM_CMD, cmd: CMD_INIT, layer: 0, ssid: 0});
      foreach (words[i]) data(words[i] / 65536, words[i] % 65536);
      @(negedge clk) begin up_valid = 1; up_word = '{eoe: 1, road: 0}; end
      do @(posedge clk); while (!up_ready);
      @(negedge clk) up_valid = 0;
      send('{kind: AM_CMD, cmd: CMD_END, layer: 0, ssid: 0});
      wait (ee == ev + 3);
      repeat (3) @(posedge clk);
      checks++;
      if (got != exp_r) begin failures++; $display("random event %0d got %p exp %p", ev, got, exp_r); end
      for (int i = 1; i < got_t.size(); i++) begin
        checks++;
        if (got_t[i] != got_t[i-1] + 1) begin failures++; $display("random event %0d: gap of %0d cycles in readout", ev, got_t[i] - got_t[i-1]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
