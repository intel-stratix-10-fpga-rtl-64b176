// tb_asic_emu_group: five emulators; pattern p of emulator e holds SSID
// 1000*e + 10*p + layer.  Ten events, each matching a random subset of
// the 80 patterns (plus patterns with one layer missing, which must not
// fire); the merged stream must deliver every matched roadID (e*16+p)
// exactly once, no other roadID, and one end-of-event per event after all
// of that event's roads, with random backpressure on the output.  Every
// emulator, and so every daisy chain, must have delivered roads.
module tb_asic_emu_group;
  import prm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, cfg_we, road_valid, road_ready;
  am_word_t in_word;
  logic [2:0] cfg_emu; logic [3:0] cfg_patt; logic [2:0] cfg_layer; logic [SSID_W-1:0] cfg_ssid;
  road_word_t road_word;

  asic_emu_group dut (.*);

  int got[$]; int ee = 0;
  always @(posedge clk) if (rst_n && road_valid && road_ready) begin
    if (road_word.eoe) ee++; else got.push_back(int'(road_word.road));
  end
  always @(negedge clk) road_ready = ($urandom_range(0, 3) != 0);

  initial begin
    #2000000;
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

  initial begin
    int expct[$];
    int per_emu[5];
    foreach (per_emu[e]) per_emu[e] = 0;
    in_valid = 0; in_word = '0; cfg_we = 0; cfg_emu = 0; cfg_patt = 0; cfg_layer = 0; cfg_ssid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 5; e++)
      for (int p = 0; p < 16; p++)
        for (int l = 0; l < 8; l++) begin
          @(negedge clk);
          cfg_we = 1; cfg_emu = 3'(e); cfg_patt = 4'(p); cfg_layer = 3'(l);
          cfg_ssid = 16'(1000*e + 10*p + l);
        end
    @(negedge clk) cfg_we = 0;
    for (int ev = 0; ev < 10; ev++) begin
      expct.delete(); got.delete();
      send('{kind: AM_CMD, cmd: CMD_INIT, layer: 0, ssid: 0});
      for (int e = 0; e < 5; e++)
        for (int p = 0; p < 16; p++)
          if ($urandom_range(0, 4) == 0) begin
            expct.push_back(e*16 + p);
            for (int l = 0; l < 8; l++)
              send('{kind: AM_DATA, cmd: CMD_NONE, layer: 3'(l), ssid: 16'(1000*e + 10*p + l)});
          end else if ($urandom_range(0, 1) == 0) begin
            for (int l = 0; l < 7; l++)    // one layer missing: no match
              send('{kind: AM_DATA, cmd: CMD_NONE, layer: 3'(l), ssid: 16'(1000*e + 10*p + l)});
          end
      send('{kind: AM_CMD, cmd: CMD_END, layer: 0, ssid: 0});
      wait (ee == ev + 1);
      repeat (2) @(posedge clk);
      got.sort(); expct.sort();
      foreach (expct[i]) begin
        int n;
        n = 0;
        foreach (got[j]) if (got[j] == expct[i]) n++;
        checks++;
        if (n != 1) begin failures++; $display("event %0d road %0d delivered %0d times", ev, expct[i], n); end
        per_emu[expct[i] / 16] += n;
      end
      checks++;
      if (got.size() != expct.size()) begin failures++; $display("event %0d got %p exp %p", ev, got, expct); end
      checks++;
      if (ee != ev + 1) begin failures++; $display("event %0d: %0d end-of-event words", ev, ee); end
    end
    for (int e = 0; e < 5; e++) begin
      checks++;
      if (per_emu[e] == 0) begin failures++; $display("emulator %0d delivered no road", e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
