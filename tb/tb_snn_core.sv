// tb_snn_core: self-checking test of a full spiking core tile at its default
// size (256 axons, 256 LIF neurons).
// The core is configured through its configuration port, then fed packets on
// its West mesh input. Spikes on axons 4 and 9 must make neurons 0 and 1 fire
// on the next tick and send spike packets, routed East with dx stepped from 2
// to 1. An activation of 40 for axon 4 must be rate coded into floor(40/16)
// = 2 spikes on consecutive ticks, each firing neuron 0 (alone) again. A
// second activation of 20 in the same window raises the sum to 60 and must add
// exactly one spike; after the 16-tick window the input potential is cleared,
// so a new 20 gives one spike. A spike packet for another core (dx = -1) must
// pass through the router to the West output.
module tb_snn_core;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, tick;
  logic cfg_we; cfg_region_e cfg_region; logic [7:0] cfg_addr; logic [255:0] cfg_data;
  packet_t nb_in_pkt [4], nb_out_pkt [4];
  logic nb_in_valid [4], nb_in_ready [4], nb_out_valid [4], nb_out_ready [4];
  logic busy, stall;
  packet_t got [4][$];

  snn_core dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int d = 0; d < 4; d++) if (nb_out_valid[d] && nb_out_ready[d]) got[d].push_back(nb_out_pkt[d]);

  task automatic cfg(input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we = 1; cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic send(input pkt_type_e t, input int dx, input int axon, input int payload);
    @(negedge clk);
    nb_in_pkt[3] = '{dx: 9'(dx), dy: 9'sd0, ptype: t, axon: 8'(axon), payload: 8'(payload)};
    nb_in_valid[3] = 1;
    @(posedge clk); while (!nb_in_ready[3]) @(posedge clk);
    @(negedge clk); nb_in_valid[3] = 0;
  endtask
  task automatic do_tick();
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    repeat (30) @(negedge clk);
  endtask

  initial begin
    neuron_cfg_t nc;
    tick = 0; cfg_we = 0; cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    for (int d = 0; d < 4; d++) begin nb_in_valid[d] = 0; nb_in_pkt[d] = '0; nb_out_ready[d] = 1; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      cfg(CFG_XBAR, a, (a == 4) ? 256'b11 : (a == 9) ? 256'b10 : 256'b0);
      cfg(CFG_ATYP, a, 256'(0));
    end
    for (int n = 0; n < 256; n++) begin
      nc = '0; nc.thresh = 8'sd127; nc.leak_k = 3'd0;
      if (n == 0) begin nc.weight[0] = 8'sd50; nc.thresh = 8'sd40; nc.dest_en = 1;
        nc.dest_dx = 9'sd2; nc.dest_axon = 8'd7; nc.dest_tick = 4'd1; end
      if (n == 1) begin nc.weight[0] = 8'sd20; nc.thresh = 8'sd40; nc.dest_en = 1;
        nc.dest_dx = 9'sd2; nc.dest_axon = 8'd8; nc.dest_tick = 4'd2; end
      cfg(CFG_NEUR, n, 256'(nc));
    end
    cfg(CFG_CTRL, 2, 256'(16));
    cfg(CFG_CTRL, 0, 256'(1));

    send(PKT_SPIKE, 0, 4, 0);
    send(PKT_SPIKE, 0, 9, 0);
    send(PKT_SPIKE, -1, 77, 3);   // for the core to the West
    repeat (10) @(negedge clk);
    check(got[3].size() == 1 && got[3][0].dx == 9'sd0 && got[3][0].axon == 8'd77, "pass-through to West");
    do_tick();
    check(got[1].size() == 2, $sformatf("spike packets East after tick 0: %0d", got[1].size()));
    if (got[1].size() == 2) begin
      check(got[1][0].ptype == PKT_SPIKE && got[1][0].dx == 9'sd1 && got[1][0].axon == 8'd7 &&
            got[1][0].payload == 8'd1, "neuron 0 spike packet");
      check(got[1][1].axon == 8'd8 && got[1][1].payload == 8'd2, "neuron 1 spike packet");
    end
    got[1].delete();
    send(PKT_ACT, 0, 4, 40);      // 40/16 = 2 spikes
    do_tick();
    // neuron 1 gets only 20 < 40 from axon 4 alone (k = 0: no memory)
    check(got[1].size() == 1 && got[1][0].axon == 8'd7, $sformatf("rate-coded tick 1: %0d packets", got[1].size()));
    got[1].delete();
    do_tick();
    check(got[1].size() == 1 && got[1][0].axon == 8'd7, $sformatf("rate-coded tick 2: %0d packets", got[1].size()));
    got[1].delete();
    do_tick();
    check(got[1].size() == 0, "train over after floor(40/16) ticks");
    // a second activation in the same window: V = 40 + 20 = 60, floor(60/16)
    // = 3, so only one more spike is added to the train
    send(PKT_ACT, 0, 4, 20);
    do_tick();
    check(got[1].size() == 1 && got[1][0].axon == 8'd7, $sformatf("extra spike of a repeated activation: %0d packets", got[1].size()));
    got[1].delete();
    do_tick();
    check(got[1].size() == 0, "no restart of the whole train");
    // ticks 7..16 end the 16-tick window and clear V; a new activation of 20
    // then gives floor(20/16) = 1 spike (it would give 2 if V were kept at 80)
    repeat (10) do_tick();
    got[1].delete();
    send(PKT_ACT, 0, 4, 20);
    do_tick();
    do_tick();
    do_tick();
    check(got[1].size() == 1, $sformatf("new window after clearing: %0d spikes", got[1].size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
