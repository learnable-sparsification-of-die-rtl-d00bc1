// tb_two_chips: two chips at their default size joined by their serial links,
// showing the spike-based die-to-die path end to end.
//
// Chip 0's East output link drives chip 1's West input link, and chip 1's
// West output drives chip 0's East input. Four activations a_k = 0, 40, 100,
// 255 enter chip 0 over its West link and travel (dx = 6) to the artificial
// core A(6,3), whose neuron k copies axon k (weight 1, shift 0). Its outputs
// reach the spiking edge core S(7,3), which rate codes a_k into floor(a_k/16)
// = 0, 2, 6, 15 spikes on consecutive ticks. Each spike fires neuron k of
// S(7,3), whose packet (dx = 1) leaves through chip 0's East EMIO and lands
// on S(0,3) of chip 1. There neuron k fires again and sends its spike to the
// artificial core A(1,3), which counts spikes over a window of T = 16 ticks
// (pass period 16, enabled so that the whole train falls in one window) and
// converts the count S_k to floor(255*S_k/16) = 0, 31, 95, 239. A(1,3)'s
// neuron k copies that value and sends it East (dx = 7) out of chip 1, where
// the test receives it.
// Checked: the four final activations, that exactly 0+2+6+15 = 23 words
// crossed from chip 0 to chip 1 and all were spikes (the zero activation sent
// none), and that nothing crossed back.
module tb_two_chips;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we [2]; logic [2:0] cfg_x, cfg_y; cfg_region_e cfg_region; logic [7:0] cfg_addr;
  logic [255:0] cfg_data;
  logic tx_req [2][4], tx_ack [2][4], rx_req [2][4], rx_ack [2][4];
  logic [0:0] tx_data [2][4], rx_data [2][4];
  logic [63:0] core_busy [2], core_stall [2];

  for (genvar c = 0; c < 2; c++) begin : g_chip
    hnn_chip u_chip (.clk, .rst_n, .tick, .cfg_we(cfg_we[c]), .cfg_x, .cfg_y, .cfg_region, .cfg_addr,
                     .cfg_data, .tx_req(tx_req[c]), .tx_data(tx_data[c]), .tx_ack(tx_ack[c]),
                     .rx_req(rx_req[c]), .rx_data(rx_data[c]), .rx_ack(rx_ack[c]),
                     .core_busy(core_busy[c]), .core_stall(core_stall[c]));
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // chip 0 East <-> chip 1 West
  assign rx_req[1][3]  = tx_req[0][1];
  assign rx_data[1][3] = tx_data[0][1];
  assign tx_ack[0][1]  = rx_ack[1][3];
  assign rx_req[0][1]  = tx_req[1][3];
  assign rx_data[0][1] = tx_data[1][3];
  assign tx_ack[1][3]  = rx_ack[0][1];
  // the test drives chip 0's West input and reads chip 1's East output
  link_word_t w_word; logic w_valid, w_ready;
  emio_serializer u_src (.clk, .rst_n, .in_word(w_word), .in_valid(w_valid), .in_ready(w_ready),
                         .link_req(rx_req[0][3]), .link_data(rx_data[0][3]), .link_ack(rx_ack[0][3]));
  link_word_t e_word; logic e_valid;
  emio_deserializer u_snk (.clk, .rst_n, .link_req(tx_req[1][1]), .link_data(tx_data[1][1]),
                           .link_ack(tx_ack[1][1]), .out_word(e_word), .out_valid(e_valid), .out_ready(1'b1));
  for (genvar s = 0; s < 4; s++) begin : g_idle
    if (s != 1) begin : g_c0
      if (s != 3) begin : g_rx
        assign rx_req[0][s] = 1'b0; assign rx_data[0][s] = 1'b0;
      end
      assign tx_ack[0][s] = 1'b0;
    end
    if (s != 3) begin : g_c1
      if (s != 1) begin : g_rx
        assign rx_req[1][s] = 1'b0; assign rx_data[1][s] = 1'b0;
      end
      if (s != 1) begin : g_tx
        assign tx_ack[1][s] = 1'b0;
      end
    end
  end

  // words crossing between the chips, counted at the link handshake
  int n_fwd = 0, n_fwd_spike = 0, n_back = 0;
  always @(posedge clk) if (rst_n) begin
    if (tb_two_chips.g_chip[1].u_chip.g_side[3].u_emio.d_valid && tb_two_chips.g_chip[1].u_chip.g_side[3].u_emio.d_ready) begin
      n_fwd++;
      if (tb_two_chips.g_chip[1].u_chip.g_side[3].u_emio.d_word.pkt.ptype == PKT_SPIKE) n_fwd_spike++;
    end
    if (tb_two_chips.g_chip[0].u_chip.g_side[1].u_emio.d_valid && tb_two_chips.g_chip[0].u_chip.g_side[1].u_emio.d_ready) n_back++;
  end
  link_word_t got [$];
  always @(posedge clk) if (rst_n && e_valid) got.push_back(e_word);

  task automatic cfg(input int c, input int x, input int y, input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we[c] = 1; cfg_x = 3'(x); cfg_y = 3'(y); cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we[c] = 0;
  endtask

  // neuron k (k < 4) is driven by axon ax0+k with weight w and sends to axon
  // dax0+k at offset (dx, 0); every other neuron and synapse is cleared
  task automatic map4(input int c, input int x, input int y, input int ax0, input int w, input int thr,
                      input int dx, input int dax0, input int t_win, input int period, input bit en);
    neuron_cfg_t nc;
    for (int a = 0; a < 256; a++) begin
      cfg(c, x, y, CFG_XBAR, a, (a >= ax0 && a < ax0 + 4) ? (256'b1 << (a - ax0)) : 256'b0);
      cfg(c, x, y, CFG_ATYP, a, 256'(0));
    end
    for (int n = 0; n < 256; n++) begin
      nc = '0; nc.thresh = 8'sd127;
      if (n < 4) begin
        nc.weight[0] = 8'(w); nc.thresh = 8'(thr); nc.dest_en = 1'b1;
        nc.dest_dx = 9'(dx); nc.dest_dy = 9'sd0; nc.dest_axon = 8'(dax0 + n); nc.dest_tick = 4'd0;
      end
      cfg(c, x, y, CFG_NEUR, n, 256'(nc));
    end
    cfg(c, x, y, CFG_CTRL, 2, 256'(t_win));
    cfg(c, x, y, CFG_CTRL, 1, 256'(period));
    if (en) cfg(c, x, y, CFG_CTRL, 0, 256'(1));
  endtask

  task automatic do_tick();
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    repeat (900) @(negedge clk);
  endtask

  int a_in [4] = '{0, 40, 100, 255};
  int n_spk [4], a_out [4], exp_fwd;
  initial begin
    cfg_we = '{0, 0}; cfg_x = 0; cfg_y = 0; cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    w_valid = 0; w_word = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    //   chip x  y  ax0  w  thr  dx  dax0  T  period en
    map4(0,    6, 3, 0,  1,  0,  1,  10, 16, 1,  1);  // A(6,3): copy, to S(7,3)
    map4(0,    7, 3, 10, 50, 40, 1,  20, 16, 1,  1);  // S(7,3): to chip 1 S(0,3)
    map4(1,    0, 3, 20, 50, 40, 1,  30, 16, 1,  1);  // chip 1 S(0,3): to A(1,3)
    map4(1,    1, 3, 30, 1,  0,  7,  40, 16, 16, 0);  // chip 1 A(1,3): East out
    exp_fwd = 0;
    foreach (a_in[k]) begin
      n_spk[k] = a_in[k] / 16;
      a_out[k] = (255 * n_spk[k]) / 16;
      exp_fwd += n_spk[k];
    end

    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      w_word.tag = 3'd3;
      w_word.pkt = '{dx: 9'sd6, dy: 9'sd0, ptype: PKT_ACT, axon: 8'(k), payload: 8'(a_in[k])};
      w_valid = 1;
      @(posedge clk); while (!w_ready) @(posedge clk);
      @(negedge clk); w_valid = 0;
    end
    repeat (200) @(negedge clk);

    do_tick();   // 1: A(6,3) passes, S(7,3) schedules the trains
    do_tick();   // 2: first spikes cross to chip 1
    // open A(1,3)'s 16-tick window now: spikes reach it after ticks 3..17
    cfg(1, 1, 3, CFG_CTRL, 0, 256'(1));
    for (int t = 3; t <= 18; t++) do_tick();
    repeat (2000) @(negedge clk);

    check(n_fwd == exp_fwd, $sformatf("words chip 0 -> chip 1: %0d, expected %0d", n_fwd, exp_fwd));
    check(n_fwd_spike == n_fwd, "only spikes crossed the die boundary");
    check(n_back == 0, "nothing crossed back");
    check(got.size() == 4, $sformatf("activations out of chip 1: %0d, expected 4", got.size()));
    foreach (got[i]) begin
      int k;
      k = int'(got[i].pkt.axon) - 40;
      check(k >= 0 && k < 4 && got[i].pkt.ptype == PKT_ACT, $sformatf("output word %0d header", i));
      if (k >= 0 && k < 4)
        check(int'(got[i].pkt.payload) == a_out[k],
              $sformatf("activation %0d: %0d, expected %0d", k, got[i].pkt.payload, a_out[k]));
    end
    $display("spikes per activation %0d %0d %0d %0d; die-to-die words %0d", n_spk[0], n_spk[1], n_spk[2], n_spk[3], n_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
