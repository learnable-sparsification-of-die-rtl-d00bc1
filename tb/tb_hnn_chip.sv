// tb_hnn_chip: end-to-end test of one chip at its default size (8 x 8 mesh,
// 256 axons and 256 neurons per core), with the neighbouring chips played by
// a link serializer on the West input and a link deserializer on the East
// output.
//
// A small hybrid network is mapped along row y = 3:
//   West link -> S(0,3) -> A(1,3) -> A(2,3) -> A(3,3) -> A(4,4) -> A(6,3)
//   -> S(7,3) -> East link
// S = spiking edge core, A = artificial interior core. One spike enters from
// the West neighbour and fires S(0,3). A(1,3) counts the spike over a window
// of T = 4 ticks and converts it to floor(255*1/4) = 63. The artificial cores
// scale it (x3 >> 2, x1, x2, x1), the hop (3,3) -> (4,4) turns North and
// (4,4) -> (6,3) turns South. S(7,3) rate codes the activation into
// floor(a/16) spikes, each firing one neuron whose spike leaves through the
// East EMIO. The expected number of spikes is computed here from the
// arithmetic above. One pair of ticks is issued close together to force a
// stall. Every mechanism exercised is counted, and one that never happens
// counts as a failure.
module tb_hnn_chip;
  import hnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we; logic [2:0] cfg_x, cfg_y; cfg_region_e cfg_region; logic [7:0] cfg_addr;
  logic [255:0] cfg_data;
  logic tx_req [4], tx_ack [4], rx_req [4], rx_ack [4];
  logic [0:0] tx_data [4], rx_data [4];
  logic [63:0] core_busy, core_stall;

  hnn_chip dut (.*);
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

  // neighbour chip West: sends into our West input link
  link_word_t w_word; logic w_valid, w_ready;
  emio_serializer u_west (.clk, .rst_n, .in_word(w_word), .in_valid(w_valid), .in_ready(w_ready),
                          .link_req(rx_req[3]), .link_data(rx_data[3]), .link_ack(rx_ack[3]));
  // neighbour chip East: receives our East output link
  link_word_t e_word; logic e_valid;
  emio_deserializer u_east (.clk, .rst_n, .link_req(tx_req[1]), .link_data(tx_data[1]),
                            .link_ack(tx_ack[1]), .out_word(e_word), .out_valid(e_valid), .out_ready(1'b1));
  for (genvar s = 0; s < 4; s++) begin : g_idle
    if (s != 3) begin : g_rx
      assign rx_req[s] = 1'b0; assign rx_data[s] = 1'b0;
    end
    if (s != 1) begin : g_tx
      assign tx_ack[s] = 1'b0;
    end
  end

  // mechanism counters
  int n_d2d_in = 0, n_d2d_out = 0, n_stall = 0, n_s2a_count = 0, n_a2s_train = 0;
  int n_turn = 0, n_zero_skip = 0;
  link_word_t got [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.g_side[3].u_emio.d_valid && dut.g_side[3].u_emio.d_ready) n_d2d_in++;
    if (e_valid) got.push_back(e_word);
    if (dut.g_side[1].u_emio.m_valid && dut.g_side[1].u_emio.m_ready) n_d2d_out++;
    n_stall += $countones(core_stall);
    if (dut.g_x[1].g_y[3].g_ann.u_core.cv_valid && dut.g_x[1].g_y[3].g_ann.u_core.cv_is_count) n_s2a_count++;
    if (dut.g_x[7].g_y[3].g_snn.u_core.ss_set_valid && dut.g_x[7].g_y[3].g_snn.u_core.cv_type == PKT_ACT) n_a2s_train++;
    // a packet entering (4,4) from the South, i.e. it turned North at (4,3)
    if (dut.g_x[4].g_y[4].g_ann.u_core.nb_in_valid[2] && dut.g_x[4].g_y[4].g_ann.u_core.nb_in_ready[2]) n_turn++;
    if (dut.g_x[0].g_y[3].g_snn.u_core.pe_step) n_zero_skip++;
  end

  task automatic cfg(input int x, input int y, input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we = 1; cfg_x = 3'(x); cfg_y = 3'(y); cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // one neuron 0 driven by axon ax with weight w; other neurons silent
  task automatic map_core(input int x, input int y, input int ax, input int w, input int thr,
                          input int shift, input int dx, input int dy, input int dax,
                          input int t_win, input int period);
    neuron_cfg_t nc;
    cfg(x, y, CFG_XBAR, ax, 256'b1);
    cfg(x, y, CFG_ATYP, ax, 256'(0));
    for (int n = 0; n < 256; n++) begin
      nc = '0; nc.thresh = 8'sd127;
      if (n == 0) begin
        nc.weight[0] = 8'(w); nc.thresh = 8'(thr); nc.shift = 5'(shift); nc.dest_en = 1;
        nc.dest_dx = 9'(dx); nc.dest_dy = 9'(dy); nc.dest_axon = 8'(dax); nc.dest_tick = 4'd0;
      end
      cfg(x, y, CFG_NEUR, n, 256'(nc));
    end
    // every other axon of an artificial core is visited with activation 0;
    // clear its crossbar row so only the mapped synapse exists
    for (int a = 0; a < 256; a++) if (a != ax) cfg(x, y, CFG_XBAR, a, 256'b0);
    cfg(x, y, CFG_CTRL, 2, 256'(t_win));
    cfg(x, y, CFG_CTRL, 1, 256'(period));
    cfg(x, y, CFG_CTRL, 0, 256'(1));
  endtask

  int a1, a2, a3, a4, a6, exp_spikes;
  initial begin
    cfg_we = 0; cfg_x = 0; cfg_y = 0; cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    w_valid = 0; w_word = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    //        x  y  ax  w  thr sh  dx  dy dax  T  period
    map_core(0, 3, 4, 50, 40, 0,  1,  0, 2, 16, 1);   // S(0,3)
    map_core(1, 3, 2,  1,  0, 0,  1,  0, 5,  4, 4);   // A(1,3): window 4
    map_core(2, 3, 5,  3,  0, 2,  1,  0, 6, 16, 1);   // A(2,3)
    map_core(3, 3, 6,  1,  0, 0,  1,  1, 7, 16, 1);   // A(3,3) -> (4,4)
    map_core(4, 4, 7,  2,  0, 0,  2, -1, 8, 16, 1);   // A(4,4) -> (6,3)
    map_core(6, 3, 8,  1,  0, 0,  1,  0, 9, 16, 1);   // A(6,3)
    map_core(7, 3, 9, 50, 40, 0,  1,  0, 99, 16, 1);  // S(7,3) -> East link
    // expected activations along the chain
    a1 = (255 * 1) / 4;      // one spike counted over T = 4
    a2 = (a1 * 3) >> 2;
    a3 = a2;
    a4 = a3 * 2;
    a6 = a4;
    exp_spikes = a6 / 16;
    $display("expected chain %0d %0d %0d %0d -> %0d spikes", a1, a2, a4, a6, exp_spikes);

    // the West neighbour sends one spike to its core 3 -> our core (0,3)
    @(negedge clk);
    w_word.tag = 3'd3;
    w_word.pkt = '{dx: 9'sd0, dy: 9'sd0, ptype: PKT_SPIKE, axon: 8'd4, payload: 8'd0};
    w_valid = 1;
    @(posedge clk); while (!w_ready) @(posedge clk);
    @(negedge clk); w_valid = 0;
    repeat (80) @(negedge clk);

    for (int t = 0; t < 30; t++) begin
      @(negedge clk); tick = 1; @(negedge clk); tick = 0;
      if (t == 6) begin
        repeat (20) @(negedge clk);
        @(negedge clk); tick = 1; @(negedge clk); tick = 0;   // early tick: stall
      end
      repeat (400) @(negedge clk);
    end

    check(got.size() == exp_spikes, $sformatf("spikes out of the East link: %0d, expected %0d", got.size(), exp_spikes));
    foreach (got[i])
      check(got[i].tag == 3'd3 && got[i].pkt.ptype == PKT_SPIKE && got[i].pkt.dx == 9'sd0 &&
            got[i].pkt.dy == 9'sd0 && got[i].pkt.axon == 8'd99, $sformatf("East link word %0d", i));
    $display("die-to-die in %0d, out %0d, stalls %0d, spike counts %0d, rate-coded trains %0d, Y turns %0d",
             n_d2d_in, n_d2d_out, n_stall, n_s2a_count, n_a2s_train, n_turn);
    check(n_d2d_in > 0, "die-to-die input used");
    check(n_d2d_out > 0, "die-to-die output used");
    check(n_stall > 0, "stall happened");
    check(n_s2a_count > 0, "spike-to-activation counting happened");
    check(n_a2s_train > 0, "activation-to-spike rate coding happened");
    check(n_turn > 0, "X-to-Y turn happened");
    check(n_zero_skip > 0, "spiking passes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
