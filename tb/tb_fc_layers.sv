// tb_fc_layers: two dense 256 x 256 layers on one chip at its default size.
//
// A pair of fully connected layers of 256 neurons is exactly what two cores
// hold. This test maps such a pair onto the artificial cores A(1,3) and
// A(2,3) with random crossbars (about half the synapses present), random axon
// types and random per-type weights. The 256 input activations arrive from
// the West neighbour chip over the serial link, pass through the spiking
// edge core S(0,3) as plain packets (dx = 1), and fill A(1,3)'s scheduler.
// One tick runs layer 1, whose 256 outputs land in A(2,3). The next tick
// runs layer 2, whose outputs travel East through S(7,3) and leave over the
// East serial link, tagged with core index 3. The test computes both layers
// itself (clamp(ReLU(sum >>> shift), 0, 255)) and compares all 256 outputs.
// On the first tick A(2,3) still has an empty row, so its first 256 outputs
// must all be zero; that is checked too. It also checks the pass length of
// layer 1 (AXONS + 1 = 257 cycles of busy before emission starts) and that
// the link carried one word per output.
module tb_fc_layers;
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
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // neighbour chips: West sends into our West input, East receives our East output
  link_word_t w_word; logic w_valid, w_ready;
  emio_serializer u_west (.clk, .rst_n, .in_word(w_word), .in_valid(w_valid), .in_ready(w_ready),
                          .link_req(rx_req[3]), .link_data(rx_data[3]), .link_ack(rx_ack[3]));
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

  link_word_t got [$];
  always @(posedge clk) if (rst_n && e_valid) got.push_back(e_word);

  task automatic cfg(input int x, input int y, input cfg_region_e r, input int a, input logic [255:0] d);
    @(negedge clk); cfg_we = 1; cfg_x = 3'(x); cfg_y = 3'(y); cfg_region = r; cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // random layer: crossbar, axon types, weights
  logic [255:0]    xbar [2][256];
  logic [1:0]      atyp [2][256];
  logic signed [7:0] wt [2][256][4];
  localparam int SHIFT = 8;

  task automatic map_layer(input int l, input int x, input int y, input int dx);
    neuron_cfg_t nc;
    for (int a = 0; a < 256; a++) begin
      for (int n = 0; n < 256; n++) xbar[l][a][n] = 1'($urandom_range(1));
      atyp[l][a] = 2'($urandom_range(3));
      cfg(x, y, CFG_XBAR, a, xbar[l][a]);
      cfg(x, y, CFG_ATYP, a, 256'(atyp[l][a]));
    end
    for (int n = 0; n < 256; n++) begin
      nc = '0;
      for (int t = 0; t < 4; t++) begin
        wt[l][n][t] = 8'($signed($urandom_range(11)) - 4);
        nc.weight[t] = wt[l][n][t];
      end
      nc.thresh = 8'sd127; nc.shift = 5'(SHIFT); nc.dest_en = 1'b1;
      nc.dest_dx = 9'(dx); nc.dest_dy = 9'sd0; nc.dest_axon = 8'(n); nc.dest_tick = 4'd0;
      cfg(x, y, CFG_NEUR, n, 256'(nc));
    end
    cfg(x, y, CFG_CTRL, 0, 256'(1));
  endtask

  // reference model of one layer
  function automatic void layer(input int l, input int in [256], output int out [256]);
    for (int n = 0; n < 256; n++) begin
      longint acc = 0, v;
      logic signed [7:0] w8;
      for (int a = 0; a < 256; a++)
        if (xbar[l][a][n]) begin
          w8 = wt[l][n][atyp[l][a]];
          acc += longint'(w8) * longint'(in[a]);
        end
      v = acc >>> SHIFT;
      out[n] = (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
    end
  endfunction

  int x_in [256], h [256], y_out [256];
  int n_pos, n_sat, pass_cycles;
  initial begin
    cfg_we = 0; cfg_x = 0; cfg_y = 0; cfg_region = CFG_XBAR; cfg_addr = 0; cfg_data = '0;
    w_valid = 0; w_word = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    map_layer(0, 1, 3, 1);   // A(1,3) -> A(2,3)
    map_layer(1, 2, 3, 6);   // A(2,3) -> East link through (7,3)
    foreach (x_in[a]) x_in[a] = $urandom_range(255);
    layer(0, x_in, h);
    layer(1, h, y_out);
    n_pos = 0; n_sat = 0;
    foreach (y_out[n]) begin
      if (y_out[n] > 0) n_pos++;
      if (y_out[n] == 255) n_sat++;
    end
    $display("expected outputs: %0d non-zero, %0d saturated", n_pos, n_sat);

    // inputs over the West link to our core 3, one hop East to A(1,3)
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      w_word.tag = 3'd3;
      w_word.pkt = '{dx: 9'sd1, dy: 9'sd0, ptype: PKT_ACT, axon: 8'(a), payload: 8'(x_in[a])};
      w_valid = 1;
      @(posedge clk); while (!w_ready) @(posedge clk);
      @(negedge clk); w_valid = 0;
    end
    repeat (100) @(negedge clk);

    // tick 1: layer 1 runs; A(2,3) runs on an empty row
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    pass_cycles = 0;
    while (dut.g_x[1].g_y[3].g_ann.u_core.u_ctrl.out_valid !== 1'b1) begin
      @(negedge clk); pass_cycles++;
    end
    check(pass_cycles >= 257 && pass_cycles <= 262,
          $sformatf("layer 1 pass %0d cycles, expected 257..262", pass_cycles));
    while (got.size() < 256) @(negedge clk);
    repeat (200) @(negedge clk);
    check(got.size() == 256, $sformatf("%0d words after tick 1", got.size()));
    foreach (got[i])
      check(got[i].tag == 3'd3 && got[i].pkt.ptype == PKT_ACT && got[i].pkt.payload == 8'd0,
            $sformatf("empty-row output %0d not zero", i));
    got.delete();

    // tick 2: layer 2 runs on layer 1's outputs
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    while (got.size() < 256) @(negedge clk);
    repeat (200) @(negedge clk);
    check(got.size() == 256, $sformatf("%0d words after tick 2", got.size()));
    begin
      bit seen [256];
      foreach (got[i]) begin
        int n;
        n = int'(got[i].pkt.axon);
        check(!seen[n], $sformatf("output %0d received twice", n));
        seen[n] = 1'b1;
        check(got[i].tag == 3'd3 && got[i].pkt.ptype == PKT_ACT && got[i].pkt.dx == 9'sd0 && got[i].pkt.dy == 9'sd0,
              $sformatf("output %0d header", n));
        check(int'(got[i].pkt.payload) == y_out[n],
              $sformatf("output %0d = %0d, expected %0d", n, got[i].pkt.payload, y_out[n]));
      end
    end
    check(n_pos > 0 && n_pos < 256, "random layer gives both zero and non-zero outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
