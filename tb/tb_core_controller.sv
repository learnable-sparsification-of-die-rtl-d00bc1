// tb_core_controller: self-checking test of the core controller, once as a
// spiking-core controller (with a spiking scheduler) and once as an
// artificial-core controller (with an artificial scheduler), both with 16
// axons and 8 neurons.
// Spiking: a delayed spike and a rate-coded activation are written; the
// scheduler writes are checked; ticks then must visit exactly the active
// axons of each tick in ascending order (zero skipping), pulse step once,
// and emit one spike packet per firing neuron with its destination. A tick
// during a pass must be flagged as a stall and still be served.
// Artificial: activations and spike counts are written; the pass must visit
// all 16 axons in order, one per cycle, presenting the activation, or
// floor(255*S/T) for a count.
module tb_core_controller;
  import hnn_pkg::*;
  localparam int A = 16, N = 8, D = 16;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- shared stimulus ----------------
  logic tick, cfg_we; cfg_region_e cfg_region; logic [7:0] cfg_addr, cfg_data;
  logic cv_valid; pkt_type_e cv_type; logic cv_is_count; logic [3:0] cv_axon; logic [7:0] cv_value;
  logic [N-1:0] emit_mask; logic [7:0] emit_payload [N]; neuron_cfg_t ncfg [N];

  // ---------------- spiking instance ----------------
  logic s_cv_ready, s_set_valid, s_pop, s_v_we, s_v_clear, s_as_we, s_as_wcount, s_as_adv, s_as_bclr;
  logic [3:0] s_set_axon, s_v_waddr, s_as_baxon, s_pe_axon; logic [D-1:0] s_set_mask; logic [A-1:0] s_pop_row;
  logic [7:0] s_v_wdata, s_as_wdata, s_pe_act; logic s_pe_acc, s_pe_step, s_busy, s_stall, s_out_valid;
  logic [4:0] s_twin; packet_t s_out_pkt; logic [3:0] s_cur;

  core_controller #(.IS_SNN(1'b1), .AXONS(A), .NEURONS(N), .DEPTH(D)) u_s (
    .clk, .rst_n, .tick, .cfg_we, .cfg_region, .cfg_addr, .cfg_data, .t_win(s_twin),
    .cv_valid, .cv_ready(s_cv_ready), .cv_type, .cv_is_count, .cv_axon, .cv_value, .cv_v_old(8'd0),
    .ss_set_valid(s_set_valid), .ss_set_axon(s_set_axon), .ss_set_mask(s_set_mask),
    .ss_pop(s_pop), .ss_pop_row(s_pop_row),
    .v_we(s_v_we), .v_waddr(s_v_waddr), .v_wdata(s_v_wdata), .v_clear(s_v_clear),
    .as_we(s_as_we), .as_wdata(s_as_wdata), .as_wcount(s_as_wcount), .as_advance(s_as_adv),
    .as_b_axon(s_as_baxon), .as_b_clear(s_as_bclr), .as_b_rdata(8'd0), .as_b_rcount(1'b0),
    .pe_axon(s_pe_axon), .pe_acc_en(s_pe_acc), .pe_act(s_pe_act), .pe_step(s_pe_step),
    .emit_mask, .emit_payload, .ncfg,
    .out_pkt(s_out_pkt), .out_valid(s_out_valid), .out_ready(1'b1), .busy(s_busy), .stall(s_stall));
  snn_scheduler #(.DEPTH(D), .AXONS(A)) u_ss (
    .clk, .rst_n, .set_valid(s_set_valid), .set_axon(s_set_axon), .set_mask(s_set_mask),
    .pop(s_pop), .pop_row(s_pop_row), .cur(s_cur));

  // ---------------- artificial instance ----------------
  logic a_cv_ready, a_set_valid, a_pop, a_v_we, a_v_clear, a_as_we, a_as_wcount, a_as_adv, a_as_bclr;
  logic [3:0] a_set_axon, a_v_waddr, a_as_baxon, a_pe_axon; logic [D-1:0] a_set_mask;
  logic [7:0] a_v_wdata, a_as_wdata, a_pe_act, a_brd, a_ard; logic a_brc;
  logic a_pe_acc, a_pe_step, a_busy, a_stall, a_out_valid; logic [4:0] a_twin; packet_t a_out_pkt;

  core_controller #(.IS_SNN(1'b0), .AXONS(A), .NEURONS(N), .DEPTH(D)) u_a (
    .clk, .rst_n, .tick, .cfg_we, .cfg_region, .cfg_addr, .cfg_data, .t_win(a_twin),
    .cv_valid, .cv_ready(a_cv_ready), .cv_type, .cv_is_count, .cv_axon, .cv_value, .cv_v_old(8'd0),
    .ss_set_valid(a_set_valid), .ss_set_axon(a_set_axon), .ss_set_mask(a_set_mask),
    .ss_pop(a_pop), .ss_pop_row('0),
    .v_we(a_v_we), .v_waddr(a_v_waddr), .v_wdata(a_v_wdata), .v_clear(a_v_clear),
    .as_we(a_as_we), .as_wdata(a_as_wdata), .as_wcount(a_as_wcount), .as_advance(a_as_adv),
    .as_b_axon(a_as_baxon), .as_b_clear(a_as_bclr), .as_b_rdata(a_brd), .as_b_rcount(a_brc),
    .pe_axon(a_pe_axon), .pe_acc_en(a_pe_acc), .pe_act(a_pe_act), .pe_step(a_pe_step),
    .emit_mask('1), .emit_payload, .ncfg,
    .out_pkt(a_out_pkt), .out_valid(a_out_valid), .out_ready(1'b1), .busy(a_busy), .stall(a_stall));
  ann_scheduler #(.DEPTH(D), .AXONS(A)) u_as (
    .clk, .rst_n, .a_axon(cv_axon), .a_rdata(a_ard), .a_we(a_as_we), .a_wdata(a_as_wdata),
    .a_wcount(a_as_wcount), .advance(a_as_adv), .b_axon(a_as_baxon), .b_clear(a_as_bclr),
    .b_rdata(a_brd), .b_rcount(a_brc));

  // ---------------- monitors ----------------
  int s_visits [$], a_visits [$], a_acts [$], s_steps = 0, a_steps = 0;
  packet_t s_pkts [$], a_pkts [$];
  always @(posedge clk) if (rst_n) begin
    if (s_pe_acc) s_visits.push_back(int'(s_pe_axon));
    if (a_pe_acc) begin a_visits.push_back(int'(a_pe_axon)); a_acts.push_back(int'(a_pe_act)); end
    if (s_pe_step) s_steps++;
    if (a_pe_step) a_steps++;
    if (s_out_valid) s_pkts.push_back(s_out_pkt);
    if (a_out_valid) a_pkts.push_back(a_out_pkt);
    if (s_stall) stalls++;
  end

  task automatic cfg(input int addr, input int data);
    @(negedge clk); cfg_we = 1; cfg_region = CFG_CTRL; cfg_addr = 8'(addr); cfg_data = 8'(data);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic word(input pkt_type_e t, input bit cnt, input int ax, input int v);
    @(negedge clk); cv_valid = 1; cv_type = t; cv_is_count = cnt; cv_axon = 4'(ax); cv_value = 8'(v);
    #1;
    check(s_cv_ready && a_cv_ready, "converter word accepted");
    if (t == PKT_SPIKE)
      check(s_set_valid && s_set_axon == 4'(ax) && s_set_mask == D'(1) << (v % 16), "spike scheduled at its tick");
    else begin
      bit [D-1:0] m; m = '0;
      for (int r = 0; r < v / 16 && r < D; r++) m[r] = 1'b1;
      check(s_v_we && s_v_wdata == 8'(v) && s_set_mask == m && s_set_valid == (v >= 16), "activation rate coded");
    end
    check(a_as_we && a_as_wdata == 8'(v) && a_as_wcount == cnt, "artificial scheduler write");
    @(negedge clk); cv_valid = 0;
  endtask
  task automatic do_tick();
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
  endtask

  initial begin
    tick = 0; cfg_we = 0; cfg_region = CFG_CTRL; cfg_addr = 0; cfg_data = 0;
    cv_valid = 0; cv_type = PKT_ACT; cv_is_count = 0; cv_axon = 0; cv_value = 0;
    emit_mask = 8'b0100_0010;
    for (int n = 0; n < N; n++) begin
      ncfg[n] = '0; ncfg[n].dest_en = 1; ncfg[n].dest_dx = 9'(n); ncfg[n].dest_dy = -9'sd1;
      ncfg[n].dest_axon = 8'(10 + n); ncfg[n].dest_tick = 4'(n % 3); emit_payload[n] = 8'(7 * n);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    cfg(0, 1); cfg(2, 16);
    // spike for axon 3 at tick 0, axon 9 at tick 1, activation 70 (4 spikes) for axon 5
    word(PKT_SPIKE, 0, 3, 0);
    word(PKT_SPIKE, 0, 9, 1);
    word(PKT_ACT, 0, 5, 70);
    // artificial side: counts for axons 2 (S=4) and activation for axon 7
    word(PKT_ACT, 1, 2, 4);
    word(PKT_ACT, 0, 7, 200);
        // (both controllers see every word: axon 7's 200 is 12 spikes on the
    // spiking side, axon 2's 4 is none)
    do_tick();
    repeat (40) @(negedge clk);
    do_tick();
    repeat (60) @(negedge clk);
    check(stalls == 0, "spiking core idle at the second tick");
    check(s_visits.size() == 6, $sformatf("spiking visits %0d", s_visits.size()));
    if (s_visits.size() == 6)
      check(s_visits[0] == 3 && s_visits[1] == 5 && s_visits[2] == 7 &&
            s_visits[3] == 5 && s_visits[4] == 7 && s_visits[5] == 9, "spiking visit order (3,5,7 then 5,7,9)");
    check(s_steps == 2, "one step per tick");
    check(s_pkts.size() == 4, $sformatf("spike packets %0d", s_pkts.size()));
    foreach (s_pkts[i]) begin
      int n; n = (i % 2 == 0) ? 1 : 6;
      check(s_pkts[i].ptype == PKT_SPIKE && s_pkts[i].dx == 9'(n) && s_pkts[i].dy == -9'sd1 &&
            s_pkts[i].axon == 8'(10 + n) && s_pkts[i].payload == 8'(n % 3), $sformatf("spike packet %0d", i));
    end
    // artificial pass: 16 axons in order, two passes
    check(a_visits.size() == 2 * A, $sformatf("artificial visits %0d", a_visits.size()));
    for (int i = 0; i < A && i < a_visits.size(); i++) begin
      int e;
      case (i)
        2: e = (255 * 4) / 16;  // count S=4 over T=16
        5: e = 70;
        7: e = 200;
        9: e = 1;
        default: e = 0;
      endcase
      check(a_visits[i] == i && a_acts[i] == e, $sformatf("artificial axon %0d act %0d exp %0d", i, a_acts[i], e));
    end
    check(a_pkts.size() == 2 * N, "one activation packet per enabled neuron per pass");
    check(a_pkts.size() > 0 && a_pkts[3].payload == 8'(21) && a_pkts[3].ptype == PKT_ACT, "activation payload");
    // stall: a tick during a running spiking pass
    word(PKT_SPIKE, 0, 1, 0); word(PKT_SPIKE, 0, 2, 0);
    s_steps = 0;
    @(negedge clk); tick = 1; @(negedge clk); tick = 0; @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    repeat (80) @(negedge clk);
    check(stalls > 0, "tick during a pass flagged as stall");
    check(s_steps == 2, "stalled tick still served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
