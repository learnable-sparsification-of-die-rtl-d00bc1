// core_controller: control path of one core tile (spiking or artificial,
// selected by IS_SNN).
//
// It does three things.
// 1. Input: every word from the cross-layer converter is accepted in one
//    cycle. In a spiking core a spike is written into the scheduler row of its
//    delivery tick, and an activation sum is written back as the axon's input
//    potential and rate coded: the axon's train is floor(sum/T) spikes, one
//    per tick from the next tick on (eq. 2 of the paper); when an axon
//    receives several activations in one window, only the spikes that the
//    new sum adds to the train are scheduled. In an artificial core the word, an
//    activation or an updated spike count, is written into the scheduler.
// 2. Pass: on a tick (one pass every pass_period ticks) it sweeps the axons
//    through the processing element, one axon per cycle, reading each axon's
//    crossbar row from the core SRAM. A spiking core pops the tick's row of
//    the scheduler and visits only the axons that spiked (zero skipping). An
//    artificial core visits all AXONS axons (no zero skipping), converting a
//    stored spike count to an activation with floor(255*S/T) (eq. 3). Then it
//    pulses step so the neurons update.
// 3. Output: it sends one packet per output neuron to the router's local
//    input, built from the neuron's destination fields: a spike with its
//    delivery tick for each neuron that fired (spiking core), or the 8-bit
//    activation of every enabled neuron (artificial core).
// A tick that arrives while a pass is running is held (up to 15 pending) and
// counted as a stall. Every T ticks the spiking core clears the axon input
// potentials, closing the rate-coding window. Control registers (written
// through the configuration port, region CFG_CTRL): 0 enable, 1 pass period,
// 2 window T. The paper names the controller and says it is programmable per
// layer type; the sequencing above is this design's.
// Some outputs are plain wires or constants by construction: the scheduler
// and potential-store addresses are the converter's axon, and in a spiking
// instance the artificial-scheduler controls are tied off (and the reverse);
// cv_ready is always high because every input word takes one cycle.
// Timing: a spiking pass takes (active axons + 1) cycles, an artificial pass
// AXONS + 1 cycles, then one cycle per packet sent.
module core_controller
  import hnn_pkg::*;
#(
  parameter bit          IS_SNN  = 1'b1,
  parameter int unsigned AXONS   = 256,
  parameter int unsigned NEURONS = 256,
  parameter int unsigned DEPTH   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     tick,
  // configuration
  input  logic                     cfg_we,
  input  cfg_region_e              cfg_region,
  input  logic [7:0]               cfg_addr,
  input  logic [7:0]               cfg_data,
  output logic [4:0]               t_win,
  // from the converter
  input  logic                     cv_valid,
  output logic                     cv_ready,
  input  pkt_type_e                cv_type,
  input  logic                     cv_is_count,
  input  logic [$clog2(AXONS)-1:0] cv_axon,
  input  logic [7:0]               cv_value,
  input  logic [7:0]               cv_v_old,    // spiking: potential before this word
  // spiking-core scheduler and potential store
  output logic                     ss_set_valid,
  output logic [$clog2(AXONS)-1:0] ss_set_axon,
  output logic [DEPTH-1:0]         ss_set_mask,
  output logic                     ss_pop,
  input  logic [AXONS-1:0]         ss_pop_row,
  output logic                     v_we,
  output logic [$clog2(AXONS)-1:0] v_waddr,
  output logic [7:0]               v_wdata,
  output logic                     v_clear,
  // artificial-core scheduler
  output logic                     as_we,
  output logic [7:0]               as_wdata,
  output logic                     as_wcount,
  output logic                     as_advance,
  output logic [$clog2(AXONS)-1:0] as_b_axon,
  output logic                     as_b_clear,
  input  logic [7:0]               as_b_rdata,
  input  logic                     as_b_rcount,
  // processing element
  output logic [$clog2(AXONS)-1:0] pe_axon,
  output logic                     pe_acc_en,
  output logic [7:0]               pe_act,
  output logic                     pe_step,
  input  logic [NEURONS-1:0]       emit_mask,
  input  logic [7:0]               emit_payload [NEURONS],
  input  neuron_cfg_t              ncfg [NEURONS],
  // to the router local input
  output packet_t                  out_pkt,
  output logic                     out_valid,
  input  logic                     out_ready,
  // status
  output logic                     busy,
  output logic                     stall
);
  localparam int unsigned AW = $clog2(AXONS);
  localparam int unsigned NW = $clog2(NEURONS);

  typedef enum logic [2:0] {S_IDLE, S_START, S_PASS, S_STEP, S_SETTLE, S_EMIT} state_e;
  state_e state;

  logic             enable;
  logic [4:0]       pass_period;
  logic [4:0]       pcount, wcount;
  logic [3:0]       pending;
  logic [AXONS-1:0] active;
  logic [AW-1:0]    axon_ptr;
  logic [NEURONS-1:0] sent;

  // ---------------- configuration registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable <= 1'b0; pass_period <= 5'd1; t_win <= 5'd16;
    end else if (cfg_we && cfg_region == CFG_CTRL) begin
      case (cfg_addr)
        8'd0: enable      <= cfg_data[0];
        8'd1: pass_period <= (cfg_data[4:0] == 0) ? 5'd1 : cfg_data[4:0];
        8'd2: t_win       <= (cfg_data[4:0] == 0 || cfg_data[4:0] > 5'd16) ? 5'd16 : cfg_data[4:0];
        default: ;
      endcase
    end
  end

  // ---------------- input path ----------------
  logic [7:0]  n_spk;
  assign cv_ready = 1'b1;
  // only the spikes the new sum adds to the train already scheduled
  assign n_spk    = rate_count(cv_value, t_win) - rate_count(cv_v_old, t_win);

  always_comb begin
    ss_set_valid = 1'b0;
    ss_set_axon  = cv_axon;
    ss_set_mask  = '0;
    v_we         = 1'b0;
    v_waddr      = cv_axon;
    v_wdata      = cv_value;
    as_we        = 1'b0;
    as_wdata     = cv_value;
    as_wcount    = cv_is_count;
    if (cv_valid) begin
      if (IS_SNN) begin
        if (cv_type == PKT_SPIKE) begin
          ss_set_valid = 1'b1;
          ss_set_mask  = DEPTH'(1) << cv_value[TICK_W-1:0];
        end else begin
          v_we         = 1'b1;
          ss_set_valid = (n_spk != 0);
          for (int r = 0; r < DEPTH; r++) ss_set_mask[r] = (r < int'(n_spk));
        end
      end else begin
        as_we = 1'b1;
      end
    end
  end

  // ---------------- tick bookkeeping ----------------
  logic pass_go, tick_taken;
  assign pass_go    = (state == S_IDLE) && enable && (pending != 0);
  assign tick_taken = tick && enable;
  assign stall      = tick_taken && (state != S_IDLE);
  assign busy       = (state != S_IDLE);
  assign v_clear    = IS_SNN && tick_taken && (wcount == t_win - 5'd1);

  // lowest set bit of the active-axon vector (zero skipping)
  logic          act_any;
  logic [AW-1:0] act_idx;
  always_comb begin
    act_any = 1'b0; act_idx = '0;
    for (int a = AXONS-1; a >= 0; a--)
      if (active[a]) begin act_any = 1'b1; act_idx = AW'(a); end
  end

  // lowest neuron still to be sent
  logic          em_any;
  logic [NW-1:0] em_idx;
  always_comb begin
    em_any = 1'b0; em_idx = '0;
    for (int n = NEURONS-1; n >= 0; n--)
      if (emit_mask[n] && ncfg[n].dest_en && !sent[n]) begin em_any = 1'b1; em_idx = NW'(n); end
  end

  // ---------------- pass sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pending <= '0; pcount <= '0; wcount <= '0;
      active <= '0; axon_ptr <= '0; sent <= '0;
    end else begin
      // tick counting: a pass is due every pass_period ticks
      if (tick_taken) begin
        wcount <= (wcount >= t_win - 5'd1) ? 5'd0 : wcount + 5'd1;
        if (pcount >= pass_period - 5'd1) pcount <= '0;
        else                              pcount <= pcount + 5'd1;
      end
      if ((tick_taken && pcount >= pass_period - 5'd1) && !pass_go) begin
        if (pending != 4'hF) pending <= pending + 4'd1;
      end else if (!(tick_taken && pcount >= pass_period - 5'd1) && pass_go) begin
        pending <= pending - 4'd1;
      end

      case (state)
        S_IDLE: if (pass_go) state <= S_START;
        S_START: begin
          if (IS_SNN) active <= ss_pop_row;
          axon_ptr <= '0;
          state    <= S_PASS;
        end
        S_PASS: begin
          if (IS_SNN) begin
            if (act_any) active[act_idx] <= 1'b0;
            else         state <= S_STEP;
          end else begin
            axon_ptr <= axon_ptr + 1'b1;
            if (axon_ptr == AW'(AXONS-1)) state <= S_STEP;
          end
        end
        S_STEP:   state <= S_SETTLE;
        S_SETTLE: begin sent <= '0; state <= S_EMIT; end
        S_EMIT: begin
          if (!em_any) state <= S_IDLE;
          else if (out_ready) sent[em_idx] <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ss_pop     = IS_SNN && (state == S_START);
  assign as_advance = !IS_SNN && (state == S_START);
  assign pe_axon    = IS_SNN ? act_idx : axon_ptr;
  assign pe_acc_en  = (state == S_PASS) && (IS_SNN ? act_any : 1'b1);
  assign pe_step    = (state == S_STEP);
  assign as_b_axon  = axon_ptr;
  assign as_b_clear = !IS_SNN && (state == S_PASS);
  assign pe_act     = as_b_rcount ? spike_to_act(as_b_rdata, t_win) : as_b_rdata;

  // ---------------- output packets ----------------
  always_comb begin
    out_valid       = (state == S_EMIT) && em_any;
    out_pkt.dx      = ncfg[em_idx].dest_dx;
    out_pkt.dy      = ncfg[em_idx].dest_dy;
    out_pkt.axon    = ncfg[em_idx].dest_axon;
    if (IS_SNN) begin
      out_pkt.ptype   = PKT_SPIKE;
      out_pkt.payload = {4'b0, ncfg[em_idx].dest_tick};
    end else begin
      out_pkt.ptype   = PKT_ACT;
      out_pkt.payload = emit_payload[em_idx];
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_pkt));
endmodule
