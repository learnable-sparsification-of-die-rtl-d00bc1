// neuron_block: processing element of a spiking core, NEURONS leaky
// integrate-and-fire neurons updated in parallel.
//
// Weight-stationary: during a tick's pass the controller presents one active
// axon per cycle (acc_en) with its crossbar row and 2-bit axon type; every
// neuron connected to that axon adds its weight for that type to its input
// current I. When the pass ends, step applies the discrete LIF update of the
// paper, U <- beta*U + (1-beta)*I, with beta = 1 - 2^-k chosen per neuron
// (k = leak_k; the update is computed as U + (I - U) >>> k), and a neuron fires
// when U >= threshold. A firing neuron is reset to 0 and I is cleared for the
// next tick. Potentials are 8-bit signed as in the paper's core table, with
// saturation; the power-of-two leak, reset-to-zero and saturation are this
// design's choices.
// Timing: one axon per cycle; fired is valid from the cycle after step until
// the next step.
module neuron_block
  import hnn_pkg::*;
#(
  parameter int unsigned NEURONS = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  neuron_cfg_t        ncfg [NEURONS],
  input  logic               acc_en,
  input  logic [NEURONS-1:0] acc_row,
  input  logic [1:0]         acc_type,
  input  logic               step,
  output logic [NEURONS-1:0] fired,
  output logic signed [7:0]  potential [NEURONS]
);
  logic signed [17:0] cur_i [NEURONS];

  function automatic logic signed [7:0] sat8(input logic signed [19:0] v);
    if (v > 20'sd127)  return 8'sd127;
    if (v < -20'sd128) return -8'sd128;
    return v[7:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NEURONS; n++) begin
        cur_i[n] <= '0; potential[n] <= '0; fired[n] <= 1'b0;
      end
    end else begin
      for (int n = 0; n < NEURONS; n++) begin
        logic signed [7:0] w8;
        w8 = ncfg[n].weight[acc_type];
        if (step) begin
          logic signed [19:0] d, u;
          logic signed [7:0]  un;
          d  = 20'(cur_i[n]) - 20'(potential[n]);
          u  = 20'(potential[n]) + (d >>> ncfg[n].leak_k);
          un = sat8(u);
          fired[n]     <= (un >= ncfg[n].thresh);
          potential[n] <= (un >= ncfg[n].thresh) ? 8'sd0 : un;
          cur_i[n]     <= '0;
        end else if (acc_en && acc_row[n]) begin
          cur_i[n] <= cur_i[n] + 18'(w8);
        end
      end
    end
  end
endmodule
