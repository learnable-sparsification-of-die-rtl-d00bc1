// mac_block: processing element of an artificial core, NEURONS 8b x 8b
// multiply-accumulate lanes with 32-bit accumulators.
//
// Weight-stationary: during a pass the controller presents one axon per
// cycle (acc_en) with its crossbar row, 2-bit axon type and 8-bit unsigned
// activation; every connected neuron adds weight x activation to its
// accumulator (signed 8-bit weight, unsigned 8-bit activation, 32-bit signed
// accumulator). When the pass ends, step produces each neuron's 8-bit output
// activation: ReLU of the accumulator shifted right by the neuron's shift,
// clipped to 255, and clears the accumulators. The paper gives the 8b x 8b
// MAC and 32-bit accumulators but also calls the ANN weights 32-bit; this
// design follows the 8b x 8b MAC. ReLU and the shift requantisation are this
// design's choices.
// Timing: one axon (NEURONS MACs) per cycle; act_out is valid from the cycle
// after step until the next step.
module mac_block
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
  input  logic [7:0]         acc_act,
  input  logic               step,
  output logic [7:0]         act_out [NEURONS]
);
  logic signed [31:0] acc [NEURONS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NEURONS; n++) begin
        acc[n] <= '0; act_out[n] <= '0;
      end
    end else begin
      for (int n = 0; n < NEURONS; n++) begin
        logic signed [7:0]  w8;
        logic signed [31:0] w, a;
        w8 = ncfg[n].weight[acc_type];
        w  = 32'(w8);
        a  = 32'({1'b0, acc_act});
        if (step) begin
          logic signed [31:0] q;
          q = acc[n] >>> ncfg[n].shift;
          act_out[n] <= (q < 0) ? 8'd0 : (q > 32'sd255) ? 8'd255 : q[7:0];
          acc[n]     <= '0;
        end else if (acc_en && acc_row[n]) begin
          acc[n] <= acc[n] + w * a;
        end
      end
    end
  end
endmodule
