// pe_crossbar -- behavioural model of the Domino PE, a ReRAM compute-in-
// memory array. It is not synthesizable hardware: the real part is an
// analog 1T1R crossbar with current mirrors, two integrators per output
// and a SAR ADC. This model reproduces its digital input/output function.
//
// The real PE stores each 8-bit weight in eight single-level 1T1R cells on
// eight bit lines; current mirrors weight the bit lines 1, 2, 4, 8 within
// each nibble, the two nibble integrators are joined by charge sharing at
// 16:1, and the 8-bit input is applied one bit-plane at a time with the
// accumulated charge halved between bit-planes, so the MSB plane carries
// the most weight. An ideal, loss-free version of that chain computes, for
// every output column m,
//     out[m] = sat8( (sum_c x[c] * w[c][m]) >>> ADC_SHIFT )
// with ADC_SHIFT = 8 coming from the eight halvings. Inputs are unsigned
// 8-bit (activations after ReLU); weights and outputs are signed 8-bit --
// the paper shows only positive bit-line significance, so the signed
// weight (MSB bit line counting negative) and the saturation of the 8-bit
// ADC are this model's choices.
//
// Interface: weights are written one crossbar row (Nm weights) per clock
// through w_we/w_addr/w_data during initialisation. When `en` is high at a
// clock edge the MVM of `x` is taken and the result is on `out` with
// `out_valid` high for the following step (one step of latency).
module pe_crossbar
  import domino_pkg::*;
#(
  parameter int unsigned NC        = 256,   // crossbar rows (inputs)
  parameter int unsigned NM        = 256,   // crossbar columns (outputs)
  parameter int unsigned ADC_SHIFT = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [$clog2(NC)-1:0]    w_addr,
  input  logic [NM*LANE_W-1:0]     w_data,
  input  logic                     en,
  input  logic [NC*LANE_W-1:0]     x,
  output logic                     out_valid,
  output logic [NM*LANE_W-1:0]     out
);
  logic [NM*LANE_W-1:0] weights [NC];

  always_ff @(posedge clk) begin
    if (w_we) weights[w_addr] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= en;
      if (en) begin
        for (int m = 0; m < NM; m++) begin
          logic signed [31:0] acc;
          acc = 0;
          for (int c = 0; c < NC; c++) begin
            acc += $signed({24'd0, x[c*LANE_W +: LANE_W]}) *
                   32'($signed(weights[c][m*LANE_W +: LANE_W]));
          end
          out[m*LANE_W +: LANE_W] <= sat8(acc >>> ADC_SHIFT);
        end
      end
    end
  end
endmodule
