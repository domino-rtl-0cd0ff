// rofm_cu -- the Rofm computation unit: activation, max pooling (comparator),
// average pooling (adder and multiplier) and bypass, lane by lane.
//
// The paper places this unit in every Rofm but uses it in the last tile of
// a block: the activation is applied to finished convolution results and
// pooling is done while results move between tiles. Two pooling forms are
// supported, matching the two cases the paper draws:
//  * pairwise (func.temporal = 0): combine in0 and in1 -- with weight
//    duplication the four results of a pooling window arrive from adjacent
//    tiles and are compared as they are passed along;
//  * temporal (func.temporal = 1): combine the operand with a per-lane pool
//    register -- with block reuse the results of one window are produced
//    one after another in the same tile. func.first restarts the window.
// The activation function is not named in the paper; ReLU is used. Average
// pooling multiplies the window sum by avg_mul and shifts right by
// avg_shift (64 and 8 give 1/4 for a 2x2 window); those constants are this
// design's choice. Lanes are signed 8-bit, saturated. Single-operand
// operations (activation, bypass, temporal pooling) take in0 or, with
// func.operand set, the head of the Rofm buffer -- so a sum finished in
// the buffer can be activated and pooled on its way out.
//
// Timing: `result` is combinational from the inputs and the pool register;
// the pool register updates at the clock edge when `en` is high.
module rofm_cu
  import domino_pkg::*;
#(
  parameter int unsigned LANES = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  func_t                   func,
  input  logic [LANES*LANE_W-1:0] in0,
  input  logic [LANES*LANE_W-1:0] in1,
  input  logic [LANES*LANE_W-1:0] head,     // Rofm buffer head
  input  logic [7:0]              avg_mul,
  input  logic [3:0]              avg_shift,
  output logic [LANES*LANE_W-1:0] result
);
  localparam int unsigned PW = 16;   // pool register width per lane

  logic signed [PW-1:0] pool    [LANES];
  logic signed [PW-1:0] pool_nx [LANES];

  function automatic logic signed [LANE_W-1:0] relu(input logic signed [LANE_W-1:0] v);
    return (v < 0) ? '0 : v;
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [LANE_W-1:0] a, b, h, x, r;
      logic signed [PW-1:0]     s;
      logic signed [31:0]       scaled;
      a = in0[l*LANE_W +: LANE_W];
      b = in1[l*LANE_W +: LANE_W];
      h = head[l*LANE_W +: LANE_W];
      x = func.operand ? h : a;
      s = pool[l];
      r = x;
      scaled = '0;
      unique case (func.op)
        CU_BYPASS: r = x;
        CU_ACT:    r = relu(x);
        CU_MAX: begin
          if (!func.temporal)  r = (a > b) ? a : b;
          else if (func.first) r = x;
          else                 r = (PW'(x) > pool[l]) ? x : sat8(32'(pool[l]));
          s = PW'(r);
        end
        CU_AVG: begin
          if (!func.temporal)  s = PW'(a) + PW'(b);
          else if (func.first) s = PW'(x);
          else                 s = pool[l] + PW'(x);
          scaled = (32'(s) * $signed({24'd0, avg_mul})) >>> avg_shift;
          r = sat8(scaled);
        end
        default: r = x;
      endcase
      if (func.act_after) r = relu(r);
      pool_nx[l] = s;
      result[l*LANE_W +: LANE_W] = r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) pool[l] <= '0;
    end else if (en && func.temporal && (func.op == CU_MAX || func.op == CU_AVG)) begin
      for (int l = 0; l < LANES; l++) pool[l] <= pool_nx[l];
    end
  end
endmodule
