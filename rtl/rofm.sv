// rofm -- the output-feature-map router of a Domino tile.
//
// Rofm performs the "computing on the move" part of the dataflow: it takes
// partial sums from its own PE, group sums from neighbouring Rofms or
// input data via the shortcut from Rifm, adds them to sums waiting in the
// Rofm buffer, applies activation or pooling in the last tile of a block,
// and sends the result to any of its four neighbours. Packets carry no
// header; every action is dictated by the local schedule table
// (rofm_sched), one instruction per step.
//
// Structure (as in the paper's tile figure): receive mux -> two input
// registers -> adder (three operands: in0, in1, buffer head) or computation
// unit -> output register -> port fan-out; the Rofm buffer (rofm_buffer)
// sits beside the adder. The paper lists the input and output registers as
// 64b x 2 and the adder as 8b x 8 x 2 on a 64-bit link running at 64x the
// instruction rate; here one clock is one instruction step and a packet
// (LANES 8-bit lanes, the PE's Nm outputs) moves whole in one clock. That
// unrolling is this design's choice.
//
// Timing: an instruction executes over two steps. In the step it is
// fetched, its Rx field loads the input registers from the port selected
// (in0) and from the PE or shortcut (in1). In the next step its Sum,
// Buffer, Func and Tx fields act on those registers, and the result is in
// the output register -- visible to the neighbours -- one step later. A
// packet therefore advances one hop every two steps. out_valid[d] is high
// for one step for each port d named in Tx.
//
// Sums are per-lane signed 8-bit with saturation (the paper gives the 8-bit
// width but not the overflow rule).
module rofm
  import domino_pkg::*;
#(
  parameter int unsigned LANES     = 256,
  parameter int unsigned BUF_DEPTH = 16384 / LANES,   // 16 KiB data buffer
  parameter int unsigned TBL_DEPTH = TABLE_DEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration (initialisation stage)
  input  logic                          cfg_we,
  input  cfg_target_e                   cfg_target,
  input  logic [15:0]                   cfg_addr,
  input  logic [LANES*LANE_W-1:0]       cfg_data,
  // neighbour links, indexed by dir_e
  input  logic [3:0]                    in_valid,
  input  logic [3:0][LANES*LANE_W-1:0]  in_data,
  output logic [3:0]                    out_valid,
  output logic [LANES*LANE_W-1:0]       out_data,
  // from the PE of this tile and the Rifm shortcut
  input  logic                          pe_valid,
  input  logic [LANES*LANE_W-1:0]       pe_data,
  input  logic                          sc_valid,
  input  logic [LANES*LANE_W-1:0]       sc_data,
  // status
  output logic                          buf_overflow,
  output logic                          buf_underflow,
  output logic [$clog2(BUF_DEPTH+1)-1:0] buf_count
);
  localparam int unsigned W = LANES * LANE_W;

  rofm_cfg_t cfg;

  // ---------------- fetch / receive stage ----------------
  logic                         inst_valid, is_m;
  logic [INST_W-1:0]            inst;
  inst_c_t                      inst_c;
  inst_m_t                      inst_m;
  logic [$clog2(TBL_DEPTH)-1:0] idx;
  logic                         any_rx;

  assign any_rx = (|in_valid) || pe_valid || sc_valid;

  rofm_sched #(.DEPTH(TBL_DEPTH)) u_sched (
    .clk, .rst_n,
    .tbl_we   (cfg_we && cfg_target == CFG_ROFM_TABLE),
    .tbl_addr (cfg_addr[$clog2(TBL_DEPTH)-1:0]),
    .tbl_data (cfg_data[INST_W-1:0]),
    .period   (cfg.period),
    .any_rx,
    .inst_valid, .idx, .inst, .inst_c, .inst_m, .is_m
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg <= '{period: 8'd1, avg_mul: 8'd64, avg_shift: 4'd8};
    else if (cfg_we && cfg_target == CFG_ROFM_REG) cfg <= rofm_cfg_t'(cfg_data[$bits(rofm_cfg_t)-1:0]);
  end

  // input registers and the instruction they belong to
  logic [W-1:0]      in0, in1;
  logic              ex_valid;
  logic [INST_W-1:0] ex_inst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in0      <= '0;
      in1      <= '0;
      ex_valid <= 1'b0;
      ex_inst  <= '0;
    end else begin
      ex_valid <= inst_valid;
      ex_inst  <= inst;
      if (inst_valid && inst_c.rx.port_en) in0 <= in_data[inst_c.rx.port_dir];
      if (inst_valid && inst_c.rx.sc_en)   in1 <= sc_data;
      else if (inst_valid && inst_c.rx.pe_en) in1 <= pe_data;
    end
  end

  // ---------------- execute stage ----------------
  inst_c_t ex_c;
  inst_m_t ex_m;
  logic    ex_is_m;
  assign ex_c    = inst_c_t'(ex_inst);
  assign ex_m    = inst_m_t'(ex_inst);
  assign ex_is_m = (ex_inst[0] == OPC_M);

  logic [W-1:0] head, sum, push_data, cu_result;
  logic         buf_empty, buf_full, do_push, do_pop;

  // the reusable adder: up to three operands per lane, saturated
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [LANE_W+1:0] acc;
      acc = '0;
      if (ex_c.sum.use_in0) acc += (LANE_W+2)'($signed(in0[l*LANE_W +: LANE_W]));
      if (ex_c.sum.use_in1) acc += (LANE_W+2)'($signed(in1[l*LANE_W +: LANE_W]));
      if (ex_c.sum.use_buf) acc += (LANE_W+2)'($signed(head[l*LANE_W +: LANE_W]));
      sum[l*LANE_W +: LANE_W] = sat8(32'(acc));
    end
  end

  assign do_push   = ex_valid && !ex_is_m && ex_c.bufc.push;
  assign do_pop    = ex_valid && (ex_is_m ? ex_m.func.operand : ex_c.bufc.pop);
  assign push_data = ex_c.sum.push_raw ? in1 : sum;

  rofm_buffer #(.W(W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .push (do_push), .push_data,
    .pop  (do_pop),  .head,
    .empty (buf_empty), .full (buf_full), .count (buf_count),
    .overflow (buf_overflow), .underflow (buf_underflow)
  );

  rofm_cu #(.LANES(LANES)) u_cu (
    .clk, .rst_n,
    .en        (ex_valid && ex_is_m),
    .func      (ex_m.func),
    .in0, .in1, .head,
    .avg_mul   (cfg.avg_mul),
    .avg_shift (cfg.avg_shift),
    .result    (cu_result)
  );

  // output register and port fan-out
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= ex_valid ? ex_c.tx : 4'b0;
      if (ex_valid && ex_c.tx != 4'b0) out_data <= ex_is_m ? cu_result : sum;
    end
  end
endmodule
