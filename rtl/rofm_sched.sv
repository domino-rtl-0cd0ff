// rofm_sched -- the Rofm schedule table, its index counter and the decoder.
//
// Instructions for one Rofm are written once, in the initialisation stage,
// into a 16-bit x 128-entry table (the paper's size). The compiler makes
// them periodic: the counter that indexes the table counts 0 .. period-1
// and wraps, one instruction per step. As in the paper, the counter stays
// idle after reset and starts with the first packet the Rofm receives
// (`any_rx`); from then on it advances every step whether or not data
// arrive. The step in which the first packet arrives executes entry 0.
//
// Decoding is a reinterpretation of the 16 bits as the C-type or M-type
// field layout of domino_pkg; `inst_valid` is high in every step that
// executes an instruction. The table is written through tbl_we/tbl_addr/
// tbl_data; `period` comes from the Rofm configuration register.
module rofm_sched
  import domino_pkg::*;
#(
  parameter int unsigned DEPTH = TABLE_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     tbl_we,
  input  logic [$clog2(DEPTH)-1:0] tbl_addr,
  input  logic [INST_W-1:0]        tbl_data,
  input  logic [7:0]               period,
  input  logic                     any_rx,
  output logic                     inst_valid,
  output logic [$clog2(DEPTH)-1:0] idx,
  output logic [INST_W-1:0]        inst,
  output inst_c_t                  inst_c,
  output inst_m_t                  inst_m,
  output logic                     is_m
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [INST_W-1:0] table_mem [DEPTH];
  logic              started;
  logic [AW-1:0]     cnt;
  logic [AW:0]       nxt;

  assign inst_valid = started || any_rx;
  assign idx        = started ? cnt : '0;
  assign inst       = table_mem[idx];
  assign inst_c     = inst_c_t'(inst);
  assign inst_m     = inst_m_t'(inst);
  assign is_m       = (inst[0] == OPC_M);
  assign nxt        = {1'b0, idx} + 1'b1;

  always_ff @(posedge clk) begin
    if (tbl_we) table_mem[tbl_addr] <= tbl_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started <= 1'b0;
      cnt     <= '0;
    end else if (inst_valid) begin
      started <= 1'b1;
      cnt     <= (9'(nxt) >= {1'b0, period}) ? '0 : nxt[AW-1:0];
    end
  end

  a_period: assert property (@(posedge clk) disable iff (!rst_n)
                             inst_valid |-> (period != 0 && 32'(period) <= DEPTH))
    else $error("rofm_sched: period out of range");
endmodule
