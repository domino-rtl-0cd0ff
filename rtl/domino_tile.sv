// domino_tile -- one Domino tile: Rifm, PE and Rofm.
//
// The input stream enters Rifm from a neighbour; Rifm forwards it on, and
// for the packets its controller selects it starts a MAC in the PE. The
// PE result goes to Rofm as a partial sum; Rifm can also hand the raw
// input to Rofm over the shortcut. Rofm adds, buffers, pools and sends the
// results over the OFM links. The two routers have separate links in all
// four directions, as in the paper (one mesh for inputs, one for sums).
//
// Configuration is written through one bus during initialisation: the
// tile is selected by cfg_sel and cfg_target chooses the PE weights, the
// Rofm schedule table, the Rofm register or the Rifm register.
//
// Timing from an input packet at the Rifm port: buffer loaded (step 0),
// PE result valid (step 1), taken into Rofm input register by an
// instruction with Rx.pe set (step 1 fetch), result in the Rofm output
// register at the end of step 2, on the OFM link in step 3.
//
// The shortcut carries the first Nm rows of the Rifm buffer (Nc = Nm in
// the evaluated configuration).
module domino_tile
  import domino_pkg::*;
#(
  parameter int unsigned NC        = 256,
  parameter int unsigned NM        = 256,
  parameter int unsigned BUF_DEPTH = 16384 / NM,
  parameter int unsigned TBL_DEPTH = TABLE_DEPTH,
  parameter int unsigned ADC_SHIFT = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  logic                       cfg_sel,
  input  cfg_target_e                cfg_target,
  input  logic [15:0]                cfg_addr,
  input  logic [NM*LANE_W-1:0]       cfg_data,
  // IFM links
  input  logic [3:0]                 ifm_in_valid,
  input  logic [3:0][NC*LANE_W-1:0]  ifm_in_data,
  output logic [3:0]                 ifm_out_valid,
  output logic [NC*LANE_W-1:0]       ifm_out_data,
  // OFM links
  input  logic [3:0]                 ofm_in_valid,
  input  logic [3:0][NM*LANE_W-1:0]  ofm_in_data,
  output logic [3:0]                 ofm_out_valid,
  output logic [NM*LANE_W-1:0]       ofm_out_data,
  // status
  output logic                       mac_fire,
  output logic                       buf_overflow,
  output logic                       buf_underflow
);
  logic                  pe_en, sc_valid, pe_valid;
  logic [NM*LANE_W-1:0]  pe_out, sc_data;
  logic [15:0]           col_cnt, row_cnt;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count;

  rifm #(.NC(NC)) u_rifm (
    .clk, .rst_n,
    .cfg_we   (cfg_sel && cfg_target == CFG_RIFM_REG),
    .cfg_in   (rifm_cfg_t'(cfg_data[$bits(rifm_cfg_t)-1:0])),
    .in_valid (ifm_in_valid),
    .in_data  (ifm_in_data),
    .out_valid(ifm_out_valid),
    .buf_data (ifm_out_data),
    .pe_en, .sc_valid, .col_cnt, .row_cnt
  );

  pe_crossbar #(.NC(NC), .NM(NM), .ADC_SHIFT(ADC_SHIFT)) u_pe (
    .clk, .rst_n,
    .w_we     (cfg_sel && cfg_target == CFG_PE_WEIGHT),
    .w_addr   (cfg_addr[$clog2(NC)-1:0]),
    .w_data   (cfg_data),
    .en       (pe_en),
    .x        (ifm_out_data),
    .out_valid(pe_valid),
    .out      (pe_out)
  );

  always_comb begin
    for (int unsigned l = 0; l < NM; l++)
      sc_data[l*LANE_W +: LANE_W] = (l < NC) ? ifm_out_data[l*LANE_W +: LANE_W] : '0;
  end

  rofm #(.LANES(NM), .BUF_DEPTH(BUF_DEPTH), .TBL_DEPTH(TBL_DEPTH)) u_rofm (
    .clk, .rst_n,
    .cfg_we   (cfg_sel),
    .cfg_target, .cfg_addr, .cfg_data,
    .in_valid (ofm_in_valid),
    .in_data  (ofm_in_data),
    .out_valid(ofm_out_valid),
    .out_data (ofm_out_data),
    .pe_valid, .pe_data (pe_out),
    .sc_valid, .sc_data,
    .buf_overflow, .buf_underflow, .buf_count
  );

  assign mac_fire = pe_en;
endmodule
