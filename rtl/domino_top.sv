// domino_top -- the Domino processor: an input buffer and an Ar x Ac mesh of
// tiles joined by two 2-D mesh networks (one for input feature maps, one
// for partial sums and output feature maps).
//
// A DNN layer is mapped onto a rectangular group of tiles (a "block",
// m_t x m_a tiles) purely by configuration: crossbar weights, each Rifm's
// routing/MAC window and each Rofm's schedule table are written through
// the configuration bus before inference. There is no global controller
// at run time; inputs are streamed from the input buffer into the west
// edge of the mesh and every router acts on its own counters.
//
// Interface:
//  * cfg_*: selects tile (cfg_row, cfg_col) and writes one item (see
//    domino_pkg::cfg_target_e) per clock during initialisation.
//  * ib_*: loads and starts the input buffer (see input_buffer).
//  * ofm_east_* / ofm_south_*: OFM links leaving the east and south edges
//    of the mesh -- where results of the last tiles of blocks come out.
//    OFM links at the north and west edges and IFM links at the north,
//    south and east edges are left unconnected (inputs tied off).
//  * mac_fire, any_overflow, any_underflow: activity and error status.
// The mesh size default, 30 x 30 = 900 tiles, is the array count the paper
// evaluates for VGG-11, ResNet-18 and ResNet-50; VGG-16/-19 use 50 x 50.
module domino_top
  import domino_pkg::*;
#(
  parameter int unsigned AR        = 30,
  parameter int unsigned AC        = 30,
  parameter int unsigned NC        = 256,
  parameter int unsigned NM        = 256,
  parameter int unsigned BUF_DEPTH = 16384 / NM,
  parameter int unsigned TBL_DEPTH = TABLE_DEPTH,
  parameter int unsigned ADC_SHIFT = 8,
  parameter int unsigned IB_DEPTH  = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration bus
  input  logic                          cfg_valid,
  input  logic [7:0]                    cfg_row,
  input  logic [7:0]                    cfg_col,
  input  cfg_target_e                   cfg_target,
  input  logic [15:0]                   cfg_addr,
  input  logic [NM*LANE_W-1:0]          cfg_data,
  // input buffer
  input  logic                          ib_wr_en,
  input  logic [$clog2(AR)-1:0]         ib_wr_row,
  input  logic [$clog2(IB_DEPTH)-1:0]   ib_wr_addr,
  input  logic                          ib_wr_valid,
  input  logic [NC*LANE_W-1:0]          ib_wr_data,
  input  logic                          ib_start,
  input  logic [$clog2(IB_DEPTH+1)-1:0] ib_len,
  output logic                          ib_busy,
  // results at the mesh edges
  output logic [AR-1:0]                 ofm_east_valid,
  output logic [AR-1:0][NM*LANE_W-1:0]  ofm_east_data,
  output logic [AC-1:0]                 ofm_south_valid,
  output logic [AC-1:0][NM*LANE_W-1:0]  ofm_south_data,
  // status
  output logic [AR-1:0][AC-1:0]         mac_fire,
  output logic                          any_overflow,
  output logic                          any_underflow
);
  logic [AR-1:0]                 ib_valid;
  logic [AR-1:0][NC*LANE_W-1:0]  ib_data;

  input_buffer #(.AR(AR), .NC(NC), .DEPTH(IB_DEPTH)) u_ib (
    .clk, .rst_n,
    .wr_en (ib_wr_en), .wr_row (ib_wr_row), .wr_addr (ib_wr_addr),
    .wr_valid (ib_wr_valid), .wr_data (ib_wr_data),
    .start (ib_start), .len (ib_len), .busy (ib_busy),
    .out_valid (ib_valid), .out_data (ib_data)
  );

  // per-tile link outputs
  logic [3:0]           ifm_ov [AR][AC];
  logic [NC*LANE_W-1:0] ifm_od [AR][AC];
  logic [3:0]           ofm_ov [AR][AC];
  logic [NM*LANE_W-1:0] ofm_od [AR][AC];
  logic [AR-1:0][AC-1:0] ovf, udf;

  for (genvar r = 0; r < AR; r++) begin : g_row
    for (genvar c = 0; c < AC; c++) begin : g_col
      logic [3:0]                ifm_iv, ofm_iv;
      logic [3:0][NC*LANE_W-1:0] ifm_id;
      logic [3:0][NM*LANE_W-1:0] ofm_id;

      // A tile's port d receives what the neighbour on side d sends
      // towards it (the neighbour's opposite port).
      always_comb begin
        ifm_iv = '0; ifm_id = '0; ofm_iv = '0; ofm_id = '0;
        // east neighbour sends on its west port
        if (c < AC-1) begin
          ifm_iv[DIR_E] = ifm_ov[r][c+1][DIR_W]; ifm_id[DIR_E] = ifm_od[r][c+1];
          ofm_iv[DIR_E] = ofm_ov[r][c+1][DIR_W]; ofm_id[DIR_E] = ofm_od[r][c+1];
        end
        // west neighbour, or the input buffer at the west edge
        if (c > 0) begin
          ifm_iv[DIR_W] = ifm_ov[r][c-1][DIR_E]; ifm_id[DIR_W] = ifm_od[r][c-1];
          ofm_iv[DIR_W] = ofm_ov[r][c-1][DIR_E]; ofm_id[DIR_W] = ofm_od[r][c-1];
        end else begin
          ifm_iv[DIR_W] = ib_valid[r];           ifm_id[DIR_W] = ib_data[r];
        end
        if (r > 0) begin
          ifm_iv[DIR_N] = ifm_ov[r-1][c][DIR_S]; ifm_id[DIR_N] = ifm_od[r-1][c];
          ofm_iv[DIR_N] = ofm_ov[r-1][c][DIR_S]; ofm_id[DIR_N] = ofm_od[r-1][c];
        end
        if (r < AR-1) begin
          ifm_iv[DIR_S] = ifm_ov[r+1][c][DIR_N]; ifm_id[DIR_S] = ifm_od[r+1][c];
          ofm_iv[DIR_S] = ofm_ov[r+1][c][DIR_N]; ofm_id[DIR_S] = ofm_od[r+1][c];
        end
      end

      domino_tile #(
        .NC(NC), .NM(NM), .BUF_DEPTH(BUF_DEPTH), .TBL_DEPTH(TBL_DEPTH), .ADC_SHIFT(ADC_SHIFT)
      ) u_tile (
        .clk, .rst_n,
        .cfg_sel       (cfg_valid && cfg_row == 8'(r) && cfg_col == 8'(c)),
        .cfg_target, .cfg_addr, .cfg_data,
        .ifm_in_valid  (ifm_iv),
        .ifm_in_data   (ifm_id),
        .ifm_out_valid (ifm_ov[r][c]),
        .ifm_out_data  (ifm_od[r][c]),
        .ofm_in_valid  (ofm_iv),
        .ofm_in_data   (ofm_id),
        .ofm_out_valid (ofm_ov[r][c]),
        .ofm_out_data  (ofm_od[r][c]),
        .mac_fire      (mac_fire[r][c]),
        .buf_overflow  (ovf[r][c]),
        .buf_underflow (udf[r][c])
      );
    end
  end

  always_comb begin
    for (int r = 0; r < AR; r++) begin
      ofm_east_valid[r] = ofm_ov[r][AC-1][DIR_E];
      ofm_east_data[r]  = ofm_od[r][AC-1];
    end
    for (int c = 0; c < AC; c++) begin
      ofm_south_valid[c] = ofm_ov[AR-1][c][DIR_S];
      ofm_south_data[c]  = ofm_od[AR-1][c];
    end
  end

  assign any_overflow  = |ovf;
  assign any_underflow = |udf;
endmodule
