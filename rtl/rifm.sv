// rifm -- the input-feature-map router of a Domino tile.
//
// Rifm receives the input stream from one of its four neighbours, keeps
// the current input vector in the Rifm buffer (8 x Nc bits: one 8-bit value
// per crossbar row), forwards it to other Rifms, and decides for each
// packet whether the local PE computes on it and whether it is handed to
// Rofm over the shortcut (used when a layer skips the MAC, as in a ResNet
// shortcut). As in the paper, the decision comes from a counter of
// received packets and a controller driven by the initial configuration;
// no control travels with the data.
//
// Controller (this design's concrete form of it): received packets advance
// a column counter that wraps at col_len and then advances a row counter
// that wraps at row_len. The MAC is enabled for a packet whose
// (column, row) position lies in [col_lo, col_hi] x [row_lo, row_hi] --
// e.g. a tile holding filter tap (i, j) of a KxK filter on a W-wide image
// computes for columns j .. W-K+j and rows i .. H-K+i, and skips the rest.
//
// Block shift: with shift_units = k > 0 a received packet does not replace
// the buffer; the buffer moves up by k*64 rows and the lowest k*64 rows of
// the packet are inserted at the bottom. The buffer then holds the last
// Nc/(k*64) input vectors, which lets several filter taps of a layer with
// C < Nc channels share one crossbar. The paper gives the 64-row step;
// which end is shifted in is this design's choice.
//
// The paper sends the buffer to the PE bit-plane by bit-plane through an
// 8-to-1 mux; here the whole buffer is presented to the PE model, which
// performs the bit-serial accumulation itself.
//
// Timing: one packet per step. A packet on the selected port at a clock
// edge is in the buffer after that edge; in the same step out_valid
// (forwarding, per port), pe_en and sc_valid are high for one step.
module rifm
  import domino_pkg::*;
#(
  parameter int unsigned NC = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  rifm_cfg_t                  cfg_in,
  input  logic [3:0]                 in_valid,
  input  logic [3:0][NC*LANE_W-1:0]  in_data,
  output logic [3:0]                 out_valid,
  output logic [NC*LANE_W-1:0]       buf_data,    // to ports, PE and shortcut
  output logic                       pe_en,
  output logic                       sc_valid,
  output logic [15:0]                col_cnt,
  output logic [15:0]                row_cnt
);
  rifm_cfg_t               cfg;
  logic                    rx;
  logic [NC*LANE_W-1:0]    incoming, shifted;
  logic                    in_window;
  logic [15:0]             col_nx;

  assign rx        = cfg.rx_en && in_valid[cfg.rx_dir];
  assign incoming  = in_data[cfg.rx_dir];
  assign in_window = (col_cnt >= cfg.col_lo) && (col_cnt <= cfg.col_hi) &&
                     (row_cnt >= cfg.row_lo) && (row_cnt <= cfg.row_hi);
  assign col_nx    = col_cnt + 16'd1;

  // block shift by shift_units * 64 rows
  always_comb begin
    int unsigned k;
    k = int'(cfg.shift_units) * SHIFT_STEP;
    for (int unsigned r = 0; r < NC; r++) begin
      if (k == 0 || r < k) shifted[r*LANE_W +: LANE_W] = incoming[r*LANE_W +: LANE_W];
      else                 shifted[r*LANE_W +: LANE_W] = buf_data[(r-k)*LANE_W +: LANE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg <= '0;
    else if (cfg_we) cfg <= cfg_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_data  <= '0;
      out_valid <= '0;
      pe_en     <= 1'b0;
      sc_valid  <= 1'b0;
      col_cnt   <= '0;
      row_cnt   <= '0;
    end else begin
      out_valid <= rx ? cfg.tx_mask : 4'b0;
      pe_en     <= rx && cfg.mac_en && in_window;
      sc_valid  <= rx && cfg.sc_en;
      if (rx) begin
        buf_data <= shifted;
        if (col_nx >= cfg.col_len) begin
          col_cnt <= '0;
          row_cnt <= (row_cnt + 16'd1 >= cfg.row_len) ? '0 : row_cnt + 16'd1;
        end else begin
          col_cnt <= col_nx;
        end
      end
    end
  end
endmodule
