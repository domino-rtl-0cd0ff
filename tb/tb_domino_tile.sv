// tb_domino_tile -- self-checking test of one Domino tile (Rifm + PE +
// Rofm) with 16 x 16 crossbar, ADC shift 4.
//
// The tile is configured through its bus: Rifm receives from the west,
// forwards east and south, and runs the MAC for packets 0 and 1 of every
// three (col_len 3, col_hi 1). The Rofm schedule (period 4) is
//   0: receive the PE result, send it east;
//   1: receive the shortcut (raw input) and the OFM port west, add both,
//      send north.
// Random input packets arrive every 4 steps, with a random partial sum on
// the west OFM link. For every packet the test checks the IFM forwarding
// (ports and data, one step after arrival), mac_fire (window), the PE
// result leaving east three steps after arrival (the previous result when
// the MAC was skipped), and the shortcut sum leaving north one step later.
module tb_domino_tile;
  import domino_pkg::*;
  localparam int NC = 16, NM = 16, SH = 4, NP = 60;
  localparam int W = NM * 8;
  logic clk = 0, rst_n = 0;
  logic cfg_sel;
  cfg_target_e cfg_target;
  logic [15:0] cfg_addr;
  logic [W-1:0] cfg_data;
  logic [3:0] ifm_in_valid, ifm_out_valid, ofm_in_valid, ofm_out_valid;
  logic [3:0][NC*8-1:0] ifm_in_data;
  logic [NC*8-1:0] ifm_out_data;
  logic [3:0][W-1:0] ofm_in_data;
  logic [W-1:0] ofm_out_data;
  logic mac_fire, buf_overflow, buf_underflow;
  int checks = 0, failures = 0;
  int wt [NC][NM];
  logic [NC*8-1:0] pk [NP];
  logic [W-1:0] qv [NP], pe_exp [NP];
  int n_skip = 0, n_mac = 0;

  domino_tile #(.NC(NC), .NM(NM), .ADC_SHIFT(SH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int sat(input int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  task automatic cfg(input cfg_target_e tg, input int addr, input logic [W-1:0] data);
    @(negedge clk);
    cfg_sel = 1; cfg_target = tg; cfg_addr = 16'(addr); cfg_data = data;
  endtask

  initial begin
    rifm_cfg_t rc;
    inst_c_t i0, i1;
    logic [W-1:0] last_pe;
    cfg_sel = 0; cfg_target = CFG_PE_WEIGHT; cfg_addr = 0; cfg_data = 0;
    ifm_in_valid = 0; ifm_in_data = 0; ofm_in_valid = 0; ofm_in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    rc = '0;
    rc.rx_dir = DIR_W; rc.rx_en = 1'b1; rc.tx_mask = 4'b1001; rc.mac_en = 1'b1;
    rc.col_len = 16'd3; rc.col_lo = 16'd0; rc.col_hi = 16'd1;
    rc.row_len = 16'd1; rc.row_lo = 16'd0; rc.row_hi = 16'd0;
    cfg(CFG_RIFM_REG, 0, W'(rc));
    for (int c = 0; c < NC; c++) begin
      logic [W-1:0] row;
      for (int m = 0; m < NM; m++) begin
        wt[c][m] = $urandom_range(0, 15) - 8;
        row[m*8 +: 8] = 8'(wt[c][m]);
      end
      cfg(CFG_PE_WEIGHT, c, row);
    end
    i0 = '{rx: '{port_en: 1'b0, port_dir: DIR_E, pe_en: 1'b1, sc_en: 1'b0},
           sum: '{use_in0: 1'b0, use_in1: 1'b1, use_buf: 1'b0, push_raw: 1'b0},
           bufc: '0, tx: 4'b0001, opc: OPC_C};
    i1 = '{rx: '{port_en: 1'b1, port_dir: DIR_W, pe_en: 1'b0, sc_en: 1'b1},
           sum: '{use_in0: 1'b1, use_in1: 1'b1, use_buf: 1'b0, push_raw: 1'b0},
           bufc: '0, tx: 4'b0100, opc: OPC_C};
    cfg(CFG_ROFM_TABLE, 0, W'(i0));
    cfg(CFG_ROFM_TABLE, 1, W'(i1));
    cfg(CFG_ROFM_TABLE, 2, '0);
    cfg(CFG_ROFM_TABLE, 3, '0);
    cfg(CFG_ROFM_REG, 0, W'(rofm_cfg_t'{period: 8'd4, avg_mul: 8'd64, avg_shift: 4'd8}));
    @(negedge clk); cfg_sel = 0;

    // packets and expected PE results
    last_pe = '0;
    for (int n = 0; n < NP; n++) begin
      for (int c = 0; c < NC; c++) pk[n][c*8 +: 8] = 8'($urandom_range(0, 15));
      qv[n] = W'({$urandom, $urandom, $urandom, $urandom});
      if (n % 3 <= 1) begin
        for (int m = 0; m < NM; m++) begin
          int acc;
          acc = 0;
          for (int c = 0; c < NC; c++) acc += int'(pk[n][c*8 +: 8]) * wt[c][m];
          last_pe[m*8 +: 8] = 8'(sat(acc >>> SH));
        end
      end
      pe_exp[n] = last_pe;
    end

    for (int n = 0; n < NP; n++) begin
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        ifm_in_valid = (s == 0) ? 4'b0010 : 4'b0000;
        ifm_in_data[DIR_W] = (s == 0) ? pk[n] : NC*8'($urandom);
        ifm_in_data[DIR_N] = NC*8'($urandom);  // not selected
        ofm_in_data[DIR_W] = qv[n];
        @(posedge clk); #1;
        if (s == 0) begin
          check(ifm_out_valid == 4'b1001 && ifm_out_data == pk[n], $sformatf("forward packet %0d", n));
          check(mac_fire == (n % 3 <= 1), $sformatf("mac_fire packet %0d", n));
          if (mac_fire) n_mac++; else n_skip++;
        end else begin
          check(ifm_out_valid == 4'b0000 && mac_fire == 1'b0, "quiet between packets");
        end
        if (s == 3) begin
          check(ofm_out_valid == 4'b0001 && ofm_out_data == pe_exp[n],
                $sformatf("PE result east, packet %0d: %h exp %h", n, ofm_out_data, pe_exp[n]));
        end else if (s == 0 && n > 0) begin
          logic [W-1:0] e;
          for (int m = 0; m < NM; m++)
            e[m*8 +: 8] = 8'(sat(int'($signed(qv[n-1][m*8 +: 8])) + int'($signed(pk[n-1][m*8 +: 8]))));
          check(ofm_out_valid == 4'b0100 && ofm_out_data == e,
                $sformatf("shortcut sum north, packet %0d", n - 1));
        end else begin
          check(ofm_out_valid == 4'b0000, $sformatf("ofm quiet n=%0d s=%0d", n, s));
        end
      end
    end
    check(!buf_overflow && !buf_underflow, "buffer flags");
    check(n_mac > 0 && n_skip > 0, "both MAC and skip happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NP * 4 + NC + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
