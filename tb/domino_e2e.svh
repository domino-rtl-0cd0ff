// domino_e2e.svh -- end-to-end scenario used by tb_domino_top and written
// so that it also runs at any larger mesh and crossbar size. The including
// module defines AR, AC, NC, NM, SH (ADC shift), IBD (input-buffer depth),
// XMAX/WLO/WHI (value ranges) and instantiates domino_top as `dut` with
// the port names declared here.
//
// Scenario: one fully connected layer followed by 4:1 max pooling over
// time and ReLU, mapped on a block of 3 x 2 tiles in the south-east corner
// of the mesh (rows AR-3..AR-1, columns AC-2..AC-1), as in the paper's FC
// mapping: tile (t, a) holds weight slice t (input rows t*NC..t*NC+NC-1)
// of output group a. The input buffer streams slice t of each input
// vector into mesh row AR-3+t at the west edge; the Rifms of the columns
// before the block only forward it east (no MAC). Five vectors are sent
// 8 steps apart; every block Rifm's window (col_len 5, col_hi 3) makes its
// PE compute on the first four and skip the fifth.
//
// Rofm schedules (period 32 = four 8-step rounds, one per vector):
//   tile 0: receive PE, send it south;
//   tile 1: receive PE, push it; receive from north, add the buffer head
//           (pop), send south;
//   tile 2: receive PE, push it; receive from north, add head, pop, push
//           the sum; M-type max-pool over time on the buffer head (pop),
//           ReLU, send south in the fourth round only.
// So each block column delivers one packet at the south edge:
//   relu(max_v sat(sat(p0_v + p1_v) + p2_v)), p_t = sat((x_t . w_t) >>> SH).
//
// Mechanisms counted (each must occur, otherwise it is a failure): MAC
// firing, MAC skipped by the window, IFM forwarding across non-block
// tiles, partial-sum push/pop in the Rofm buffer, lanes clipped by the
// activation, lanes where pooling kept an earlier vector, results
// delivered. The run also checks that no buffer overflows or underflows
// and that nothing else leaves the mesh.

  logic clk = 0, rst_n = 0;
  logic cfg_valid;
  logic [7:0] cfg_row, cfg_col;
  cfg_target_e cfg_target;
  logic [15:0] cfg_addr;
  logic [NM*8-1:0] cfg_data;
  logic ib_wr_en, ib_wr_valid, ib_start, ib_busy;
  logic [$clog2(AR)-1:0] ib_wr_row;
  logic [$clog2(IBD)-1:0] ib_wr_addr;
  logic [NC*8-1:0] ib_wr_data;
  logic [$clog2(IBD+1)-1:0] ib_len;
  logic [AR-1:0] ofm_east_valid;
  logic [AR-1:0][NM*8-1:0] ofm_east_data;
  logic [AC-1:0] ofm_south_valid;
  logic [AC-1:0][NM*8-1:0] ofm_south_data;
  logic [AR-1:0][AC-1:0] mac_fire;
  logic any_overflow, any_underflow;

  int checks = 0, failures = 0;
  localparam int R0 = AR - 3, C0 = AC - 2, NV = 5, NUSE = 4, GAP = 8;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int sat(input int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  int xv [3][NV][NC];          // input slices
  int wt [3][2][NC][NM];       // weights per block tile
  int expv [2][NM];            // expected output per block column
  int n_clip = 0, n_early = 0;

  function automatic logic [15:0] ic(input rx_ctl_t rx, input sum_ctl_t s,
                                     input buf_ctl_t b, input logic [3:0] tx);
    inst_c_t i;
    i = '{rx: rx, sum: s, bufc: b, tx: tx, opc: OPC_C};
    return 16'(i);
  endfunction

  function automatic logic [15:0] table_entry(input int t, input int k);
    rx_ctl_t rx_pe, rx_n, rx_none;
    inst_m_t m;
    int kk, rep;
    rx_pe   = '{port_en: 1'b0, port_dir: DIR_E, pe_en: 1'b1, sc_en: 1'b0};
    rx_n    = '{port_en: 1'b1, port_dir: DIR_N, pe_en: 1'b0, sc_en: 1'b0};
    rx_none = '0;
    kk = k % GAP; rep = k / GAP;
    case (t)
      0: if (kk == 0) return ic(rx_pe, '{1'b0, 1'b1, 1'b0, 1'b0}, '{1'b0, 1'b0}, 4'b1000);
      1: begin
        if (kk == 0) return ic(rx_pe, '{1'b0, 1'b0, 1'b0, 1'b1}, '{1'b0, 1'b1}, 4'b0000);
        if (kk == 2) return ic(rx_n,  '{1'b1, 1'b0, 1'b1, 1'b0}, '{1'b1, 1'b0}, 4'b1000);
      end
      default: begin
        if (kk == 0) return ic(rx_pe, '{1'b0, 1'b0, 1'b0, 1'b1}, '{1'b0, 1'b1}, 4'b0000);
        if (kk == 4) return ic(rx_n,  '{1'b1, 1'b0, 1'b1, 1'b0}, '{1'b1, 1'b1}, 4'b0000);
        if (kk == 5) begin
          m = '{rx: rx_none,
                func: '{op: CU_MAX, temporal: 1'b1, first: (rep == 0), act_after: 1'b1, operand: 1'b1},
                tx: (rep == NUSE - 1) ? 4'b1000 : 4'b0000, opc: OPC_M};
          return 16'(m);
        end
      end
    endcase
    return ic(rx_none, '0, '0, 4'b0000);
  endfunction

  task automatic cfg_write(input int r, input int c, input cfg_target_e tg,
                           input int addr, input logic [NM*8-1:0] data);
    @(negedge clk);
    cfg_valid = 1; cfg_row = 8'(r); cfg_col = 8'(c); cfg_target = tg;
    cfg_addr = 16'(addr); cfg_data = data;
  endtask

  // activity monitors
  int n_mac = 0, n_mac_block = 0, n_rx_last = 0, n_fwd = 0, n_push = 0, n_pop = 0;
  int n_out [2];
  int n_stray = 0;
  logic [NM*8-1:0] got [2];
  bit monitor = 0;

  always @(posedge clk) if (monitor) begin
    for (int r = 0; r < AR; r++)
      for (int c = 0; c < AC; c++)
        if (mac_fire[r][c]) begin
          n_mac++;
          if (r >= R0 && c >= C0) n_mac_block++;
        end
    if (dut.g_row[AR-1].g_col[AC-1].u_tile.ifm_in_valid[DIR_W]) n_rx_last++;
    if (dut.g_row[AR-1].g_col[0].u_tile.ifm_out_valid[DIR_E]) n_fwd++;
    if (dut.g_row[AR-1].g_col[AC-1].u_tile.u_rofm.do_push) n_push++;
    if (dut.g_row[AR-1].g_col[AC-1].u_tile.u_rofm.do_pop)  n_pop++;
    for (int a = 0; a < 2; a++)
      if (ofm_south_valid[C0+a]) begin
        if (n_out[a] == 0) got[a] = ofm_south_data[C0+a];
        n_out[a]++;
      end
    for (int c = 0; c < C0; c++) if (ofm_south_valid[c]) n_stray++;
    if (|ofm_east_valid) n_stray++;
  end

  initial begin
    cfg_valid = 0; cfg_row = 0; cfg_col = 0; cfg_target = CFG_PE_WEIGHT; cfg_addr = 0; cfg_data = 0;
    ib_wr_en = 0; ib_wr_valid = 0; ib_start = 0; ib_wr_row = 0; ib_wr_addr = 0; ib_wr_data = 0; ib_len = 0;
    n_out[0] = 0; n_out[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // data
    for (int t = 0; t < 3; t++)
      for (int v = 0; v < NV; v++)
        for (int c = 0; c < NC; c++) xv[t][v][c] = $urandom_range(0, XMAX);
    for (int t = 0; t < 3; t++)
      for (int a = 0; a < 2; a++)
        for (int c = 0; c < NC; c++)
          for (int m = 0; m < NM; m++) wt[t][a][c][m] = $urandom_range(0, WHI - WLO) + WLO;

    // expected results
    for (int a = 0; a < 2; a++)
      for (int m = 0; m < NM; m++) begin
        int best, bestv;
        best = -1000; bestv = 0;
        for (int v = 0; v < NUSE; v++) begin
          int s;
          s = 0;
          for (int t = 0; t < 3; t++) begin
            int acc;
            acc = 0;
            for (int c = 0; c < NC; c++) acc += xv[t][v][c] * wt[t][a][c][m];
            s = (t == 0) ? sat(acc >>> SH) : sat(s + sat(acc >>> SH));
          end
          if (v == 0 || s > best) begin best = s; bestv = v; end
        end
        if (best < 0) n_clip++;
        if (bestv != NUSE - 1) n_early++;
        expv[a][m] = best < 0 ? 0 : best;
      end

    // initialisation stage: Rifm routing, weights, Rofm tables
    for (int t = 0; t < 3; t++)
      for (int c = 0; c < AC; c++) begin
        rifm_cfg_t rc;
        rc = '0;
        rc.rx_dir = DIR_W; rc.rx_en = 1'b1;
        rc.tx_mask = (c < AC - 1) ? 4'b0001 : 4'b0000;
        rc.mac_en = (c >= C0);
        rc.col_len = 16'(NV); rc.col_lo = 0; rc.col_hi = 16'(NUSE - 1);
        rc.row_len = 16'd1; rc.row_lo = 0; rc.row_hi = 0;
        cfg_write(R0 + t, c, CFG_RIFM_REG, 0, (NM*8)'(rc));
      end
    for (int t = 0; t < 3; t++)
      for (int a = 0; a < 2; a++) begin
        for (int c = 0; c < NC; c++) begin
          logic [NM*8-1:0] row;
          for (int m = 0; m < NM; m++) row[m*8 +: 8] = 8'(wt[t][a][c][m]);
          cfg_write(R0 + t, C0 + a, CFG_PE_WEIGHT, c, row);
        end
        for (int k = 0; k < NUSE * GAP; k++)
          cfg_write(R0 + t, C0 + a, CFG_ROFM_TABLE, k, (NM*8)'(table_entry(t, k)));
        cfg_write(R0 + t, C0 + a, CFG_ROFM_REG, 0,
                  (NM*8)'(rofm_cfg_t'{period: 8'(NUSE * GAP), avg_mul: 8'd64, avg_shift: 4'd8}));
      end
    @(negedge clk); cfg_valid = 0;

    // input buffer: vector v of slice t at entry v*GAP of row R0+t
    for (int t = 0; t < 3; t++)
      for (int e = 0; e <= (NV - 1) * GAP; e++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_row = ($clog2(AR))'(R0 + t); ib_wr_addr = ($clog2(IBD))'(e);
        ib_wr_valid = (e % GAP == 0);
        for (int c = 0; c < NC; c++) ib_wr_data[c*8 +: 8] = (e % GAP == 0) ? 8'(xv[t][e / GAP][c]) : 8'd0;
      end
    @(negedge clk); ib_wr_en = 0;
    check(mac_fire == '0 && ofm_south_valid == '0, "quiet before the stream");

    // inference
    monitor = 1;
    @(negedge clk); ib_start = 1; ib_len = ($clog2(IBD+1))'((NV - 1) * GAP + 1);
    @(negedge clk); ib_start = 0;
    repeat (NUSE * GAP + AC + 12) @(posedge clk);
    monitor = 0;

    for (int a = 0; a < 2; a++) begin
      check(n_out[a] == 1, $sformatf("column %0d delivered %0d results", a, n_out[a]));
      for (int m = 0; m < NM; m++)
        check(int'($signed(got[a][m*8 +: 8])) == expv[a][m],
              $sformatf("column %0d lane %0d got %0d exp %0d", a, m, $signed(got[a][m*8 +: 8]), expv[a][m]));
    end
    check(!any_overflow && !any_underflow, "no buffer overflow/underflow");
    check(n_stray == 0, "nothing else leaves the mesh");

    $display("mechanisms: mac=%0d (block %0d) received-by-last-tile=%0d forwarded=%0d push=%0d pop=%0d relu-clipped=%0d pool-kept-earlier=%0d outputs=%0d/%0d",
             n_mac, n_mac_block, n_rx_last, n_fwd, n_push, n_pop, n_clip, n_early, n_out[0], n_out[1]);
    check(n_mac == 6 * NUSE && n_mac_block == 6 * NUSE, "MAC fired once per used vector per block tile");
    check(n_rx_last == NV && n_rx_last > NUSE, "MAC skipped for the vector outside the window");
    check(n_fwd == NV, "IFM forwarded across non-block tiles");
    check(n_push > 0 && n_pop > 0, "partial sums queued in the Rofm buffer");
    check(n_clip > 0, "activation clipped some lanes");
    check(n_early > 0, "pooling kept an earlier vector in some lanes");
    check(n_out[0] > 0 && n_out[1] > 0, "results delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6 * NC + 3 * AC + 400 + 3 * 64 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
