// tb_rifm -- self-checking test of the IFM router.
// Packets arrive with random gaps on the configured port while random
// traffic on the other ports must be ignored. After every step the test
// checks the Rifm buffer, the forwarding valids, the MAC enable given by
// the (column, row) packet-count window, and the shortcut valid, against a
// model. A second phase uses the 64-row block shift (one and two units)
// and checks the buffer's sliding-window contents.
module tb_rifm;
  import domino_pkg::*;
  localparam int NC = 256;
  localparam int W  = NC * 8;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  rifm_cfg_t cfg_in;
  logic [3:0] in_valid, out_valid;
  logic [3:0][W-1:0] in_data;
  logic [W-1:0] buf_data;
  logic pe_en, sc_valid;
  logic [15:0] col_cnt, row_cnt;
  int checks = 0, failures = 0;
  int n_mac = 0, n_skip = 0;

  rifm #(.NC(NC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [W-1:0] rnd_pkt();
    logic [W-1:0] p;
    for (int i = 0; i < W / 32; i++) p[i*32 +: 32] = $urandom;
    return p;
  endfunction

  logic [W-1:0] model_buf;
  int mcol, mrow;

  task automatic run_phase(input int steps);
    for (int s = 0; s < steps; s++) begin
      bit rx;
      logic [W-1:0] pkt;
      bit exp_mac;
      @(negedge clk);
      rx = ($urandom_range(0, 2) != 0);
      pkt = rnd_pkt();
      in_valid = 4'($urandom) & ~(4'b1 << cfg_in.rx_dir);
      for (int d = 0; d < 4; d++) in_data[d] = rnd_pkt();
      if (rx) begin
        in_valid[cfg_in.rx_dir] = 1'b1;
        in_data[cfg_in.rx_dir]  = pkt;
      end
      exp_mac = rx && cfg_in.mac_en && mcol >= cfg_in.col_lo && mcol <= cfg_in.col_hi &&
                mrow >= cfg_in.row_lo && mrow <= cfg_in.row_hi;
      if (rx) begin
        int k;
        k = int'(cfg_in.shift_units) * 64;
        if (k == 0) model_buf = pkt;
        else begin
          for (int r = NC - 1; r >= 0; r--)
            model_buf[r*8 +: 8] = (r < k) ? pkt[r*8 +: 8] : model_buf[(r-k)*8 +: 8];
        end
        mcol++;
        if (mcol >= int'(cfg_in.col_len)) begin
          mcol = 0; mrow++;
          if (mrow >= int'(cfg_in.row_len)) mrow = 0;
        end
      end
      @(posedge clk); #1;
      check(buf_data == model_buf, $sformatf("buffer at step %0d", s));
      check(out_valid == (rx ? cfg_in.tx_mask : 4'b0), "forward valids");
      check(pe_en == exp_mac, $sformatf("pe_en step %0d got %0b exp %0b", s, pe_en, exp_mac));
      check(sc_valid == (rx && cfg_in.sc_en), "shortcut valid");
      if (exp_mac) n_mac++; else if (rx) n_skip++;
    end
  endtask

  initial begin
    cfg_we = 0; cfg_in = '0; in_valid = '0; in_data = '0;
    model_buf = '0; mcol = 0; mrow = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    cfg_in = '{rx_dir: DIR_W, rx_en: 1'b1, tx_mask: 4'b1001, sc_en: 1'b1, mac_en: 1'b1,
               shift_units: 3'd0, col_len: 16'd5, col_lo: 16'd1, col_hi: 16'd3,
               row_len: 16'd4, row_lo: 16'd1, row_hi: 16'd2};
    cfg_we = 1;
    @(negedge clk); cfg_we = 0;
    run_phase(120);
    // block shift, one unit of 64 rows, input from the north
    @(negedge clk); in_valid = '0;
    cfg_in.shift_units = 3'd1; cfg_in.rx_dir = DIR_N; cfg_in.tx_mask = 4'b0010; cfg_in.sc_en = 1'b0;
    cfg_we = 1;
    @(negedge clk); cfg_we = 0;
    run_phase(40);
    @(negedge clk); in_valid = '0;
    cfg_in.shift_units = 3'd2; cfg_we = 1;
    @(negedge clk); cfg_we = 0;
    run_phase(40);
    check(n_mac > 0 && n_skip > 0, "both MAC and skipped packets occurred");
    $display("mac %0d skipped %0d", n_mac, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
