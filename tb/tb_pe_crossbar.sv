// tb_pe_crossbar -- self-checking test of the PE behavioural model.
// Random signed weights are loaded row by row; random unsigned input
// vectors are applied with random enables. The test computes each output
// column's dot product itself, applies the ADC shift and 8-bit saturation,
// and checks the result and the one-step latency of out_valid. Both small
// values (no saturation) and full-range values (saturation) are used.
module tb_pe_crossbar;
  import domino_pkg::*;
  localparam int NC = 16, NM = 8, SH = 4;
  logic clk = 0, rst_n = 0;
  logic w_we, en, out_valid;
  logic [$clog2(NC)-1:0] w_addr;
  logic [NM*8-1:0] w_data, out;
  logic [NC*8-1:0] x;
  int checks = 0, failures = 0;
  int wt [NC][NM];
  int n_sat = 0;

  pe_crossbar #(.NC(NC), .NM(NM), .ADC_SHIFT(SH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    w_we = 0; en = 0; w_addr = 0; w_data = 0; x = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      w_we = 1; w_addr = c[$clog2(NC)-1:0];
      for (int m = 0; m < NM; m++) begin
        wt[c][m] = $urandom_range(0, 255) - 128;
        w_data[m*8 +: 8] = 8'(wt[c][m]);
      end
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 200; t++) begin
      int xin [NC];
      int maxv;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      maxv = (t < 100) ? 7 : 255;
      for (int c = 0; c < NC; c++) begin
        xin[c] = $urandom_range(0, maxv);
        x[c*8 +: 8] = 8'(xin[c]);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== en) begin failures++; $display("FAIL out_valid"); end
      if (en) begin
        for (int m = 0; m < NM; m++) begin
          int acc, e;
          acc = 0;
          for (int c = 0; c < NC; c++) acc += xin[c] * wt[c][m];
          e = acc >>> SH;
          if (e > 127) begin e = 127; n_sat++; end
          if (e < -128) begin e = -128; n_sat++; end
          checks++;
          if (int'($signed(out[m*8 +: 8])) != e) begin
            failures++;
            $display("FAIL t=%0d m=%0d got %0d exp %0d", t, m, $signed(out[m*8 +: 8]), e);
          end
        end
      end
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
