// tb_input_buffer -- self-checking test of the input buffer.
// Random packets and bubble flags are written for every mesh row, then
// streamed twice with different lengths. The test checks that entry i of
// every row appears on that row's link i+1 steps after `start`, that
// bubbles carry no valid, that exactly `len` steps are sent and that
// `busy` falls at the end.
module tb_input_buffer;
  import domino_pkg::*;
  localparam int AR = 3, NC = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, wr_valid, start, busy;
  logic [$clog2(AR)-1:0] wr_row;
  logic [$clog2(DEPTH)-1:0] wr_addr;
  logic [NC*8-1:0] wr_data;
  logic [$clog2(DEPTH+1)-1:0] len;
  logic [AR-1:0] out_valid;
  logic [AR-1:0][NC*8-1:0] out_data;
  int checks = 0, failures = 0;
  logic [NC*8-1:0] ref_d [AR][DEPTH];
  bit ref_v [AR][DEPTH];

  input_buffer #(.AR(AR), .NC(NC), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic stream(input int n);
    @(negedge clk); start = 1; len = ($clog2(DEPTH+1))'(n);
    @(negedge clk); start = 0;
    for (int i = 0; i < n + 3; i++) begin
      @(posedge clk); #1;
      for (int r = 0; r < AR; r++) begin
        if (i < n) begin
          check(out_valid[r] == ref_v[r][i], $sformatf("valid row %0d entry %0d", r, i));
          if (ref_v[r][i]) check(out_data[r] == ref_d[r][i], $sformatf("data row %0d entry %0d", r, i));
        end else begin
          check(out_valid[r] == 1'b0, "no output after the stream");
        end
      end
      check(busy == (i < n - 1), $sformatf("busy at %0d", i));
    end
  endtask

  initial begin
    wr_en = 0; wr_valid = 0; start = 0; wr_row = 0; wr_addr = 0; wr_data = 0; len = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < AR; r++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_row = r[$clog2(AR)-1:0]; wr_addr = a[$clog2(DEPTH)-1:0];
        wr_valid = ($urandom_range(0, 3) != 0); wr_data = $urandom;
        ref_v[r][a] = wr_valid; ref_d[r][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    stream(6);
    stream(DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
