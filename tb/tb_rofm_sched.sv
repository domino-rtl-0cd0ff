// tb_rofm_sched -- self-checking test of the Rofm schedule table, counter
// and decoder. The table is filled with random instructions; the test
// checks that nothing executes before the first packet, that entry 0
// executes in the step the first packet arrives, that the index then
// advances every step (with or without traffic) and wraps at the period,
// and that the decoded fields sit at the bit positions of the paper's
// instruction table (Rx 15:11, Sum 10:7, Buffer 6:5, Tx 4:1, opcode 0).
module tb_rofm_sched;
  import domino_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 0, rst_n = 0;
  logic tbl_we, any_rx, inst_valid, is_m;
  logic [6:0] tbl_addr, idx;
  logic [15:0] tbl_data, inst;
  logic [7:0] period;
  inst_c_t inst_c;
  inst_m_t inst_m;
  int checks = 0, failures = 0;
  logic [15:0] ref_tbl [DEPTH];

  rofm_sched #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int exp_idx, wraps;

  initial begin
    tbl_we = 0; tbl_addr = 0; tbl_data = 0; any_rx = 0; period = 8'd5;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_addr = 7'(i); tbl_data = 16'($urandom); ref_tbl[i] = tbl_data;
    end
    @(negedge clk); tbl_we = 0;
    // idle: nothing executes before the first packet
    repeat (6) begin
      @(negedge clk); check(!inst_valid, "idle before first packet");
    end
    exp_idx = 0;
    for (int s = 0; s < 40; s++) begin
      @(negedge clk);
      any_rx = (s == 0) || ($urandom_range(0, 3) == 0);
      #1;
      check(inst_valid, "executing after start");
      check(int'(idx) == exp_idx, $sformatf("step %0d idx %0d exp %0d", s, idx, exp_idx));
      check(inst == ref_tbl[exp_idx], "instruction fetched");
      check(inst_c.rx == inst[15:11] && inst_c.sum == inst[10:7] && inst_c.bufc == inst[6:5] &&
            inst_c.tx == inst[4:1] && inst_c.opc == opc_e'(inst[0]), "C-type fields");
      check(inst_m.func == inst[10:5] && is_m == inst[0], "M-type fields");
      exp_idx = (exp_idx + 1) % 5;
    end
    // switch to a period covering the whole table
    @(negedge clk); period = 8'(DEPTH); any_rx = 0;
    wraps = 0;
    for (int s = 0; s < 300; s++) begin
      #1;
      check(int'(idx) == exp_idx, $sformatf("long period idx %0d exp %0d", idx, exp_idx));
      check(inst == ref_tbl[exp_idx], "instruction fetched (long period)");
      @(negedge clk);
      exp_idx = (exp_idx + 1 >= DEPTH) ? 0 : exp_idx + 1;
      if (exp_idx == 0) wraps++;
    end
    check(wraps >= 2, "wrapped at 128");
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
