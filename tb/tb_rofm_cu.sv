// tb_rofm_cu -- self-checking test of the Rofm computation unit.
// Random operands and random Func words (bypass, ReLU, pairwise and
// temporal max pooling, pairwise and temporal average pooling, optional
// ReLU after pooling) are checked lane by lane against a reference model
// that keeps its own copy of the pool register. Each operation kind is
// counted and must have occurred.
module tb_rofm_cu;
  import domino_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  logic en;
  func_t func;
  logic [LANES*8-1:0] in0, in1, head, result;
  logic [7:0] avg_mul;
  logic [3:0] avg_shift;
  int checks = 0, failures = 0;
  int seen [4];
  int pool_m [LANES];

  rofm_cu #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sat(input int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int rl(input int v); return v < 0 ? 0 : v; endfunction

  initial begin
    en = 0; func = '0; in0 = '0; in1 = '0; head = '0; avg_mul = 64; avg_shift = 8;
    for (int l = 0; l < LANES; l++) pool_m[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      en = $urandom_range(0, 3) != 0;
      func = func_t'($urandom);
      in1 = {$urandom};
      in0 = {$urandom}; head = {$urandom};
      avg_mul = (i % 3 == 0) ? 8'd64 : 8'($urandom_range(1, 255));
      avg_shift = (i % 3 == 0) ? 4'd8 : 4'($urandom_range(4, 10));
      #1;
      seen[func.op]++;
      for (int l = 0; l < LANES; l++) begin
        int a, b, h, x, r, s;
        a = s8(in0[l*8 +: 8]); b = s8(in1[l*8 +: 8]);
        h = s8(head[l*8 +: 8]);
        x = func.operand ? h : a;
        s = pool_m[l];
        case (func.op)
          CU_BYPASS: r = x;
          CU_ACT:    r = rl(x);
          CU_MAX: begin
            if (!func.temporal) r = a > b ? a : b;
            else if (func.first) r = x;
            else r = x > pool_m[l] ? x : sat(pool_m[l]);
            s = r;
          end
          default: begin
            if (!func.temporal) s = a + b;
            else if (func.first) s = x;
            else s = pool_m[l] + x;
            r = sat((s * int'(avg_mul)) >>> avg_shift);
          end
        endcase
        if (func.act_after) r = rl(r);
        checks++;
        if (s8(result[l*8 +: 8]) != r) begin
          failures++;
          $display("FAIL i=%0d lane %0d op %0d temporal %0b first %0b: got %0d exp %0d",
                   i, l, func.op, func.temporal, func.first, s8(result[l*8 +: 8]), r);
        end
        if (en && func.temporal && (func.op == CU_MAX || func.op == CU_AVG)) pool_m[l] = s;
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) failures++;
    end
    $display("ops seen: bypass %0d act %0d max %0d avg %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
