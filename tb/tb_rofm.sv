// tb_rofm -- self-checking test of the OFM router.
// The schedule table is filled with random instructions (C-type and
// M-type, every Rx/Sum/Buffer/Tx/Func combination possible) and the router
// is driven with random traffic on its four ports, the PE input and the
// shortcut. A reference model of the two-step instruction execution
// (receive into the input registers, then add / buffer / compute / send)
// with its own queue and pool registers predicts out_valid, out_data, the
// buffer fill level and the overflow/underflow flags after every step.
// It also checks that nothing happens before the first packet and counts
// how often sums with a buffered operand, pushes, pops and M-type
// operations were executed.
module tb_rofm;
  import domino_pkg::*;
  localparam int LANES = 4, BUFD = 4, TBLD = 8;
  localparam int W = LANES * 8;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  cfg_target_e cfg_target;
  logic [15:0] cfg_addr;
  logic [W-1:0] cfg_data;
  logic [3:0] in_valid, out_valid;
  logic [3:0][W-1:0] in_data;
  logic [W-1:0] out_data, pe_data, sc_data;
  logic pe_valid, sc_valid, buf_overflow, buf_underflow;
  logic [$clog2(BUFD+1)-1:0] buf_count;
  int checks = 0, failures = 0;

  rofm #(.LANES(LANES), .BUF_DEPTH(BUFD), .TBL_DEPTH(TBLD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int s8(input logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sat(input int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int rl(input int v); return v < 0 ? 0 : v; endfunction

  // reference model state
  logic [15:0] tbl [TBLD];
  int period, cnt;
  bit started, ex_valid, m_ovf, m_udf;
  logic [15:0] ex_inst;
  logic [W-1:0] m_in0, m_in1, m_out;
  logic [3:0] m_ov;
  logic [W-1:0] q[$];
  int pool [LANES];
  int n_bufsum = 0, n_push = 0, n_pop = 0, n_m = 0, n_tx = 0;

  task automatic model_step();
    bit any, iv;
    int idx;
    logic [15:0] inst;
    inst_c_t ec;
    inst_m_t em;
    logic [W-1:0] head, sum, cu;
    any = (|in_valid) || pe_valid || sc_valid;
    iv = started || any;
    idx = started ? cnt : 0;
    inst = tbl[idx];
    ec = inst_c_t'(ex_inst);
    em = inst_m_t'(ex_inst);
    head = (q.size() > 0) ? q[0] : '0;
    for (int l = 0; l < LANES; l++) begin
      int a, b, h, acc, x, r, s;
      a = s8(m_in0[l*8 +: 8]); b = s8(m_in1[l*8 +: 8]); h = s8(head[l*8 +: 8]);
      acc = (ec.sum.use_in0 ? a : 0) + (ec.sum.use_in1 ? b : 0) + (ec.sum.use_buf ? h : 0);
      sum[l*8 +: 8] = 8'(sat(acc));
      x = em.func.operand ? h : a;
      s = pool[l]; r = x;
      case (em.func.op)
        CU_BYPASS: r = x;
        CU_ACT: r = rl(x);
        CU_MAX: begin
          if (!em.func.temporal) r = a > b ? a : b;
          else if (em.func.first) r = x;
          else r = x > pool[l] ? x : sat(pool[l]);
          s = r;
        end
        default: begin
          if (!em.func.temporal) s = a + b;
          else if (em.func.first) s = x;
          else s = pool[l] + x;
          r = sat((s * 64) >>> 8);
        end
      endcase
      if (em.func.act_after) r = rl(r);
      cu[l*8 +: 8] = 8'(r);
      if (ex_valid && ex_inst[0] && em.func.temporal && (em.func.op == CU_MAX || em.func.op == CU_AVG))
        pool[l] = s;
    end
    // execute stage
    m_ov = ex_valid ? ec.tx : 4'b0;
    if (ex_valid && ec.tx != 0) begin
      m_out = ex_inst[0] ? cu : sum;
      n_tx++;
    end
    if (ex_valid && !ex_inst[0]) begin
      bit do_pop, do_push;
      if (ec.sum.use_buf) n_bufsum++;
      do_pop = ec.bufc.pop && q.size() > 0;
      if (ec.bufc.pop && q.size() == 0) m_udf = 1;
      do_push = ec.bufc.push && (q.size() < BUFD || do_pop);
      if (ec.bufc.push && !do_push) m_ovf = 1;
      if (do_pop) begin void'(q.pop_front()); n_pop++; end
      if (do_push) begin q.push_back(ec.sum.push_raw ? m_in1 : sum); n_push++; end
    end
    if (ex_valid && ex_inst[0]) begin
      n_m++;
      if (em.func.operand) begin
        if (q.size() > 0) void'(q.pop_front()); else m_udf = 1;
      end
    end
    // fetch stage
    begin
      inst_c_t fc;
      fc = inst_c_t'(inst);
      if (iv && fc.rx.port_en) m_in0 = in_data[fc.rx.port_dir];
      if (iv && fc.rx.sc_en) m_in1 = sc_data;
      else if (iv && fc.rx.pe_en) m_in1 = pe_data;
      ex_valid = iv;
      ex_inst = inst;
      if (iv) begin
        started = 1;
        cnt = (idx + 1 >= period) ? 0 : idx + 1;
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_target = CFG_ROFM_TABLE; cfg_addr = 0; cfg_data = 0;
    in_valid = 0; in_data = 0; pe_valid = 0; pe_data = 0; sc_valid = 0; sc_data = 0;
    started = 0; cnt = 0; ex_valid = 0; ex_inst = 0; m_in0 = 0; m_in1 = 0; m_out = 0;
    m_ovf = 0; m_udf = 0; period = 6;
    for (int l = 0; l < LANES; l++) pool[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < TBLD; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_target = CFG_ROFM_TABLE; cfg_addr = 16'(i);
      tbl[i] = 16'($urandom);
      // entry 0 always pushes and entry 1 always adds and pops the buffer
      // head (both C-type), so that queueing is exercised on every seed
      if (i == 0) begin tbl[i][0] = 1'b0; tbl[i][5] = 1'b1; end
      if (i == 1) begin tbl[i][0] = 1'b0; tbl[i][6] = 1'b1; tbl[i][8] = 1'b1; end
      cfg_data = W'(tbl[i]);
    end
    @(negedge clk);
    cfg_target = CFG_ROFM_REG;
    cfg_data = W'(rofm_cfg_t'{period: 8'(period), avg_mul: 8'd64, avg_shift: 4'd8});
    @(negedge clk); cfg_we = 0;
    // idle steps: nothing may be sent
    repeat (4) begin
      @(posedge clk); #1; check(out_valid == 4'b0, "idle before first packet");
    end
    for (int s = 0; s < 400; s++) begin
      @(negedge clk);
      if (s < 3) begin
        in_valid = 0; pe_valid = (s == 2); sc_valid = 0;
      end else begin
        in_valid = 4'($urandom); pe_valid = $urandom_range(0, 1); sc_valid = $urandom_range(0, 1);
      end
      for (int d = 0; d < 4; d++) in_data[d] = W'($urandom);
      pe_data = W'($urandom); sc_data = W'($urandom);
      model_step();
      @(posedge clk); #1;
      check(out_valid == m_ov, $sformatf("step %0d out_valid %b exp %b", s, out_valid, m_ov));
      check(out_data == m_out, $sformatf("step %0d out_data %h exp %h", s, out_data, m_out));
      check(int'(buf_count) == q.size(), $sformatf("step %0d buffer count %0d exp %0d", s, buf_count, q.size()));
      check(buf_overflow == m_ovf && buf_underflow == m_udf, "buffer flags");
    end
    $display("sums with buffer %0d pushes %0d pops %0d M-type %0d sends %0d", n_bufsum, n_push, n_pop, n_m, n_tx);
    check(n_bufsum > 0 && n_push > 0 && n_pop > 0 && n_m > 0 && n_tx > 0, "all mechanisms exercised");
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
