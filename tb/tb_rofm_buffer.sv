// tb_rofm_buffer -- self-checking test of the Rofm data buffer queue.
// Random pushes and pops (also together, also into a full and from an
// empty queue) are compared with a reference queue; head, count, full,
// empty and the sticky overflow/underflow flags are checked every cycle.
module tb_rofm_buffer;
  localparam int W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [W-1:0] push_data, head;
  logic empty, full, overflow, underflow;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;

  rofm_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [W-1:0] model[$];
  bit exp_ovf = 0, exp_udf = 0;

  initial begin
    push = 0; pop = 0; push_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      push      = ($urandom_range(0, 99) < 55);
      pop       = ($urandom_range(0, 99) < 45);
      push_data = W'($urandom);
      // combinational head and flags before the edge
      check(empty == (model.size() == 0), "empty");
      check(full  == (model.size() == DEPTH), "full");
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      if (model.size() > 0) check(head == model[0], $sformatf("head %h vs %h", head, model[0]));
      check(overflow == exp_ovf && underflow == exp_udf, "sticky flags");
      @(posedge clk);
      begin
        bit did_pop;
        did_pop = pop && model.size() > 0;
        if (pop && model.size() == 0) exp_udf = 1;
        if (push && (model.size() < DEPTH || did_pop)) model.push_back(push_data);
        else if (push) exp_ovf = 1;
        if (did_pop) void'(model.pop_front());
      end
    end
    check(exp_ovf && exp_udf, "overflow and underflow both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
