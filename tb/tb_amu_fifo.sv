// tb_amu_fifo: self-checking test of amu_fifo. Random pushes and pops (never into a full
// or out of an empty FIFO) are compared with a reference queue; the flags and the count
// are checked every cycle, including simultaneous push and pop while full.
module tb_amu_fifo;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, pop, full, empty;
  logic [15:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  amu_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .push_data(din), .pop,
                                                  .pop_data(dout), .full, .empty, .count);

  int checks = 0, failures = 0, both_when_full = 0;
  logic [15:0] ref_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(count == ref_q.size(), "count");
      check(empty == (ref_q.size() == 0), "empty");
      check(full == (ref_q.size() == DEPTH), "full");
      if (ref_q.size() > 0) check(dout == ref_q[0], "head data");
      // bias towards filling in the first half, draining in the second
      pop  = (ref_q.size() > 0) && ($urandom % 100 < (cyc % 600 < 300 ? 35 : 70));
      push = ((ref_q.size() < DEPTH) || pop) && ($urandom % 100 < (cyc % 600 < 300 ? 70 : 35));
      din  = 16'($urandom);
      if (push && pop && ref_q.size() == DEPTH) both_when_full++;
      @(posedge clk);
      if (pop) void'(ref_q.pop_front());
      if (push) ref_q.push_back(din);
    end
    check(both_when_full > 0, "push and pop while full happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
