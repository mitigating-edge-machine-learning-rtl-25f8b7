// tb_param_fifo -- self-checking test of Pavlov's private parameter buffer.
// Random pushes and pops against a queue model; checks the head, count, the
// full flag at the paper's 512-entry capacity and the empty flag.
module tb_param_fifo;
  import mensa_pkg::*;
  localparam int DEPTH = 512;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  data_t din, head;
  logic [9:0] count;
  data_t q [$];
  int checks = 0, failures = 0;
  int saw_full = 0;

  param_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(int push_pct);
    @(negedge clk);
    push = (($urandom % 100) < push_pct) && !full;
    pop  = (($urandom % 100) < 100 - push_pct) && !empty;
    din  = data_t'($urandom);
    @(posedge clk);
    if (pop)  void'(q.pop_front());
    if (push) q.push_back(din);
    #1;
    checks++;
    if (count != 10'(q.size())) begin
      failures++;
      $display("count %0d exp %0d", count, q.size());
    end
    if (q.size() > 0) begin
      checks++;
      if (head !== q[0]) begin
        failures++;
        $display("head %0d exp %0d", head, q[0]);
      end
    end
    checks++;
    if (full != (q.size() == DEPTH) || empty != (q.size() == 0)) failures++;
    if (full) saw_full++;
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) step(80);   // fill up
    for (int i = 0; i < 1500; i++) step(20);   // drain
    for (int i = 0; i < 1500; i++) step(50);
    checks++;
    if (saw_full == 0) begin
      failures++;
      $display("buffer never reached its capacity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
