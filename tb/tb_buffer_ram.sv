// tb_buffer_ram -- self-checking test of the on-chip buffer.
// Writes random words with random byte enables to a 4-byte-wide buffer, keeps a
// model of the contents, and reads every written address back, checking both the
// data and the one-cycle read latency (data must appear on the edge after re).
module tb_buffer_ram;
  localparam int WB = 4, DEPTH = 64;
  logic clk = 0;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [WB-1:0] wbe;
  logic [8*WB-1:0] wdata, rdata;
  logic [8*WB-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  buffer_ram #(.WORD_BYTES(WB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wbe = 0; wdata = 0;
    // initialise every word fully
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wbe = '1; wdata = $urandom; model[i] = wdata;
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we = 1; waddr = 6'($urandom); wbe = 4'($urandom); wdata = $urandom;
      for (int b = 0; b < WB; b++) if (wbe[b]) model[waddr][8*b +: 8] = wdata[8*b +: 8];
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      re = 1; raddr = 6'(i);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[i]) begin
        failures++;
        $display("addr %0d: got %h exp %h", i, rdata, model[i]);
      end
    end
    // read latency: changing raddr without a clock edge must not change rdata
    @(negedge clk);
    re = 1; raddr = 6'd1;
    @(posedge clk); #1;
    raddr = 6'd2; #1;
    checks++;
    if (rdata !== model[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
