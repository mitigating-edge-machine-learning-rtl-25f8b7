// tb_mac_pe -- self-checking test of the multiply-accumulate PE.
// Drives random products into several partial-sum entries, including starts
// (first=1), preloads (ld=1) and idle cycles, and compares each entry against a
// model kept in the testbench.  Each update must be visible one cycle later.
module tb_mac_pe;
  import mensa_pkg::*;
  localparam int NACC = 4;

  logic clk = 0, rst_n = 0;
  logic en, first, ld;
  logic [1:0] sel, rsel;
  data_t w, a;
  acc_t ld_val, acc;
  int checks = 0, failures = 0;
  int model [NACC];

  mac_pe #(.NACC(NACC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; first = 0; ld = 0; sel = 0; rsel = 0; w = 0; a = 0; ld_val = 0;
    for (int i = 0; i < NACC; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      en     = ($urandom % 4) != 0;
      ld     = ($urandom % 16) == 0;
      first  = ($urandom % 8) == 0;
      sel    = 2'($urandom);
      w      = data_t'($urandom);
      a      = data_t'($urandom);
      ld_val = acc_t'($urandom);
      if (ld)       model[sel] = ld_val;
      else if (en)  model[sel] = first ? int'(w) * int'(a) : model[sel] + int'(w) * int'(a);
      @(negedge clk);
      en = 0; ld = 0;
      for (int i = 0; i < NACC; i++) begin
        rsel = 2'(i);
        #1;
        checks++;
        if (acc !== model[i]) begin
          failures++;
          if (failures < 10) $display("mismatch entry %0d: got %0d exp %0d", i, acc, model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
