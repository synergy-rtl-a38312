// tb_pe: runs a fast PE (LANES = TS) and a slow PE (LANES = 2) side by side.
//
// Each is wrapped in pe_env, which feeds it jobs of a 6x9 by 9x7 matrix
// product with tile size 4 and checks the results bit for bit, the padding,
// the page splitting, the double-buffer overlap and the kernel cycle count.
//
// Paper vs. choice: F-PE / S-PE widths follow the paper; TS is scaled from 32
// to 4 to keep the run short.  Interface: no ports; 10 ns clock.
module tb_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic fin_f, fin_s;
  int   chk_f, chk_s, fail_f, fail_s;
  int   wd_fail = 0;

  pe_env #(.TS(4), .LANES(4)) u_fast (.clk, .rst_n, .finished(fin_f), .checks(chk_f), .failures(fail_f));
  pe_env #(.TS(4), .LANES(2)) u_slow (.clk, .rst_n, .finished(fin_s), .checks(chk_s), .failures(fail_s));

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (fin_f && fin_s);
    $display("TB_RESULT checks=%0d failures=%0d", chk_f + chk_s, fail_f + fail_s);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_f + chk_s, fail_f + fail_s + 1);
    $finish;
  end
endmodule
