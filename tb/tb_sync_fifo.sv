// tb_sync_fifo: random push/pop traffic against a queue model.
//
// An 8-entry FIFO is written and read with random valid/ready patterns.
// Every word read is compared with a SystemVerilog queue, and the
// full/empty flags and the fill count are checked every cycle.
//
// Paper vs. choice: the paper gives depth 128; the test uses depth 8 so that
// full and empty are reached often.  Timing: inputs change after the negedge.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [3:0]  count;
  logic [31:0] model [$];

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int pushes = 0, pops = 0, fulls = 0;
  bit do_push = 0, do_pop = 0;
  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phase 1: fill-heavy, phase 2: drain-heavy, phase 3: mixed
      @(negedge clk);
      check(count == 4'(model.size()), "count");
      check(in_ready == (model.size() < DEPTH), "full flag");
      check(out_valid == (model.size() > 0), "empty flag");
      if (out_valid) check(out_data == model[0], "data order");
      if (!in_valid || do_push) begin
        in_valid = ($urandom % 100) < ((cyc < 1000) ? 80 : (cyc < 2000) ? 20 : 50);
        in_data  = $urandom;
      end
      out_ready = ($urandom % 100) < ((cyc < 1000) ? 20 : (cyc < 2000) ? 80 : 50);
      #1;
      do_push = in_valid && in_ready;
      do_pop  = out_valid && out_ready;
      if (!in_ready) fulls++;
      @(posedge clk);
      if (do_push) begin model.push_back(in_data); pushes++; end
      if (do_pop) begin void'(model.pop_front()); pops++; end
    end
    check(fulls > 0, "FIFO became full at least once");
    $display("pushes=%0d pops=%0d full cycles=%0d", pushes, pops, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
