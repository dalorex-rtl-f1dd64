// tb_dalorex_fifo: random push/pop traffic against a queue model.
// Checks head data, empty, full, count and free every cycle for 4000
// cycles, with pushes only when not full and pops only when not empty.
module tb_dalorex_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  logic [31:0] wr_data = 0, rd_data;
  logic [3:0] count, free;
  int checks = 0, failures = 0;
  logic [31:0] model [$];
  always #5 clk = ~clk;
  dalorex_fifo #(.DEPTH(D)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk); $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(empty == (model.size() == 0) && full == (model.size() == D) &&
            count == 4'(model.size()) && free == 4'(D - model.size()), "flags");
      if (model.size() != 0) check(rd_data == model[0], "head data");
      push = !full && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 35));
      pop  = !empty && ($urandom_range(0, 99) < 50);
      wr_data = $urandom;
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
