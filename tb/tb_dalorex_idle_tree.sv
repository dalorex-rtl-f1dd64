// tb_dalorex_idle_tree: 4x4 tiles. global_idle must equal the AND of the
// tile idles two cycles earlier, and done_irq must pulse exactly once,
// HOLD cycles after the chip goes idle following work, and never while
// tiles only flicker idle for less than HOLD cycles.
module tb_dalorex_idle_tree;
  localparam int W = 4, H = 4;
  logic clk = 0, rst_n = 0;
  logic tile_idle [H][W];
  logic global_idle, done_irq;
  logic hist [4];
  int checks = 0, failures = 0, irqs = 0;
  always #5 clk = ~clk;
  dalorex_idle_tree #(.W(W), .H(H), .HOLD(4)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk); $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  task automatic set_all(input logic v);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) tile_idle[y][x] = v;
  endtask
  function automatic logic all_idle();
    logic a = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) a &= tile_idle[y][x];
    return a;
  endfunction
  always @(posedge clk) if (rst_n && done_irq) irqs++;
  initial begin
    int t_idle;
    set_all(1);
    for (int k = 0; k < 4; k++) hist[k] = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    // random busy phase: at least one tile busy every cycle
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      checks++; if (global_idle !== hist[1]) begin failures++; $display("FAIL: global_idle cycle %0d", i); end
      set_all(1);
      tile_idle[$urandom_range(0, H-1)][$urandom_range(0, W-1)] = 0;
      if (i % 50 == 10) set_all(1);   // short all-idle glitch of one cycle
      hist[1] = hist[0]; hist[0] = all_idle();
    end
    checks++; if (irqs != 0) begin failures++; $display("FAIL: done_irq during work"); end
    @(negedge clk); set_all(1); t_idle = 0;
    while (!done_irq && t_idle < 20) begin @(negedge clk); t_idle++; end
    checks++; if (t_idle != 6) begin failures++; $display("FAIL: done_irq after %0d cycles, expected 6", t_idle); end
    repeat (20) @(negedge clk);
    checks++; if (irqs != 1) begin failures++; $display("FAIL: %0d done pulses", irqs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
