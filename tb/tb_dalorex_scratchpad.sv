// tb_dalorex_scratchpad: two-port scratchpad against an array model.
// Random reads and writes on both ports for 3000 cycles over a 256-word
// instance; checks the one-cycle read latency, read-before-write on the
// same port and that port A wins when both ports write one address.
module tb_dalorex_scratchpad;
  localparam int WORDS = 256, AW = 8;
  logic clk = 0;
  logic a_rd_en = 0, a_wr_en = 0, b_rd_en = 0, b_wr_en = 0;
  logic [AW-1:0] a_rd_addr = 0, a_wr_addr = 0, b_rd_addr = 0, b_wr_addr = 0;
  logic [31:0] a_rd_data, a_wr_data = 0, b_rd_data, b_wr_data = 0;
  logic [31:0] model [WORDS];
  logic [31:0] ea, eb;
  logic va, vb;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dalorex_scratchpad #(.WORDS(WORDS)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk); $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    // initialise every word through port B so every read is defined
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); b_wr_en = 1; b_wr_addr = AW'(i); b_wr_data = $urandom; model[i] = b_wr_data;
    end
    @(negedge clk); b_wr_en = 0;
    va = 0; vb = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (va) begin checks++; if (a_rd_data !== ea) begin failures++; $display("FAIL: port A read"); end end
      if (vb) begin checks++; if (b_rd_data !== eb) begin failures++; $display("FAIL: port B read"); end end
      a_rd_en = $urandom_range(0, 1); a_rd_addr = AW'($urandom_range(0, 15));
      b_rd_en = $urandom_range(0, 1); b_rd_addr = AW'($urandom_range(0, 15));
      a_wr_en = $urandom_range(0, 1); a_wr_addr = AW'($urandom_range(0, 15)); a_wr_data = $urandom;
      b_wr_en = $urandom_range(0, 1); b_wr_addr = AW'($urandom_range(0, 15)); b_wr_data = $urandom;
      va = a_rd_en; vb = b_rd_en;
      ea = model[a_rd_addr]; eb = model[b_rd_addr];
      if (b_wr_en) model[b_wr_addr] = b_wr_data;
      if (a_wr_en) model[a_wr_addr] = a_wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
