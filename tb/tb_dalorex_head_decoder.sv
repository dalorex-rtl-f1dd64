// tb_dalorex_head_decoder: random flits. A head must yield its tile field
// as dest_x/dest_y and its local index with the tile bits cleared; a body
// flit must pass unchanged.
module tb_dalorex_head_decoder;
  logic [31:0] flit, data;
  logic is_head;
  logic [3:0] dest_x, dest_y;
  int checks = 0, failures = 0;
  dalorex_head_decoder dut (.*);
  initial begin : watchdog
    #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      flit = $urandom; is_head = $urandom_range(0, 1);
      #1;
      checks++;
      if (dest_x != flit[27:24] || dest_y != flit[31:28] ||
          data != (is_head ? {8'h00, flit[23:0]} : flit)) begin
        failures++;
        $display("FAIL: flit %h head %0d -> %h", flit, is_head, data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
