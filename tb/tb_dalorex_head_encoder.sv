// tb_dalorex_head_encoder: random indices and chunk sizes on a 16x16 grid.
// The destination tile must be index / 2^chunk_log2 (x its low half, y
// its high half) and the head must carry it above the local index.
module tb_dalorex_head_encoder;
  logic [31:0] index, head;
  logic [4:0] chunk_log2;
  logic [3:0] dest_x, dest_y;
  int checks = 0, failures = 0;
  dalorex_head_encoder dut (.*);
  initial begin : watchdog
    #100000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] t, l;
      chunk_log2 = 5'($urandom_range(4, 24));
      index = $urandom & ((32'd256 << chunk_log2) - 1);
      #1;
      t = index >> chunk_log2;
      l = index - (t << chunk_log2);
      checks++;
      if (dest_x != t[3:0] || dest_y != t[7:4] || head != {t[7:0], l[23:0]}) begin
        failures++;
        $display("FAIL: index %h log2 %0d -> head %h x %0d y %0d", index, chunk_log2, head, dest_x, dest_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
