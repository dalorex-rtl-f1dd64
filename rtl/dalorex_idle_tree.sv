// dalorex_idle_tree: hierarchical, staged aggregation of the tiles' idle
// signals into the chip's done interrupt.
//
// The paper ends a Dalorex program when every tile is idle, found by a
// staged idle signal routed with the clock and reset, and then interrupts
// the host. Here stage one registers the AND of each row of tiles, stage two
// registers the AND of the row results, so every tile's idle is sampled in
// the same cycle and global_idle is that snapshot two cycles later. A
// snapshot can only be all-idle when no flit or task exists anywhere, since
// every flit sits in some queue or buffer that clears its tile's idle.
// done_irq pulses for one cycle when global_idle has been high for HOLD
// consecutive cycles after having been low, i.e. once per finished run;
// the stages reset to idle, so loading data after reset raises no interrupt. The
// row/column split and HOLD are this design's choices.
module dalorex_idle_tree #(
  parameter int unsigned W    = 16,
  parameter int unsigned H    = 16,
  parameter int unsigned HOLD = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tile_idle [H][W],
  output logic global_idle,
  output logic done_irq
);

  logic row_idle [H];
  logic [$clog2(HOLD+1)-1:0] run;
  logic armed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int y = 0; y < H; y++) row_idle[y] <= 1'b1;
      global_idle <= 1'b1;
      run         <= '0;
      armed       <= 1'b0;
      done_irq    <= 1'b0;
    end else begin
      for (int y = 0; y < H; y++) begin
        logic a;
        a = 1'b1;
        for (int x = 0; x < W; x++) a &= tile_idle[y][x];
        row_idle[y] <= a;
      end
      begin
        logic g;
        g = 1'b1;
        for (int y = 0; y < H; y++) g &= row_idle[y];
        global_idle <= g;
      end
      done_irq <= 1'b0;
      if (!global_idle) begin
        run   <= '0;
        armed <= 1'b1;
      end else if (armed) begin
        if (run == $bits(run)'(HOLD - 1)) begin
          done_irq <= 1'b1;
          armed    <= 1'b0;
          run      <= '0;
        end else begin
          run <= run + 1'b1;
        end
      end
    end
  end

endmodule
