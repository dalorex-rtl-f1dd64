// tb_dalorex_tile: one tile running SSSP on a graph it owns entirely.
//
// The tile is (0, 0) of a 2x2 grid and the chunk sizes are set so every
// vertex and edge index maps to it: all T2 and T3 messages leave through
// the router's T port and come straight back to the tile's own TSU. The
// link inputs are idle and the link credits are full; the bench checks that
// nothing is ever sent on a link. It loads a random 64-vertex graph through
// the host port (reads return data one cycle after the request),
// configures short queues, pushes the root into IQ1, waits until the tile
// is idle and compares every distance with Bellman-Ford computed here. It
// also checks that the PU clock enable is low while the tile is idle and
// that all four tasks ran. This bench is the test of the TSU and PU blocks
// as well, which have no meaning without the rest of the tile.
module tb_dalorex_tile;
  import dalorex_pkg::*;

  localparam int XW = 1, YW = 1, WORDS = 4096;
  localparam int NV = 64, MAXE = 320, NPC_L = 8, EPC_L = 10;
  localparam int A_DIST = 'h400, A_PTR = 'h500, A_EIDX = 'h800, A_EVAL = 'hC00, A_FRONT = 'h3F0;
  localparam int QB [6] = '{0, 16, 32, 128, 160, 176};
  localparam int QL [6] = '{8, 12, 64, 16, 3, 32};
  localparam int OQT2 = 8;

  logic clk = 0, rst_n = 0;
  logic [XW-1:0] my_x = '0;
  logic [YW-1:0] my_y = '0;
  logic host_we = 0, host_re = 0, host_cfg_we = 0;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  logic lo_valid [4], lo_ch [4];
  flit_t lo_data [4];
  logic [3:0] lo_free [4][NUM_CH];
  logic li_valid [4], li_ch [4];
  flit_t li_data [4];
  logic [3:0] li_free [4][NUM_CH];
  logic idle, pu_clk_en;

  always #5 clk = ~clk;

  dalorex_tile #(.WORDS(WORDS), .XW(XW), .YW(YW)) dut (.*);

  always_comb
    for (int p = 0; p < 4; p++) begin
      li_valid[p] = 1'b0; li_ch[p] = 1'b0; li_data[p] = '0;
      for (int c = 0; c < NUM_CH; c++) lo_free[p][c] = 4'd8;
    end

  int checks = 0, failures = 0;
  int rowptr [NV+1];
  int eidx [MAXE], eval [MAXE];
  logic [31:0] ref_dist [NV];
  int ne, link_flits = 0, gate_bad = 0, tasks [4];

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 4; p++) if (lo_valid[p]) link_flits++;
    if (idle && pu_clk_en) gate_bad++;
    if (dut.task_valid) tasks[dut.task_id]++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic hwrite(input bit cfg, input int addr, input logic [31:0] data);
    @(negedge clk);
    host_we = !cfg; host_cfg_we = cfg; host_addr = addr; host_wdata = data;
    @(negedge clk);
    host_we = 0; host_cfg_we = 0;
  endtask

  task automatic hread(input int addr, output logic [31:0] data);
    @(negedge clk);
    host_re = 1; host_addr = addr;
    @(posedge clk);
    #1 host_re = 0;
    data = host_rdata;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int root;
    logic [31:0] v;
    bit changed;
    for (int k = 0; k < 4; k++) tasks[k] = 0;
    ne = 0;
    for (int i = 0; i < NV; i++) begin
      int deg;
      rowptr[i] = ne;
      deg = (i % 13 == 3) ? 24 : int'($urandom_range(0, 4));
      if (ne + deg > MAXE) deg = MAXE - ne;
      for (int k = 0; k < deg; k++) begin
        eidx[ne] = int'($urandom_range(0, NV - 1));
        eval[ne] = int'($urandom_range(1, 30));
        ne++;
      end
    end
    rowptr[NV] = ne;
    root = int'($urandom_range(0, NV - 1));
    for (int i = 0; i < NV; i++) ref_dist[i] = '1;
    ref_dist[root] = 0;
    do begin
      changed = 0;
      for (int i = 0; i < NV; i++)
        if (ref_dist[i] != '1)
          for (int k = rowptr[i]; k < rowptr[i+1]; k++)
            if (ref_dist[i] + 32'(eval[k]) < ref_dist[eidx[k]]) begin
              ref_dist[eidx[k]] = ref_dist[i] + 32'(eval[k]);
              changed = 1;
            end
    end while (changed);

    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(idle && !pu_clk_en, "idle after reset");

    for (int q = 0; q < 6; q++) begin
      hwrite(1, CFG_Q_BASE + q, QB[q]);
      hwrite(1, CFG_Q_LEN + q, QL[q]);
    end
    hwrite(1, CFG_T_NEED + 0, 3);
    hwrite(1, CFG_T_NEED + 1, 2 * OQT2);
    hwrite(1, CFG_C_LOG2 + 0, EPC_L);
    hwrite(1, CFG_C_LOG2 + 1, NPC_L);
    hwrite(1, CFG_PU_DIST, A_DIST);
    hwrite(1, CFG_PU_PTR, A_PTR);
    hwrite(1, CFG_PU_EIDX, A_EIDX);
    hwrite(1, CFG_PU_EVAL, A_EVAL);
    hwrite(1, CFG_PU_FRONT, A_FRONT);
    hwrite(1, CFG_PU_EPCL, EPC_L);
    hwrite(1, CFG_PU_OQT2, OQT2);
    for (int b = 0; b < NV / 32; b++) hwrite(0, A_FRONT + b, 0);
    for (int i = 0; i < NV; i++) begin
      hwrite(0, A_DIST + i, (i == root) ? 32'd0 : '1);
      hwrite(0, A_PTR + i, rowptr[i]);
    end
    hwrite(0, A_PTR + NV, rowptr[NV]);
    for (int k = 0; k < ne; k++) begin
      hwrite(0, A_EIDX + k, eidx[k]);
      hwrite(0, A_EVAL + k, eval[k]);
    end
    hread(A_EVAL, v);
    check(ne == 0 || v == 32'(eval[0]), "host read returns data one cycle later");

    hwrite(1, CFG_Q_PUSH + 0, root);
    @(negedge clk);
    check(!idle, "busy after the root is pushed");
    begin
      int quiet;
      quiet = 0;
      while (quiet < 8) begin
        @(negedge clk);
        quiet = idle ? quiet + 1 : 0;
      end
    end

    for (int i = 0; i < NV; i++) begin
      hread(A_DIST + i, v);
      check(v == ref_dist[i], $sformatf("dist[%0d] = %0d, expected %0d", i, v, ref_dist[i]));
    end
    $display("tile: %0d edges, tasks %0d %0d %0d %0d", ne, tasks[0], tasks[1], tasks[2], tasks[3]);
    check(tasks[0] > 0 && tasks[1] > 0 && tasks[2] > 0 && tasks[3] > 0, "all four tasks ran");
    check(link_flits == 0, "no flit left the tile");
    check(gate_bad == 0, "PU clock off while idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
