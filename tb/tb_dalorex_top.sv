// tb_dalorex_top: end-to-end test of the Dalorex chip running SSSP.
//
// A 4x4 torus of tiles with 4096-word scratchpads runs single-source
// shortest paths on a random directed graph of 256 vertices. The bench
// builds the graph, splits it over the tiles the way the paper does (vertex
// v and its ptr/dist entries on tile v / 16, edge i and its edge_idx /
// edge_values entries on tile i / 64), loads every tile through the host
// port, configures queues, tasks, channels and the processing unit by
// broadcast, and starts the run by pushing the root vertex into IQ1 of its
// tile. It then waits for done_irq, reads every dist entry back and
// compares it with Bellman-Ford computed here. Queues are made short so the
// flow-control paths are used. Each mechanism is counted while the chip
// runs (the four task kinds, range splitting and early exits of T1 and T4,
// high and medium scheduler priority, network stalls, torus wrap-around
// hops, PU clock-gated cycles, the done interrupt); a mechanism that never
// happened counts as a failure.
module tb_dalorex_top;
  import dalorex_pkg::*;

  localparam int XW = 2, YW = 2, W = 4, H = 4, NT = 16;
  localparam int WORDS = 4096;
  localparam int NPC_L = 4, EPC_L = 6;
  localparam int NPC = 1 << NPC_L, EPC = 1 << EPC_L;
  localparam int NV = NT * NPC, MAXE = NT * EPC;
  localparam int A_DIST = 'h400, A_PTR = 'h500, A_EIDX = 'h800, A_EVAL = 'hC00, A_FRONT = 'h3F0;
  localparam int QB [6] = '{0, 16, 32, 128, 160, 176};
  localparam int QL [6] = '{8, 12, 64, 16, 3, 32};
  localparam int OQT2 = 8;

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0, host_cfg_we = 0, host_bcast = 0;
  logic [XW-1:0] host_x = 0;
  logic [YW-1:0] host_y = 0;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  logic global_idle, done_irq;

  always #5 clk = ~clk;

  dalorex_top #(.XW(XW), .YW(YW), .WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0;
  int rowptr [NV+1];
  int eidx [MAXE], eval [MAXE];
  logic [31:0] ref_dist [NV];
  int ne;

  // ---------------- mechanism counters ----------------
  int c_task [4], c_split, c_t1_exit, c_t4_exit, c_high, c_med, c_stall, c_wrap, c_gated, c_done;
  for (genvar t = 0; t < NT; t++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_row[t/W].g_col[t%W].u_tile.task_valid) begin
        c_task[dut.g_row[t/W].g_col[t%W].u_tile.task_id]++;
      end
      if (dut.g_row[t/W].g_col[t%W].u_tile.u_tsu.task_valid) begin
        if (dut.g_row[t/W].g_col[t%W].u_tile.u_tsu.sched_level == 2'd2) c_high++;
        if (dut.g_row[t/W].g_col[t%W].u_tile.u_tsu.sched_level == 2'd1) c_med++;
      end
      if (!dut.g_row[t/W].g_col[t%W].u_tile.pu_clk_en) c_gated++;
      if (dut.g_row[t/W].g_col[t%W].u_tile.pu_clk_en) begin
        // PU states: 8 = T1 sends its third flit, 9 = T1 finishes, 26 = T4 loop
        if (dut.g_row[t/W].g_col[t%W].u_tile.u_pu.st == 5'd8 &&
            dut.g_row[t/W].g_col[t%W].u_tile.u_pu.pend < dut.g_row[t/W].g_col[t%W].u_tile.u_pu.ne)
          c_split++;
        if (dut.g_row[t/W].g_col[t%W].u_tile.u_pu.st == 5'd9 &&
            dut.g_row[t/W].g_col[t%W].u_tile.u_pu.nb != dut.g_row[t/W].g_col[t%W].u_tile.u_pu.ne)
          c_t1_exit++;
        if (dut.g_row[t/W].g_col[t%W].u_tile.u_pu.st == 5'd26 &&
            dut.g_row[t/W].g_col[t%W].u_tile.u_pu.bits != 0 &&
            dut.g_row[t/W].g_col[t%W].u_tile.u_pu.q_count[0] >= dut.g_row[t/W].g_col[t%W].u_tile.u_pu.q_len[0])
          c_t4_exit++;
      end
      for (int i = 0; i < 5; i++)
        for (int c = 0; c < 2; c++)
          if (!dut.g_row[t/W].g_col[t%W].u_tile.u_router.f_empty[i][c] &&
              !dut.g_row[t/W].g_col[t%W].u_tile.u_router.f_pop[i][c])
            c_stall++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int y = 0; y < H; y++) begin
      if (dut.lo_valid[y][0][3])   c_wrap++;
      if (dut.lo_valid[y][W-1][2]) c_wrap++;
    end
    for (int x = 0; x < W; x++) begin
      if (dut.lo_valid[0][x][0])   c_wrap++;
      if (dut.lo_valid[H-1][x][1]) c_wrap++;
    end
    if (done_irq) c_done++;
  end

  // ---------------- host access ----------------
  task automatic hwrite(input bit cfg, input bit bc, input int t, input int addr, input logic [31:0] data);
    @(negedge clk);
    host_we = !cfg; host_cfg_we = cfg; host_bcast = bc;
    host_x = XW'(t % W); host_y = YW'(t / W);
    host_addr = addr; host_wdata = data;
    @(negedge clk);
    host_we = 0; host_cfg_we = 0; host_bcast = 0;
  endtask

  task automatic hread(input int t, input int addr, output logic [31:0] data);
    @(negedge clk);
    host_re = 1; host_x = XW'(t % W); host_y = YW'(t / W); host_addr = addr;
    @(negedge clk);
    host_re = 0;
    @(posedge clk);
    #1 data = host_rdata;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int root, t, rd_cycles, start;
    logic [31:0] v;
    bit changed;
    for (int k = 0; k < 4; k++) c_task[k] = 0;
    {c_split, c_t1_exit, c_t4_exit, c_high, c_med, c_stall, c_wrap, c_gated, c_done} = '0;

    // random graph: degree 0..7, a few hubs of degree 40 so ranges are split
    ne = 0;
    for (int i = 0; i < NV; i++) begin
      int deg;
      rowptr[i] = ne;
      deg = (i % 37 == 5) ? 40 : int'($urandom_range(0, 7));
      if (ne + deg > MAXE) deg = MAXE - ne;
      for (int k = 0; k < deg; k++) begin
        eidx[ne] = int'($urandom_range(0, NV - 1));
        eval[ne] = int'($urandom_range(1, 20));
        ne++;
      end
    end
    rowptr[NV] = ne;
    root = int'($urandom_range(0, NV - 1));
    $display("graph: %0d vertices, %0d edges, root %0d", NV, ne, root);

    // reference shortest paths
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

    // configuration, broadcast to all tiles
    for (int q = 0; q < 6; q++) begin
      hwrite(1, 1, 0, CFG_Q_BASE + q, QB[q]);
      hwrite(1, 1, 0, CFG_Q_LEN + q, QL[q]);
    end
    hwrite(1, 1, 0, CFG_T_NEED + 0, 3);
    hwrite(1, 1, 0, CFG_T_NEED + 1, 2 * OQT2);
    hwrite(1, 1, 0, CFG_T_NEED + 2, 1);
    hwrite(1, 1, 0, CFG_T_NEED + 3, 1);
    hwrite(1, 1, 0, CFG_C_LOG2 + 0, EPC_L);
    hwrite(1, 1, 0, CFG_C_LOG2 + 1, NPC_L);
    hwrite(1, 1, 0, CFG_PU_DIST, A_DIST);
    hwrite(1, 1, 0, CFG_PU_PTR, A_PTR);
    hwrite(1, 1, 0, CFG_PU_EIDX, A_EIDX);
    hwrite(1, 1, 0, CFG_PU_EVAL, A_EVAL);
    hwrite(1, 1, 0, CFG_PU_FRONT, A_FRONT);
    hwrite(1, 1, 0, CFG_PU_EPCL, EPC_L);
    hwrite(1, 1, 0, CFG_PU_OQT2, OQT2);
    hwrite(0, 1, 0, A_FRONT, 0);

    // data arrays, tile by tile
    for (int i = 0; i < NV; i++) begin
      hwrite(0, 0, i / NPC, A_DIST + i % NPC, (i == root) ? 32'd0 : '1);
      hwrite(0, 0, i / NPC, A_PTR + i % NPC, rowptr[i]);
    end
    for (t = 0; t < NT; t++) hwrite(0, 0, t, A_PTR + NPC, rowptr[(t + 1) * NPC]);
    for (int k = 0; k < ne; k++) begin
      hwrite(0, 0, k / EPC, A_EIDX + k % EPC, eidx[k]);
      hwrite(0, 0, k / EPC, A_EVAL + k % EPC, eval[k]);
    end

    // start: invoke T1 on the root
    start = $time;
    hwrite(1, 0, root / NPC, CFG_Q_PUSH + 0, root % NPC);
    @(posedge done_irq);
    rd_cycles = ($time - start) / 10;
    $display("run took %0d cycles", rd_cycles);
    check(global_idle, "chip idle at done_irq");

    for (int i = 0; i < NV; i++) begin
      hread(i / NPC, A_DIST + i % NPC, v);
      check(v == ref_dist[i], $sformatf("dist[%0d] = %0d, expected %0d", i, v, ref_dist[i]));
    end

    $display("tasks T1..T4: %0d %0d %0d %0d; range splits %0d; T1 early exits %0d; T4 early exits %0d",
             c_task[0], c_task[1], c_task[2], c_task[3], c_split, c_t1_exit, c_t4_exit);
    $display("high %0d, medium %0d, router stall cycles %0d, wrap hops %0d, gated PU cycles %0d, done %0d",
             c_high, c_med, c_stall, c_wrap, c_gated, c_done);
    check(c_task[0] > 0, "T1 ran");
    check(c_task[1] > 0, "T2 ran");
    check(c_task[2] > 0, "T3 ran");
    check(c_task[3] > 0, "T4 ran");
    check(c_split > 0, "T1 split an edge range");
    check(c_t1_exit > 0, "T1 stopped early on a full CQ1");
    check(c_t4_exit > 0, "T4 stopped early on a full IQ1");
    check(c_high > 0, "high-priority scheduling");
    check(c_med > 0, "medium-priority scheduling");
    check(c_stall > 0, "network flow-control stalls");
    check(c_wrap > 0, "torus wrap-around hops");
    check(c_gated > 0, "PU clock gated");
    check(c_done == 1, "one done interrupt");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
