// dalorex_tsu: Task Scheduling Unit of a Dalorex tile.
//
// The TSU sits between the router, the scratchpad and the processing unit
// (PU), following the paper's tile figure:
//  * Task Conf & Queue Status: per queue a base address, a length and the
//    head/tail pointers of a circular FIFO kept in the scratchpad; per task
//    its parameter count, its output queue and the free OQ space it needs.
//    The PU reads and writes queue entries itself at the head/tail
//    addresses the TSU exports, and reports each push or pop as a one-cycle
//    event; the TSU then moves the pointer (visible the next cycle).
//  * Channel Conf & Queue Status: per channel the chunk size used by the
//    head encoder (Edge or Node chunk), the chain length (flits per
//    message) and the input queue that receives the channel at the far end.
//  * InputQ push arbitration: flits arriving from the router wait in
//    per-channel Router-TSU buffers; one per cycle is written into its
//    target IQ through the TSU's scratchpad write port, alternating between
//    channels, the first flit of each message going through the head
//    decoder.
//  * OutputQ pop arbitration: one channel queue entry per cycle is read
//    through the TSU's scratchpad read port (one cycle latency) into the
//    outgoing Router-TSU buffer, the first flit of each message going
//    through the head encoder.
//  * Task control logic: dalorex_scheduler picks the next task; the TSU
//    hands it to the PU (task_valid pulse, task_id) and waits for
//    task_done. The PU clock enable is high only while a task is offered or
//    running, which stands in for the clock gate of the figure.
// The host reaches the scratchpad through the same TSU ports and the
// configuration registers through cfg_*. Reset loads the SSSP tables that
// the paper's figure prints (IQ lengths 32/128/2048/1024, CQ lengths
// 128/1024, parameter counts 0/3/2/0, chain lengths 3/2); the base
// addresses, chunk sizes and OQ needs are this design's defaults and are
// meant to be rewritten by the host. The task code address column of the
// figure is not kept: the PU here runs fixed task sequences.
module dalorex_tsu
  import dalorex_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 20,
  parameter int unsigned AW    = $clog2(WORDS),
  parameter int unsigned CW    = AW + 1,
  parameter int unsigned XW    = 4,
  parameter int unsigned YW    = 4,
  parameter int unsigned RXB   = 8,     // Router-TSU buffer slots per channel, inbound
  parameter int unsigned TXB   = 4,     // Router-TSU buffer slots per channel, outbound
  parameter int unsigned CRW   = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // host access
  input  logic             cfg_we,
  input  logic [7:0]       cfg_idx,
  input  logic [31:0]      cfg_wdata,
  input  logic             host_we,
  input  logic             host_re,
  input  logic [AW-1:0]    host_addr,
  input  logic [31:0]      host_wdata,
  // scratchpad port B
  output logic             b_rd_en,
  output logic [AW-1:0]    b_rd_addr,
  input  logic [31:0]      b_rd_data,
  output logic             b_wr_en,
  output logic [AW-1:0]    b_wr_addr,
  output logic [31:0]      b_wr_data,
  // processing unit
  output logic             task_valid,
  output logic [TID_W-1:0] task_id,
  input  logic             task_done,
  output logic [AW-1:0]    q_head_addr [NUM_Q],
  output logic [AW-1:0]    q_tail_addr [NUM_Q],
  output logic [CW-1:0]    q_count     [NUM_Q],
  output logic [CW-1:0]    q_len_o     [NUM_Q],
  input  logic             pu_push     [NUM_Q],
  input  logic             pu_pop      [NUM_Q],
  output logic             pu_clk_en,
  // router, T port
  output logic             tx_valid,
  output logic             tx_ch,
  output flit_t            tx_data,
  input  logic [CRW-1:0]   tx_free [NUM_CH],
  input  logic             rx_valid,
  input  logic             rx_ch,
  input  flit_t            rx_data,
  output logic [CRW-1:0]   rx_free [NUM_CH],
  output logic [3:0]       ch_len  [NUM_CH],
  // status
  output logic             idle,
  output logic [1:0]       sched_level
);

  // ---------------- configuration ----------------
  localparam int unsigned DEF_LEN [NUM_Q] = '{32, 128, 2048, 1024, 128, 1024};

  logic [AW-1:0]    q_base [NUM_Q];
  logic [CW-1:0]    q_len  [NUM_Q];
  logic [AW-1:0]    q_head [NUM_Q];
  logic [AW-1:0]    q_tail [NUM_Q];
  logic [3:0]       t_npar [NUM_TASKS];
  logic [QID_W-1:0] t_oq   [NUM_TASKS];
  logic [CW-1:0]    t_need [NUM_TASKS];
  logic [4:0]       c_log2 [NUM_CH];
  logic [3:0]       c_len  [NUM_CH];
  logic [QID_W-1:0] c_tgt  [NUM_CH];

  // ---------------- events ----------------
  logic net_push [NUM_Q];
  logic net_pop  [NUM_Q];
  logic host_push[NUM_Q];

  // ---------------- inbound path ----------------
  flit_t          rxf_data [NUM_CH];
  logic           rxf_empty[NUM_CH];
  logic           rxf_pop  [NUM_CH];
  logic [$clog2(RXB+1)-1:0] rxf_free[NUM_CH];
  logic [3:0]     rx_idx   [NUM_CH];
  logic           rx_rr;
  logic           rx_go;
  logic           rx_sel;
  logic           rx_ok    [NUM_CH];
  flit_t          rx_dec;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_rx
    dalorex_fifo #(.DEPTH(RXB), .DW(FLIT_W)) u_rxbuf (
      .clk, .rst_n,
      .push(rx_valid && rx_ch == 1'(c)), .wr_data(rx_data),
      .pop(rxf_pop[c]), .rd_data(rxf_data[c]),
      .empty(rxf_empty[c]), .full(), .count(), .free(rxf_free[c])
    );
    assign rx_free[c] = CRW'(rxf_free[c]);
  end

  dalorex_head_decoder #(.XW(XW), .YW(YW), .DW(FLIT_W)) u_dec (
    .flit(rxf_data[rx_sel]), .is_head(rx_idx[rx_sel] == '0),
    .data(rx_dec), .dest_x(), .dest_y()
  );

  // ---------------- outbound path ----------------
  flit_t          txf_data [NUM_CH];
  logic           txf_empty[NUM_CH];
  logic           txf_push [NUM_CH];
  logic           txf_pop  [NUM_CH];
  logic [$clog2(TXB+1)-1:0] txf_count[NUM_CH];
  logic [3:0]     tx_idx   [NUM_CH];
  logic           rd_v, rd_c;
  logic           rd_go, rd_sel, rd_rr;
  logic           rd_ok    [NUM_CH];
  logic           tx_ok    [NUM_CH];
  logic           tx_rr;
  flit_t          enc_head;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_tx
    dalorex_fifo #(.DEPTH(TXB), .DW(FLIT_W)) u_txbuf (
      .clk, .rst_n,
      .push(txf_push[c]), .wr_data((tx_idx[c] == '0) ? enc_head : b_rd_data),
      .pop(txf_pop[c]), .rd_data(txf_data[c]),
      .empty(txf_empty[c]), .full(), .count(txf_count[c]), .free()
    );
    assign txf_push[c] = rd_v && rd_c == 1'(c);
  end

  dalorex_head_encoder #(.XW(XW), .YW(YW), .DW(FLIT_W)) u_enc (
    .index(b_rd_data), .chunk_log2(c_log2[rd_c]),
    .head(enc_head), .dest_x(), .dest_y()
  );

  // ---------------- scheduler ----------------
  logic             pu_busy;
  logic             s_valid;
  logic [TID_W-1:0] s_task;
  logic [1:0]       s_level;
  logic [CW-1:0]    s_iq_count [NUM_TASKS];
  logic [CW-1:0]    s_iq_len   [NUM_TASKS];
  logic [CW-1:0]    s_oq_count [NUM_TASKS];
  logic [CW-1:0]    s_oq_len   [NUM_TASKS];

  always_comb
    for (int t = 0; t < NUM_TASKS; t++) begin
      s_iq_count[t] = q_count[t];
      s_iq_len[t]   = q_len[t];
      s_oq_count[t] = q_count[t_oq[t]];
      s_oq_len[t]   = q_len[t_oq[t]];
    end

  dalorex_scheduler #(.CW(CW)) u_sched (
    .clk, .rst_n,
    .enable  (!pu_busy && !task_valid),
    .iq_count(s_iq_count), .iq_len(s_iq_len),
    .oq_count(s_oq_count), .oq_len(s_oq_len),
    .oq_need (t_need), .nparams(t_npar),
    .take    (s_valid),
    .valid   (s_valid), .task_id(s_task), .level(s_level)
  );

  // ---------------- combinational control ----------------
  logic cfg_push;   // host pushes a word into a queue this cycle
  assign cfg_push = cfg_we && cfg_idx[7:3] == CFG_Q_PUSH[7:3] && cfg_idx[2:0] < 3'(NUM_Q);

  always_comb begin
    for (int q = 0; q < NUM_Q; q++) begin
      q_head_addr[q] = q_base[q] + q_head[q];
      q_tail_addr[q] = q_base[q] + q_tail[q];
      q_len_o[q]     = q_len[q];
      net_push[q]    = 1'b0;
      net_pop[q]     = 1'b0;
      host_push[q]   = cfg_we && cfg_idx == CFG_Q_PUSH + 8'(q);
    end
    for (int c = 0; c < NUM_CH; c++) begin
      ch_len[c]  = c_len[c];
      rxf_pop[c] = 1'b0;
      txf_pop[c] = 1'b0;
      rx_ok[c]   = !rxf_empty[c] && q_count[c_tgt[c]] < q_len[c_tgt[c]];
      rd_ok[c]   = q_count[Q_CQ1 + QID_W'(c)] != '0 &&
                   (32'(txf_count[c]) + 32'(rd_v && rd_c == 1'(c))) < TXB;
      tx_ok[c]   = !txf_empty[c] && tx_free[c] != '0;
    end

    // scratchpad write port: host first, then one inbound flit
    rx_sel    = (rx_ok[0] && rx_ok[1]) ? !rx_rr : rx_ok[1];
    rx_go     = (rx_ok[0] || rx_ok[1]) && !host_we && !cfg_push;
    b_wr_en   = 1'b0;
    b_wr_addr = '0;
    b_wr_data = '0;
    if (host_we) begin
      b_wr_en   = 1'b1;
      b_wr_addr = host_addr;
      b_wr_data = host_wdata;
    end else if (cfg_push) begin
      b_wr_en   = 1'b1;
      b_wr_addr = q_tail_addr[cfg_idx[2:0]];
      b_wr_data = cfg_wdata;
    end else if (rx_go) begin
      b_wr_en   = 1'b1;
      b_wr_addr = q_tail_addr[c_tgt[rx_sel]];
      b_wr_data = rx_dec;
      net_push[c_tgt[rx_sel]] = 1'b1;
      rxf_pop[rx_sel] = 1'b1;
    end

    // scratchpad read port: host first, then one channel queue entry
    rd_sel    = (rd_ok[0] && rd_ok[1]) ? !rd_rr : rd_ok[1];
    rd_go     = (rd_ok[0] || rd_ok[1]) && !host_re;
    b_rd_en   = 1'b0;
    b_rd_addr = '0;
    if (host_re) begin
      b_rd_en   = 1'b1;
      b_rd_addr = host_addr;
    end else if (rd_go) begin
      b_rd_en   = 1'b1;
      b_rd_addr = q_head_addr[Q_CQ1 + QID_W'(rd_sel)];
      net_pop[Q_CQ1 + QID_W'(rd_sel)] = 1'b1;
    end

    // outbound buffers to the router
    tx_valid = tx_ok[0] || tx_ok[1];
    tx_ch    = (tx_ok[0] && tx_ok[1]) ? !tx_rr : tx_ok[1];
    tx_data  = txf_data[tx_ch];
    if (tx_valid) txf_pop[tx_ch] = 1'b1;
  end

  // ---------------- registers ----------------
  function automatic logic [AW-1:0] wrap_inc(input logic [AW-1:0] p, input logic [CW-1:0] len);
    return (CW'(p) + 1'b1 == len) ? '0 : p + 1'b1;
  endfunction

  function automatic int unsigned def_base(input int unsigned q);
    int unsigned b = 0;
    for (int unsigned k = 0; k < q; k++) b += DEF_LEN[k];
    return b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NUM_Q; q++) begin
        q_base[q]  <= AW'(def_base(q));
        q_len[q]   <= CW'(DEF_LEN[q]);
        q_head[q]  <= '0;
        q_tail[q]  <= '0;
        q_count[q] <= '0;
      end
      t_npar <= '{4'd0, 4'd3, 4'd2, 4'd0};
      t_oq   <= '{Q_CQ1, Q_CQ2, Q_IQ4, Q_IQ1};
      t_need <= '{CW'(3), CW'(1024), CW'(1), CW'(1)};
      c_log2 <= '{5'd18, 5'd17};
      c_len  <= '{4'd3, 4'd2};
      c_tgt  <= '{Q_IQ2, Q_IQ3};
      for (int c = 0; c < NUM_CH; c++) begin
        rx_idx[c] <= '0;
        tx_idx[c] <= '0;
      end
      rx_rr       <= 1'b0;
      rd_rr       <= 1'b0;
      tx_rr       <= 1'b0;
      rd_v        <= 1'b0;
      rd_c        <= 1'b0;
      pu_busy     <= 1'b0;
      task_valid  <= 1'b0;
      task_id     <= '0;
      sched_level <= '0;
    end else begin
      // queue pointers
      for (int q = 0; q < NUM_Q; q++) begin
        logic push, pop;
        push = pu_push[q] || net_push[q] || host_push[q];
        pop  = pu_pop[q]  || net_pop[q];
        if (push) q_tail[q] <= wrap_inc(q_tail[q], q_len[q]);
        if (pop)  q_head[q] <= wrap_inc(q_head[q], q_len[q]);
        q_count[q] <= q_count[q] + CW'(push) - CW'(pop);
      end
      // configuration writes (a new base or length empties the queue)
      if (cfg_we) begin
        for (int q = 0; q < NUM_Q; q++) begin
          if (cfg_idx == CFG_Q_BASE + 8'(q) || cfg_idx == CFG_Q_LEN + 8'(q)) begin
            q_head[q]  <= '0;
            q_tail[q]  <= '0;
            q_count[q] <= '0;
          end
          if (cfg_idx == CFG_Q_BASE + 8'(q)) q_base[q] <= cfg_wdata[AW-1:0];
          if (cfg_idx == CFG_Q_LEN  + 8'(q)) q_len[q]  <= cfg_wdata[CW-1:0];
        end
        for (int t = 0; t < NUM_TASKS; t++) begin
          if (cfg_idx == CFG_T_NPAR + 8'(t)) t_npar[t] <= cfg_wdata[3:0];
          if (cfg_idx == CFG_T_OQ   + 8'(t)) t_oq[t]   <= cfg_wdata[QID_W-1:0];
          if (cfg_idx == CFG_T_NEED + 8'(t)) t_need[t] <= cfg_wdata[CW-1:0];
        end
        for (int c = 0; c < NUM_CH; c++) begin
          if (cfg_idx == CFG_C_LOG2 + 8'(c)) c_log2[c] <= cfg_wdata[4:0];
          if (cfg_idx == CFG_C_LEN  + 8'(c)) c_len[c]  <= cfg_wdata[3:0];
          if (cfg_idx == CFG_C_TGT  + 8'(c)) c_tgt[c]  <= cfg_wdata[QID_W-1:0];
        end
      end
      // inbound message framing
      if (rx_go) begin
        rx_rr <= rx_sel;
        rx_idx[rx_sel] <= (rx_idx[rx_sel] + 1'b1 == c_len[rx_sel]) ? '0 : rx_idx[rx_sel] + 1'b1;
      end
      // outbound read pipeline and framing
      rd_v <= rd_go && !host_re;
      if (rd_go && !host_re) begin
        rd_c  <= rd_sel;
        rd_rr <= rd_sel;
      end
      if (rd_v)
        tx_idx[rd_c] <= (tx_idx[rd_c] + 1'b1 == c_len[rd_c]) ? '0 : tx_idx[rd_c] + 1'b1;
      if (tx_valid) tx_rr <= tx_ch;
      // task hand-off
      task_valid <= 1'b0;
      if (s_valid) begin
        task_valid  <= 1'b1;
        task_id     <= s_task;
        sched_level <= s_level;
        pu_busy     <= 1'b1;
      end
      if (task_done) pu_busy <= 1'b0;
    end
  end

  assign pu_clk_en = pu_busy || task_valid;

  always_comb begin
    idle = !pu_busy && !task_valid && !rd_v;
    for (int q = 0; q < NUM_Q; q++) if (q_count[q] != '0) idle = 1'b0;
    for (int c = 0; c < NUM_CH; c++) if (!rxf_empty[c] || !txf_empty[c]) idle = 1'b0;
  end

  // A queue has one producer at a time, is never pushed when full and never
  // popped when empty.
  for (genvar q = 0; q < NUM_Q; q++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     32'(pu_push[q]) + 32'(net_push[q]) + 32'(host_push[q]) <= 1)
      else $error("dalorex_tsu: two pushes into queue %0d in one cycle", q);
    assert property (@(posedge clk) disable iff (!rst_n)
                     (pu_push[q] || net_push[q] || host_push[q]) |-> q_count[q] < q_len[q])
      else $error("dalorex_tsu: push into full queue %0d", q);
    assert property (@(posedge clk) disable iff (!rst_n)
                     (pu_pop[q] || net_pop[q]) |-> q_count[q] != '0)
      else $error("dalorex_tsu: pop from empty queue %0d", q);
  end

endmodule
