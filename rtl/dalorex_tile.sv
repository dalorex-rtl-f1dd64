// dalorex_tile: one Dalorex processing tile.
//
// A tile is the scratchpad SRAM, the processing unit (PU), the task
// scheduling unit (TSU) and a five-port router, wired as in the paper's tile
// figure. The PU owns scratchpad port A (data arrays and queue entries), the
// TSU owns port B (moving flits between the router and the queues). The
// router's T port is the TSU; N, S, E, W are the four link ports of the tile
// (index 0..3 in that order). A link is valid/channel/data in the direction
// of travel plus a per-channel free-slot count travelling back.
// The host reaches the tile through host_*: host_we writes a scratchpad
// word, host_re reads one (data on host_rdata one cycle later) and
// host_cfg_we writes the TSU or PU configuration register numbered by
// host_addr[7:0]. The host is expected to use these only while the tile is
// idle, except for queue pushes, which inject task invocations.
// idle is high when every queue, buffer and the PU are empty; the top-level
// idle tree combines it across the chip. pu_clk_en is the PU clock gate.
module dalorex_tile
  import dalorex_pkg::*;
#(
  parameter int unsigned WORDS     = 1 << 20,
  parameter int unsigned XW        = 4,
  parameter int unsigned YW        = 4,
  parameter int unsigned BUF_DEPTH = 8,
  parameter int unsigned CRW       = 4,
  parameter int unsigned AW        = $clog2(WORDS),
  parameter int unsigned CW        = AW + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [XW-1:0]   my_x,
  input  logic [YW-1:0]   my_y,
  // host
  input  logic            host_we,
  input  logic            host_re,
  input  logic            host_cfg_we,
  input  logic [31:0]     host_addr,
  input  logic [31:0]     host_wdata,
  output logic [31:0]     host_rdata,
  // links N, S, E, W
  output logic            lo_valid [4],
  output logic            lo_ch    [4],
  output flit_t           lo_data  [4],
  input  logic [CRW-1:0]  lo_free  [4][NUM_CH],
  input  logic            li_valid [4],
  input  logic            li_ch    [4],
  input  flit_t           li_data  [4],
  output logic [CRW-1:0]  li_free  [4][NUM_CH],
  // status
  output logic            idle,
  output logic            pu_clk_en
);

  // scratchpad wiring
  logic          a_rd_en, a_wr_en, b_rd_en, b_wr_en;
  logic [AW-1:0] a_rd_addr, a_wr_addr, b_rd_addr, b_wr_addr;
  logic [31:0]   a_rd_data, a_wr_data, b_rd_data, b_wr_data;

  // PU <-> TSU
  logic             task_valid, task_done, pu_busy;
  logic [TID_W-1:0] task_id;
  logic [AW-1:0]    q_head_addr [NUM_Q];
  logic [AW-1:0]    q_tail_addr [NUM_Q];
  logic [CW-1:0]    q_count     [NUM_Q];
  logic [CW-1:0]    q_len       [NUM_Q];
  logic             pu_push     [NUM_Q];
  logic             pu_pop      [NUM_Q];

  // router <-> TSU
  logic            tx_valid, tx_ch, rx_valid, rx_ch;
  flit_t           tx_data, rx_data;
  logic [CRW-1:0]  tx_free [NUM_CH];
  logic [CRW-1:0]  rx_free [NUM_CH];
  logic [3:0]      ch_len  [NUM_CH];
  logic            tsu_idle, rt_idle;
  logic [1:0]      sched_level;

  // router port arrays
  logic           r_in_valid [NUM_PORTS];
  logic           r_in_ch    [NUM_PORTS];
  flit_t          r_in_data  [NUM_PORTS];
  logic [CRW-1:0] r_in_free  [NUM_PORTS][NUM_CH];
  logic           r_out_valid[NUM_PORTS];
  logic           r_out_ch   [NUM_PORTS];
  flit_t          r_out_data [NUM_PORTS];
  logic [CRW-1:0] r_out_free [NUM_PORTS][NUM_CH];

  dalorex_scratchpad #(.WORDS(WORDS)) u_spm (
    .clk,
    .a_rd_en, .a_rd_addr, .a_rd_data, .a_wr_en, .a_wr_addr, .a_wr_data,
    .b_rd_en, .b_rd_addr, .b_rd_data, .b_wr_en, .b_wr_addr, .b_wr_data
  );

  dalorex_pu #(.WORDS(WORDS)) u_pu (
    .clk, .rst_n, .clk_en(pu_clk_en),
    .cfg_we(host_cfg_we), .cfg_idx(host_addr[7:0]), .cfg_wdata(host_wdata),
    .task_valid, .task_id, .task_done, .busy(pu_busy),
    .q_head_addr, .q_tail_addr, .q_count, .q_len,
    .q_push(pu_push), .q_pop(pu_pop),
    .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(a_rd_data),
    .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data)
  );

  dalorex_tsu #(.WORDS(WORDS), .XW(XW), .YW(YW), .CRW(CRW)) u_tsu (
    .clk, .rst_n,
    .cfg_we(host_cfg_we), .cfg_idx(host_addr[7:0]), .cfg_wdata(host_wdata),
    .host_we, .host_re, .host_addr(host_addr[AW-1:0]), .host_wdata,
    .b_rd_en, .b_rd_addr, .b_rd_data, .b_wr_en, .b_wr_addr, .b_wr_data,
    .task_valid, .task_id, .task_done,
    .q_head_addr, .q_tail_addr, .q_count, .q_len_o(q_len),
    .pu_push, .pu_pop, .pu_clk_en,
    .tx_valid, .tx_ch, .tx_data, .tx_free,
    .rx_valid, .rx_ch, .rx_data, .rx_free,
    .ch_len, .idle(tsu_idle), .sched_level
  );

  // router inputs: links in, TSU injection, credits of the receivers
  always_comb begin
    for (int p = 0; p < 4; p++) begin
      r_in_valid[p] = li_valid[p];
      r_in_ch[p]    = li_ch[p];
      r_in_data[p]  = li_data[p];
      for (int c = 0; c < NUM_CH; c++) r_out_free[p][c] = lo_free[p][c];
    end
    r_in_valid[PORT_T] = tx_valid;
    r_in_ch[PORT_T]    = tx_ch;
    r_in_data[PORT_T]  = tx_data;
    for (int c = 0; c < NUM_CH; c++) r_out_free[PORT_T][c] = rx_free[c];
  end

  // router outputs: links out, ejection to the TSU, own credits
  always_comb begin
    for (int p = 0; p < 4; p++) begin
      lo_valid[p] = r_out_valid[p];
      lo_ch[p]    = r_out_ch[p];
      lo_data[p]  = r_out_data[p];
      for (int c = 0; c < NUM_CH; c++) li_free[p][c] = r_in_free[p][c];
    end
    rx_valid = r_out_valid[PORT_T];
    rx_ch    = r_out_ch[PORT_T];
    rx_data  = r_out_data[PORT_T];
    for (int c = 0; c < NUM_CH; c++) tx_free[c] = r_in_free[PORT_T][c];
  end

  dalorex_router #(.XW(XW), .YW(YW), .BUF_DEPTH(BUF_DEPTH), .CRW(CRW)) u_router (
    .clk, .rst_n, .my_x, .my_y, .ch_len,
    .in_valid(r_in_valid), .in_ch(r_in_ch), .in_data(r_in_data), .in_free(r_in_free),
    .out_valid(r_out_valid), .out_ch(r_out_ch), .out_data(r_out_data), .out_free(r_out_free),
    .idle(rt_idle)
  );

  assign host_rdata = b_rd_data;
  assign idle       = tsu_idle && rt_idle && !pu_busy;

endmodule
