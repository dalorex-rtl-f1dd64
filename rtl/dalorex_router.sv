// dalorex_router: five-port wormhole router of the Dalorex 2D torus.
//
// Ports N, S, E, W lead to the four torus neighbours and T to the tile's
// TSU. Every input port has one FIFO per logical channel, so a clogged
// channel cannot block the other. Routing uses the payload only: the first
// flit of a message (the head) holds the destination tile in its upper bits,
// placed there by the head encoder, and the router compares it with its own
// X/Y. Routing is dimension ordered, X first, taking the shorter way round
// each ring (ties go E or S); a head addressed to this tile goes to T.
// A message opens a route (input, channel) -> (output, channel) with its
// head flit and keeps it until its fixed number of flits (the channel's
// chain length, ch_len) has passed, so flits of two messages never
// interleave on one output channel; different channels do interleave on an
// output link. Inputs competing for the same output channel are served
// round-robin, and the channels sharing an output link alternate.
// A flit crosses one router per cycle: the head is granted and forwarded in
// the same cycle, and it lands in the next router's input FIFO at the clock
// edge.
// Flow control is by credits: each link carries the number of free slots of
// the receiving FIFO per channel (in_free/out_free). A message moving on
// along the ring it is already in needs one free slot per flit; a message
// that enters a ring (injected from T, or turning from X to Y) must see room
// for two whole messages, leaving a bubble so the ring cannot fill up and
// deadlock. This is this design's reading of the paper's "local bubble
// routing"; the paper gives no further detail. The paper's shared pool of
// buffer slots per direction with software-set shares is simplified to a
// fixed BUF_DEPTH per channel.
module dalorex_router
  import dalorex_pkg::*;
#(
  parameter int unsigned XW        = 4,   // log2(grid width)
  parameter int unsigned YW        = 4,   // log2(grid height)
  parameter int unsigned BUF_DEPTH = 8,   // slots per input port per channel
  parameter int unsigned CRW       = 4    // width of a credit count
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [XW-1:0]         my_x,
  input  logic [YW-1:0]         my_y,
  input  logic [3:0]            ch_len   [NUM_CH],   // flits per message
  // inputs
  input  logic                  in_valid [NUM_PORTS],
  input  logic                  in_ch    [NUM_PORTS],
  input  flit_t                 in_data  [NUM_PORTS],
  output logic [CRW-1:0]        in_free  [NUM_PORTS][NUM_CH],
  // outputs
  output logic                  out_valid[NUM_PORTS],
  output logic                  out_ch   [NUM_PORTS],
  output flit_t                 out_data [NUM_PORTS],
  input  logic [CRW-1:0]        out_free [NUM_PORTS][NUM_CH],
  output logic                  idle
);

  localparam int unsigned P   = NUM_PORTS;
  localparam int unsigned C   = NUM_CH;
  localparam int unsigned TW  = XW + YW;
  localparam int unsigned FCW = $clog2(BUF_DEPTH + 1);

  // ---------------- input buffers ----------------
  flit_t          f_data [P][C];
  logic           f_empty[P][C];
  logic           f_pop  [P][C];
  logic [FCW-1:0] f_free [P][C];

  for (genvar i = 0; i < P; i++) begin : g_in
    for (genvar c = 0; c < C; c++) begin : g_ch
      dalorex_fifo #(.DEPTH(BUF_DEPTH), .DW(FLIT_W)) u_buf (
        .clk, .rst_n,
        .push   (in_valid[i] && (in_ch[i] == 1'(c))),
        .wr_data(in_data[i]),
        .pop    (f_pop[i][c]),
        .rd_data(f_data[i][c]),
        .empty  (f_empty[i][c]),
        .full   (),
        .count  (),
        .free   (f_free[i][c])
      );
      assign in_free[i][c] = CRW'(f_free[i][c]);
    end
  end

  // ---------------- route computation ----------------
  function automatic logic [2:0] route(input flit_t head);
    logic [XW-1:0] dx;
    logic [YW-1:0] dy;
    dx = head[FLIT_W-TW +: XW] - my_x;
    dy = head[FLIT_W-YW +: YW] - my_y;
    if (dx != '0)      route = (dx <= XW'(1 << (XW - 1))) ? PORT_E : PORT_W;
    else if (dy != '0) route = (dy <= YW'(1 << (YW - 1))) ? PORT_S : PORT_N;
    else               route = PORT_T;
  endfunction

  // An input port travelling straight on: flits that entered through W
  // move east, and so on.
  function automatic logic straight(input int i, input int o);
    return (o == int'(PORT_E) && i == int'(PORT_W)) || (o == int'(PORT_W) && i == int'(PORT_E)) ||
           (o == int'(PORT_S) && i == int'(PORT_N)) || (o == int'(PORT_N) && i == int'(PORT_S));
  endfunction

  // ---------------- state ----------------
  logic       act    [P][C];   // input channel has an open route
  logic [3:0] rem    [P][C];   // flits of its message still to send
  logic       own_v  [P][C];   // output channel is taken
  logic [2:0] own_i  [P][C];   // by this input
  logic [2:0] rr_in  [P][C];   // last input granted
  logic       rr_ch  [P];      // last channel sent

  // ---------------- allocation ----------------
  logic       req    [P][C];
  logic [2:0] req_o  [P][C];
  logic       gnt_v  [P][C];
  logic [2:0] gnt_i  [P][C];
  logic       eff_v  [P][C];
  logic [2:0] eff_i  [P][C];
  logic       ok     [P][C];
  logic       send_v [P];
  logic       send_c [P];

  // credit needed to open a route: one slot when going on along a ring or
  // leaving to T, two whole messages when entering a ring (the bubble)
  logic room [P][C][P];
  always_comb
    for (int o = 0; o < P; o++)
      for (int c = 0; c < C; c++)
        for (int i = 0; i < P; i++)
          room[o][c][i] = (o == int'(PORT_T) || straight(i, o)) ? (out_free[o][c] != '0)
                        : ({1'b0, out_free[o][c]} >= {ch_len[c], 1'b0});

  always_comb begin
    for (int i = 0; i < P; i++)
      for (int c = 0; c < C; c++) begin
        req[i][c]   = !f_empty[i][c] && !act[i][c];
        req_o[i][c] = route(f_data[i][c]);
      end

    for (int o = 0; o < P; o++)
      for (int c = 0; c < C; c++) begin
        gnt_v[o][c] = 1'b0;
        gnt_i[o][c] = '0;
        if (!own_v[o][c]) begin
          // round-robin: first the inputs after the last winner, then the rest
          for (int i = 0; i < P; i++)
            if (!gnt_v[o][c] && i > int'(rr_in[o][c]) && req[i][c] && req_o[i][c] == 3'(o) && room[o][c][i]) begin
              gnt_v[o][c] = 1'b1;
              gnt_i[o][c] = 3'(i);
            end
          for (int i = 0; i < P; i++)
            if (!gnt_v[o][c] && i <= int'(rr_in[o][c]) && req[i][c] && req_o[i][c] == 3'(o) && room[o][c][i]) begin
              gnt_v[o][c] = 1'b1;
              gnt_i[o][c] = 3'(i);
            end
        end
        eff_v[o][c] = own_v[o][c] || gnt_v[o][c];
        eff_i[o][c] = own_v[o][c] ? own_i[o][c] : gnt_i[o][c];
      end

    for (int o = 0; o < P; o++) begin
      for (int c = 0; c < C; c++)
        ok[o][c] = eff_v[o][c] && !f_empty[eff_i[o][c]][c] && out_free[o][c] != '0;
      send_v[o] = ok[o][0] || ok[o][1];
      // alternate between the two channels when both can send
      send_c[o] = (ok[o][0] && ok[o][1]) ? !rr_ch[o] : ok[o][1];
      out_valid[o] = send_v[o];
      out_ch[o]    = send_c[o];
      out_data[o]  = f_data[eff_i[o][send_c[o]]][send_c[o]];
    end

    for (int i = 0; i < P; i++)
      for (int c = 0; c < C; c++) begin
        f_pop[i][c] = 1'b0;
        for (int o = 0; o < P; o++)
          if (send_v[o] && send_c[o] == 1'(c) && eff_i[o][c] == 3'(i)) f_pop[i][c] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P; i++) begin
        rr_ch[i] <= 1'b0;
        for (int c = 0; c < C; c++) begin
          act[i][c]   <= 1'b0;
          rem[i][c]   <= '0;
          own_v[i][c] <= 1'b0;
          own_i[i][c] <= '0;
          rr_in[i][c] <= '0;
        end
      end
    end else begin
      for (int o = 0; o < P; o++)
        for (int c = 0; c < C; c++)
          if (gnt_v[o][c]) begin
            own_v[o][c] <= 1'b1;
            own_i[o][c] <= gnt_i[o][c];
            rr_in[o][c] <= gnt_i[o][c];
            act[gnt_i[o][c]][c] <= 1'b1;
            rem[gnt_i[o][c]][c] <= ch_len[c];
          end
      for (int o = 0; o < P; o++)
        if (send_v[o]) begin
          logic [3:0] left;
          logic [2:0] i;
          i    = eff_i[o][send_c[o]];
          left = (gnt_v[o][send_c[o]] ? ch_len[send_c[o]] : rem[i][send_c[o]]) - 1'b1;
          rr_ch[o] <= send_c[o];
          rem[i][send_c[o]] <= left;
          if (left == '0) begin
            own_v[o][send_c[o]] <= 1'b0;
            act[i][send_c[o]]   <= 1'b0;
          end
        end
    end
  end

  always_comb begin
    idle = 1'b1;
    for (int i = 0; i < P; i++)
      for (int c = 0; c < C; c++)
        if (!f_empty[i][c]) idle = 1'b0;
  end

  // A router never forwards more flits than the receiver has room for.
  for (genvar o = 0; o < P; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid[o] |-> out_free[o][out_ch[o]] != '0)
      else $error("dalorex_router: flit sent without credit");
  end

endmodule
