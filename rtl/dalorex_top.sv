// dalorex_top: a Dalorex chip, a W x H grid of tiles on a 2D torus.
//
// Every tile (dalorex_tile) holds an equal chunk of each data array in its
// own scratchpad and runs the tasks whose data it owns; tasks invoke each
// other only by sending messages over the network. Tile (x, y) links its E
// port to the W port of tile (x+1 mod W, y) and its S port to the N port of
// tile (x, y+1 mod H), so each row and each column is a ring (the paper's
// torus, chosen over a mesh for the 16x16 grid). The default is the paper's
// 16x16 grid with 4 MiB (2^20 32-bit words) per tile; widths and heights
// must be powers of two of at least 2, because the destination tile is a
// bit field of the head flit.
// Host interface: one access per cycle, addressed to tile (host_x, host_y)
// or, with host_bcast, to every tile at once (the paper broadcasts program
// and configuration). host_we writes a scratchpad word, host_cfg_we a
// configuration register (see dalorex_pkg), host_re reads a word, whose
// value is on host_rdata two cycles later. global_idle is the staged AND of
// all tiles' idle; done_irq is the host interrupt raised once the chip has
// gone idle after work. The host itself (a commodity CPU in the paper) is
// outside this design.
module dalorex_top
  import dalorex_pkg::*;
#(
  parameter int unsigned XW        = 4,          // log2(width):  16 tiles
  parameter int unsigned YW        = 4,          // log2(height): 16 tiles
  parameter int unsigned WORDS     = 1 << 20,    // 4 MiB per tile
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            host_we,
  input  logic            host_re,
  input  logic            host_cfg_we,
  input  logic            host_bcast,
  input  logic [XW-1:0]   host_x,
  input  logic [YW-1:0]   host_y,
  input  logic [31:0]     host_addr,
  input  logic [31:0]     host_wdata,
  output logic [31:0]     host_rdata,
  output logic            global_idle,
  output logic            done_irq
);

  localparam int unsigned W   = 1 << XW;
  localparam int unsigned H   = 1 << YW;
  localparam int unsigned CRW = 4;
  // link port numbers of a tile (same order as the router's N, S, E, W)
  localparam int PN = 0, PS = 1, PE = 2, PW = 3;

  logic           lo_valid [H][W][4];
  logic           lo_ch    [H][W][4];
  flit_t          lo_data  [H][W][4];
  logic [CRW-1:0] lo_free  [H][W][4][NUM_CH];
  logic           li_valid [H][W][4];
  logic           li_ch    [H][W][4];
  flit_t          li_data  [H][W][4];
  logic [CRW-1:0] li_free  [H][W][4][NUM_CH];
  logic           t_idle   [H][W];
  logic           t_clk_en [H][W];   // PU clock enables (observed by testbenches)
  logic [31:0]    t_rdata  [H][W];

  logic [XW-1:0]  rsel_x;
  logic [YW-1:0]  rsel_y;

  for (genvar y = 0; y < H; y++) begin : g_row
    for (genvar x = 0; x < W; x++) begin : g_col
      logic sel;
      assign sel = host_bcast || (host_x == XW'(x) && host_y == YW'(y));
      dalorex_tile #(.WORDS(WORDS), .XW(XW), .YW(YW), .BUF_DEPTH(BUF_DEPTH), .CRW(CRW)) u_tile (
        .clk, .rst_n,
        .my_x(XW'(x)), .my_y(YW'(y)),
        .host_we(host_we && sel), .host_re(host_re && sel), .host_cfg_we(host_cfg_we && sel),
        .host_addr, .host_wdata, .host_rdata(t_rdata[y][x]),
        .lo_valid(lo_valid[y][x]), .lo_ch(lo_ch[y][x]), .lo_data(lo_data[y][x]), .lo_free(lo_free[y][x]),
        .li_valid(li_valid[y][x]), .li_ch(li_ch[y][x]), .li_data(li_data[y][x]), .li_free(li_free[y][x]),
        .idle(t_idle[y][x]), .pu_clk_en(t_clk_en[y][x])
      );
    end
  end

  // torus wiring: port p of a tile faces port opp(p) of its neighbour
  for (genvar y = 0; y < H; y++) begin : g_wrow
    for (genvar x = 0; x < W; x++) begin : g_wcol
      localparam int XE = (x + 1) % W;
      localparam int XWW = (x + W - 1) % W;
      localparam int YS = (y + 1) % H;
      localparam int YN = (y + H - 1) % H;
      assign li_valid[y][x][PN] = lo_valid[YN][x][PS];
      assign li_ch   [y][x][PN] = lo_ch   [YN][x][PS];
      assign li_data [y][x][PN] = lo_data [YN][x][PS];
      assign li_valid[y][x][PS] = lo_valid[YS][x][PN];
      assign li_ch   [y][x][PS] = lo_ch   [YS][x][PN];
      assign li_data [y][x][PS] = lo_data [YS][x][PN];
      assign li_valid[y][x][PE] = lo_valid[y][XE][PW];
      assign li_ch   [y][x][PE] = lo_ch   [y][XE][PW];
      assign li_data [y][x][PE] = lo_data [y][XE][PW];
      assign li_valid[y][x][PW] = lo_valid[y][XWW][PE];
      assign li_ch   [y][x][PW] = lo_ch   [y][XWW][PE];
      assign li_data [y][x][PW] = lo_data [y][XWW][PE];
      for (genvar c = 0; c < NUM_CH; c++) begin : g_cr
        assign lo_free[y][x][PN][c] = li_free[YN][x][PS][c];
        assign lo_free[y][x][PS][c] = li_free[YS][x][PN][c];
        assign lo_free[y][x][PE][c] = li_free[y][XE][PW][c];
        assign lo_free[y][x][PW][c] = li_free[y][XWW][PE][c];
      end
    end
  end

  // host read-back: the addressed tile's port B data, one cycle after the read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_x     <= '0;
      rsel_y     <= '0;
      host_rdata <= '0;
    end else begin
      if (host_re) begin
        rsel_x <= host_x;
        rsel_y <= host_y;
      end
      host_rdata <= t_rdata[rsel_y][rsel_x];
    end
  end

  dalorex_idle_tree #(.W(W), .H(H)) u_idle (
    .clk, .rst_n, .tile_idle(t_idle), .global_idle, .done_irq
  );

endmodule
