// tb_dalorex_router: one router at (1, 2) of a 4x4 torus.
// Every input port sends random messages on both channels (three flits on
// channel 0, two on channel 1) to random tiles, respecting the credits the
// router returns. Every output feeds a model receiver that drains at a
// random rate and returns its free-slot count. The bench checks that each
// message leaves through the dimension-ordered, shortest-way port, that the
// flits of a message stay together and in order on their output channel,
// that no flit is sent without credit, that every flit arrives, and that a
// head crossing an empty router leaves in the cycle after it arrived (one
// cycle per hop).
module tb_dalorex_router;
  import dalorex_pkg::*;
  localparam int XW = 2, YW = 2, MX = 1, MY = 2, NMSG = 300;
  logic clk = 0, rst_n = 0;
  logic [1:0] my_x = 2'(MX);
  logic [1:0] my_y = 2'(MY);
  logic [3:0] ch_len [2];
  logic in_valid [5], in_ch [5];
  flit_t in_data [5];
  logic [3:0] in_free [5][2];
  logic out_valid [5], out_ch [5];
  flit_t out_data [5];
  logic [3:0] out_free [5][2];
  logic idle;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dalorex_router #(.XW(XW), .YW(YW)) dut (.*);

  flit_t src [5][2][$];        // flits still to inject, per input and channel
  flit_t body [flit_t][$];     // expected body flits per head
  int    occ [5][2];           // receiver occupancy
  int    left [5][2];          // body flits still due on an output channel
  flit_t cur [5][2];
  int    sent = 0, got = 0, serial = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk); $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic int exp_port(input flit_t h);
    int dx, dy;
    dx = (int'(h[29:28]) - MX + 4) % 4;
    dy = (int'(h[31:30]) - MY + 4) % 4;
    if (dx != 0) return (dx <= 2) ? int'(PORT_E) : int'(PORT_W);
    if (dy != 0) return (dy <= 2) ? int'(PORT_S) : int'(PORT_N);
    return int'(PORT_T);
  endfunction

  function automatic flit_t new_msg(input int i, input int c);
    flit_t h;
    int n;
    n = (c == 0) ? 3 : 2;
    serial++;
    h = {8'h00, 24'(serial)};
    h[29:28] = 2'($urandom_range(0, 3));
    h[31:30] = 2'($urandom_range(0, 3));
    src[i][c].push_back(h);
    for (int k = 1; k < n; k++) begin
      flit_t b;
      b = $urandom;
      src[i][c].push_back(b);
      body[h].push_back(b);
    end
    sent += n;
    return h;
  endfunction

  // model receivers: check each flit, drain at random
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o]) begin
        int c;
        c = int'(out_ch[o]);
        got++;
        check(occ[o][c] < 8, "flit sent without credit");
        occ[o][c]++;
        if (left[o][c] == 0) begin
          check(body.exists(out_data[o]), $sformatf("unknown head %h", out_data[o]));
          check(exp_port(out_data[o]) == o, $sformatf("head %h left on port %0d", out_data[o], o));
          cur[o][c]  = out_data[o];
          left[o][c] = (c == 0) ? 2 : 1;
        end else begin
          check(body[cur[o][c]].size() > 0 && out_data[o] == body[cur[o][c]][0],
                $sformatf("body flit %h out of order on port %0d ch %0d", out_data[o], o, c));
          if (body[cur[o][c]].size() > 0) void'(body[cur[o][c]].pop_front());
          left[o][c]--;
        end
      end
      for (int c = 0; c < 2; c++)
        if (occ[o][c] > 0 && $urandom_range(0, 99) < 45) occ[o][c]--;
    end
  end
  always_comb for (int o = 0; o < 5; o++) for (int c = 0; c < 2; c++) out_free[o][c] = 4'(8 - occ[o][c]);

  // senders: one flit per input per cycle, on a channel with credit
  always @(negedge clk) begin
    for (int i = 0; i < 5; i++) begin
      int c;
      in_valid[i] = 0; in_ch[i] = 0; in_data[i] = '0;
      c = $urandom_range(0, 1);
      if (src[i][c].size() == 0 || in_free[i][c] == 0) c = 1 - c;
      if (rst_n && src[i][c].size() != 0 && in_free[i][c] != 0 && $urandom_range(0, 99) < 60) begin
        in_valid[i] = 1; in_ch[i] = 1'(c); in_data[i] = src[i][c].pop_front();
      end
    end
  end

  initial begin
    flit_t h;
    ch_len[0] = 3; ch_len[1] = 2;
    for (int o = 0; o < 5; o++) for (int c = 0; c < 2; c++) begin occ[o][c] = 0; left[o][c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // latency: a single head through an idle router
    @(posedge clk);
    h = new_msg(0, 1);
    while (!in_valid[0]) @(posedge clk);   // the flit enters the input buffer at this edge
    #1;
    check(out_valid[exp_port(h)] && out_data[exp_port(h)] == h, "head leaves one cycle after arrival");
    repeat (20) @(posedge clk);
    for (int m = 0; m < NMSG; m++)
      for (int i = 0; i < 5; i++) void'(new_msg(i, $urandom_range(0, 1)));
    wait (got == sent && idle);
    repeat (5) @(posedge clk);
    check(got == sent, "all flits delivered");
    check(idle, "router idle at the end");
    $display("router: %0d flits delivered", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
