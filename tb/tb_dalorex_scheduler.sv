// tb_dalorex_scheduler: random queue occupancies against a reference of
// the priority rules: a task is ready when its IQ holds its parameters
// (at least one entry) and its OQ has oq_need free entries; a ready task
// whose IQ is at least 3/4 full wins (the larger IQ first), then one whose
// OQ is at most 1/4 full (the larger OQ first), otherwise the ready tasks
// take turns after the last one taken.
module tb_dalorex_scheduler;
  import dalorex_pkg::*;
  localparam int CW = 21;
  logic clk = 0, rst_n = 0, enable, take, valid;
  logic [CW-1:0] iq_count [4], iq_len [4], oq_count [4], oq_len [4], oq_need [4];
  logic [3:0] nparams [4];
  logic [1:0] task_id, level;
  int checks = 0, failures = 0, seen [3];
  int rr;
  always #5 clk = ~clk;
  dalorex_scheduler #(.CW(CW)) dut (.*);
  initial begin : watchdog
    repeat (100000) @(posedge clk); $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
  initial begin
    rr = 3; seen = '{0, 0, 0};
    enable = 0; take = 0;
    for (int t = 0; t < 4; t++) begin
      iq_count[t] = 0; iq_len[t] = 8; oq_count[t] = 0; oq_len[t] = 8; oq_need[t] = 1; nparams[t] = 0;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit rdy [4], hi [4], md [4];
      int ev, et, el, best;
      @(negedge clk);
      enable = $urandom_range(0, 9) != 0;
      for (int t = 0; t < 4; t++) begin
        iq_len[t]   = CW'($urandom_range(4, 64));
        iq_count[t] = CW'($urandom_range(0, iq_len[t]));
        oq_len[t]   = CW'($urandom_range(4, 64));
        oq_count[t] = CW'($urandom_range(0, oq_len[t]));
        oq_need[t]  = CW'($urandom_range(0, 3));
        nparams[t]  = 4'($urandom_range(0, 3));
      end
      take = $urandom_range(0, 1);
      #1;
      ev = 0; et = 0; el = 0;
      for (int t = 0; t < 4; t++) begin
        rdy[t] = enable && iq_count[t] >= ((nparams[t] == 0) ? 1 : nparams[t]) && oq_len[t] - oq_count[t] >= oq_need[t];
        hi[t]  = 4 * iq_count[t] >= 3 * iq_len[t];
        md[t]  = 4 * oq_count[t] <= oq_len[t];
      end
      best = -1;
      for (int t = 0; t < 4; t++) if (rdy[t] && hi[t] && (best < 0 || iq_len[t] > iq_len[best])) best = t;
      if (best >= 0) begin ev = 1; et = best; el = 2; end
      else begin
        for (int t = 0; t < 4; t++) if (rdy[t] && md[t] && (best < 0 || oq_len[t] > oq_len[best])) best = t;
        if (best >= 0) begin ev = 1; et = best; el = 1; end
        else for (int k = 1; k <= 4; k++) if (!ev && rdy[(rr + k) % 4]) begin ev = 1; et = (rr + k) % 4; el = 0; end
      end
      checks++;
      if (valid != ev || (ev && (task_id != 2'(et) || level != 2'(el)))) begin
        failures++;
        $display("FAIL: cycle %0d valid %0d task %0d level %0d, expected %0d %0d %0d", i, valid, task_id, level, ev, et, el);
      end
      if (ev) seen[el]++;
      if (take && valid) rr = task_id;
    end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0) begin failures++; $display("FAIL: a priority level never chosen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
