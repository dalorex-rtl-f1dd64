// dalorex_scheduler: the traffic-aware task picker inside the TSU.
//
// A task may be invoked only when its input queue (IQ) holds a whole
// invocation (its parameter count, or one entry for tasks that peek their
// IQ) and its output queue (OQ) has at least oq_need free entries, so that
// a task never blocks once it runs. Among the invokable tasks the queue
// occupancies decide, as the paper describes: a task whose IQ is nearly
// full has high priority, one whose OQ is nearly empty has medium
// priority, every other task low priority. Between two high (or two
// medium) tasks the one with the larger queue wins (IQ length for high, OQ
// length for medium); an equal size goes to the lower task number. Low
// priority tasks are served round-robin. "Nearly full" is taken here as at
// least 3/4 occupied and "nearly empty" as at most 1/4 occupied; the paper
// gives no thresholds. The choice is combinational; `take` tells the
// scheduler that the offered task was started, which advances the
// round-robin pointer at the clock edge.
module dalorex_scheduler
  import dalorex_pkg::*;
#(
  parameter int unsigned CW = 21   // width of queue counts and lengths
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,                 // PU free to take a task
  input  logic [CW-1:0]    iq_count [NUM_TASKS],
  input  logic [CW-1:0]    iq_len   [NUM_TASKS],
  input  logic [CW-1:0]    oq_count [NUM_TASKS],
  input  logic [CW-1:0]    oq_len   [NUM_TASKS],
  input  logic [CW-1:0]    oq_need  [NUM_TASKS],
  input  logic [3:0]       nparams  [NUM_TASKS],
  input  logic             take,
  output logic             valid,
  output logic [TID_W-1:0] task_id,
  output logic [1:0]       level                   // 2 high, 1 medium, 0 low
);

  logic             ready [NUM_TASKS];
  logic             high  [NUM_TASKS];
  logic             med   [NUM_TASKS];
  logic [TID_W-1:0] rr;

  always_comb begin
    logic             hv, mv, lv;
    logic [TID_W-1:0] ht, mt, lt;
    logic [CW-1:0]    hs, ms;
    for (int t = 0; t < NUM_TASKS; t++) begin
      logic [CW-1:0] need_in;
      need_in  = (nparams[t] == '0) ? CW'(1) : CW'(nparams[t]);
      ready[t] = enable && iq_count[t] >= need_in &&
                 (oq_len[t] - oq_count[t]) >= oq_need[t];
      high[t]  = {iq_count[t], 2'b00} >= ({1'b0, iq_len[t], 1'b0} + {2'b00, iq_len[t]});
      med[t]   = {oq_count[t], 2'b00} <= {2'b00, oq_len[t]};
    end
    hv = 1'b0; mv = 1'b0; lv = 1'b0;
    ht = '0;   mt = '0;   lt = '0;
    hs = '0;   ms = '0;
    for (int t = 0; t < NUM_TASKS; t++) begin
      if (ready[t] && high[t] && (!hv || iq_len[t] > hs)) begin
        hv = 1'b1; ht = TID_W'(t); hs = iq_len[t];
      end
      if (ready[t] && med[t] && (!mv || oq_len[t] > ms)) begin
        mv = 1'b1; mt = TID_W'(t); ms = oq_len[t];
      end
    end
    for (int k = 1; k <= NUM_TASKS; k++) begin
      logic [TID_W-1:0] t;
      t = rr + TID_W'(k);
      if (!lv && ready[t]) begin
        lv = 1'b1; lt = t;
      end
    end
    valid   = hv || mv || lv;
    task_id = hv ? ht : (mv ? mt : lt);
    level   = hv ? 2'd2 : (mv ? 2'd1 : 2'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             rr <= TID_W'(NUM_TASKS - 1);
    else if (take && valid) rr <= task_id;
  end

endmodule
