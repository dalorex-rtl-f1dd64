// dalorex_pu: processing unit of a Dalorex tile, running the four SSSP tasks.
//
// In the paper the PU is a small single-issue in-order core without caches
// that executes task code stored in the scratchpad; its instruction set is
// not given. This module replaces the core by a fixed sequencer that
// performs exactly the task bodies of the paper's SSSP listing, so the rest
// of the tile (TSU, queues, network) can be exercised as the paper
// describes:
//   T1 (IQ1 -> CQ1): peek vertex v, read ptr[v], ptr[v+1] and dist[v]; send
//       {global edge begin, local edge end, dist} messages, splitting the
//       edge range at chunk borders and at OQT2 edges; stop early when CQ1
//       cannot take a whole message, keeping the progress in neighbor_begin;
//       pop v only when its whole range is sent.
//   T2 (IQ2 -> CQ2): pop {begin, end, dist}; for every local edge i send
//       {edge_idx[i], edge_values[i] + dist}.
//   T3 (IQ3 -> IQ4): pop {n, new_dist}; if new_dist < dist[n], store it and
//       set bit n of the frontier bitmap; a block of 32 vertices that
//       becomes non-empty is counted and its id pushed into IQ4.
//   T4 (IQ4 -> IQ1): peek a block id, push its set vertices (highest bit
//       first) into IQ1 while IQ1 has room, clear them in the bitmap, and pop
//       the block when it is empty.
// The PU reaches queues the way the paper's queue-specific registers do:
// the TSU supplies the head and tail addresses, the PU reads or writes the
// scratchpad there and raises q_pop/q_push for one cycle. It uses scratchpad
// port A: one synchronous read (data the next cycle) and one write per
// cycle. All state advances only while clk_en is high (the TSU's clock
// gate). A task starts on a task_valid pulse and ends with a task_done
// pulse. Array bases, log2(EDGES_PER_CHUNK) and OQT2 are host-written
// registers. blocks_in_frontier, t1_new_vertex and neighbor_begin, which
// the listing keeps in memory, are registers here. Choices of this design:
// T4 writes the bits it did not yet push back into the bitmap (the listing
// leaves this implicit), and the local end index sent by T1 is
// partial_end minus the chunk base, so a range that ends at a chunk border
// ends at EDGES_PER_CHUNK rather than 0.
module dalorex_pu
  import dalorex_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 20,
  parameter int unsigned AW    = $clog2(WORDS),
  parameter int unsigned CW    = AW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clk_en,
  // configuration
  input  logic             cfg_we,
  input  logic [7:0]       cfg_idx,
  input  logic [31:0]      cfg_wdata,
  // task hand-off
  input  logic             task_valid,
  input  logic [TID_W-1:0] task_id,
  output logic             task_done,
  output logic             busy,
  // queue registers
  input  logic [AW-1:0]    q_head_addr [NUM_Q],
  input  logic [AW-1:0]    q_tail_addr [NUM_Q],
  input  logic [CW-1:0]    q_count     [NUM_Q],
  input  logic [CW-1:0]    q_len       [NUM_Q],
  output logic             q_push      [NUM_Q],
  output logic             q_pop       [NUM_Q],
  // scratchpad port A
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr,
  input  logic [31:0]      rd_data,
  output logic             wr_en,
  output logic [AW-1:0]    wr_addr,
  output logic [31:0]      wr_data
);

  typedef enum logic [4:0] {
    S_IDLE,
    S_T1_PEEK, S_T1_V, S_T1_BEG, S_T1_END, S_T1_DIST, S_T1_LOOP, S_T1_S1, S_T1_S2, S_T1_FIN,
    S_T2_P0, S_T2_P1, S_T2_P2, S_T2_P3, S_T2_LOOP, S_T2_E1, S_T2_E2,
    S_T3_P0, S_T3_P1, S_T3_P2, S_T3_CMP, S_T3_FR, S_T3_PUSH,
    S_T4_START, S_T4_BLK, S_T4_BITS, S_T4_LOOP, S_T4_NEXT,
    S_DONE
  } state_e;

  // configuration registers
  logic [AW-1:0] dist_base, ptr_base, eidx_base, eval_base, front_base;
  logic [4:0]    epcl;
  logic [31:0]   oqt2;

  // task state
  state_e        st, st_n;
  logic [31:0]   vid, nb, ne, vdist, pend, tbase;
  logic [31:0]   b, e, d, n, nd, fb, bits;
  logic          new_vertex;
  logic [31:0]   blocks;

  logic [31:0]   vid_n, nb_n, ne_n, vdist_n, pend_n, tbase_n;
  logic [31:0]   b_n, e_n, d_n, n_n, nd_n, fb_n, bits_n;
  logic          new_vertex_n;
  logic [31:0]   blocks_n;

  function automatic logic [4:0] msb(input logic [31:0] x);
    msb = '0;
    for (int k = 0; k < 32; k++) if (x[k]) msb = 5'(k);
  endfunction

  function automatic logic [31:0] min2(input logic [31:0] x, input logic [31:0] y);
    return (x < y) ? x : y;
  endfunction

  function automatic logic [AW-1:0] at(input logic [AW-1:0] base, input logic [31:0] idx);
    return base + idx[AW-1:0];
  endfunction

  always_comb begin
    logic        iq1_full;
    logic        cq1_room;
    logic [31:0] cend;
    logic [4:0]  k;

    st_n = st;
    vid_n = vid; nb_n = nb; ne_n = ne; vdist_n = vdist; pend_n = pend; tbase_n = tbase;
    b_n = b; e_n = e; d_n = d; n_n = n; nd_n = nd; fb_n = fb; bits_n = bits;
    new_vertex_n = new_vertex; blocks_n = blocks;

    rd_en = 1'b0; rd_addr = '0;
    wr_en = 1'b0; wr_addr = '0; wr_data = '0;
    for (int q = 0; q < NUM_Q; q++) begin
      q_push[q] = 1'b0;
      q_pop[q]  = 1'b0;
    end
    task_done = 1'b0;

    iq1_full = q_count[Q_IQ1] >= q_len[Q_IQ1];
    cq1_room = (q_len[Q_CQ1] - q_count[Q_CQ1]) >= CW'(3);
    cend     = '0;
    k        = msb(bits);

    unique case (st)
      S_IDLE:
        if (task_valid)
          unique case (task_id)
            T1: st_n = S_T1_PEEK;
            T2: st_n = S_T2_P0;
            T3: st_n = S_T3_P0;
            default: st_n = S_T4_START;
          endcase

      // ---------------- T1: explore a vertex ----------------
      S_T1_PEEK: begin
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ1];
        st_n = S_T1_V;
      end
      S_T1_V: begin
        vid_n = rd_data;
        rd_en = 1'b1;
        if (new_vertex) begin
          rd_addr = at(ptr_base, rd_data);
          st_n = S_T1_BEG;
        end else begin
          rd_addr = at(ptr_base, rd_data + 1);
          st_n = S_T1_END;
        end
      end
      S_T1_BEG: begin
        nb_n = rd_data;
        rd_en = 1'b1; rd_addr = at(ptr_base, vid + 1);
        st_n = S_T1_END;
      end
      S_T1_END: begin
        ne_n = rd_data;
        rd_en = 1'b1; rd_addr = at(dist_base, vid);
        st_n = S_T1_DIST;
      end
      S_T1_DIST: begin
        vdist_n = rd_data;
        st_n = S_T1_LOOP;
      end
      S_T1_LOOP: begin
        if (cq1_room && nb < ne) begin
          tbase_n = (nb >> epcl) << epcl;
          cend    = tbase_n + (32'd1 << epcl);
          pend_n  = min2(min2(ne, cend), nb + oqt2);
          wr_en = 1'b1; wr_addr = q_tail_addr[Q_CQ1]; wr_data = nb;
          q_push[Q_CQ1] = 1'b1;
          st_n = S_T1_S1;
        end else begin
          st_n = S_T1_FIN;
        end
      end
      S_T1_S1: begin
        wr_en = 1'b1; wr_addr = q_tail_addr[Q_CQ1]; wr_data = pend - tbase;
        q_push[Q_CQ1] = 1'b1;
        st_n = S_T1_S2;
      end
      S_T1_S2: begin
        wr_en = 1'b1; wr_addr = q_tail_addr[Q_CQ1]; wr_data = vdist;
        q_push[Q_CQ1] = 1'b1;
        nb_n = pend;
        st_n = S_T1_LOOP;
      end
      S_T1_FIN: begin
        new_vertex_n = (nb == ne);
        if (nb == ne) q_pop[Q_IQ1] = 1'b1;
        st_n = S_DONE;
      end

      // ---------------- T2: scan a local edge range ----------------
      S_T2_P0: begin
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ2]; q_pop[Q_IQ2] = 1'b1;
        st_n = S_T2_P1;
      end
      S_T2_P1: begin
        b_n = rd_data;
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ2]; q_pop[Q_IQ2] = 1'b1;
        st_n = S_T2_P2;
      end
      S_T2_P2: begin
        e_n = rd_data;
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ2]; q_pop[Q_IQ2] = 1'b1;
        st_n = S_T2_P3;
      end
      S_T2_P3: begin
        d_n = rd_data;
        st_n = S_T2_LOOP;
      end
      S_T2_LOOP: begin
        if (b < e) begin
          rd_en = 1'b1; rd_addr = at(eidx_base, b);
          st_n = S_T2_E1;
        end else begin
          st_n = S_DONE;
        end
      end
      S_T2_E1: begin
        wr_en = 1'b1; wr_addr = q_tail_addr[Q_CQ2]; wr_data = rd_data;
        q_push[Q_CQ2] = 1'b1;
        rd_en = 1'b1; rd_addr = at(eval_base, b);
        st_n = S_T2_E2;
      end
      S_T2_E2: begin
        wr_en = 1'b1; wr_addr = q_tail_addr[Q_CQ2]; wr_data = rd_data + d;
        q_push[Q_CQ2] = 1'b1;
        b_n = b + 1;
        st_n = S_T2_LOOP;
      end

      // ---------------- T3: relax a vertex ----------------
      S_T3_P0: begin
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ3]; q_pop[Q_IQ3] = 1'b1;
        st_n = S_T3_P1;
      end
      S_T3_P1: begin
        n_n = rd_data;
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ3]; q_pop[Q_IQ3] = 1'b1;
        st_n = S_T3_P2;
      end
      S_T3_P2: begin
        nd_n = rd_data;
        rd_en = 1'b1; rd_addr = at(dist_base, n);
        st_n = S_T3_CMP;
      end
      S_T3_CMP: begin
        if (nd < rd_data) begin
          wr_en = 1'b1; wr_addr = at(dist_base, n); wr_data = nd;
          rd_en = 1'b1; rd_addr = at(front_base, n >> 5);
          st_n = S_T3_FR;
        end else begin
          st_n = S_DONE;
        end
      end
      S_T3_FR: begin
        wr_en = 1'b1; wr_addr = at(front_base, n >> 5);
        wr_data = rd_data | (32'd1 << n[4:0]);
        if (rd_data == '0) begin
          blocks_n = blocks + 1;
          st_n = S_T3_PUSH;
        end else begin
          st_n = S_DONE;
        end
      end
      S_T3_PUSH: begin
        wr_en = 1'b1; wr_addr = q_tail_addr[Q_IQ4]; wr_data = n >> 5;
        q_push[Q_IQ4] = 1'b1;
        st_n = S_DONE;
      end

      // ---------------- T4: re-explore the local frontier ----------------
      S_T4_START: begin
        if (blocks != '0) begin
          rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ4];
          st_n = S_T4_BLK;
        end else begin
          st_n = S_DONE;
        end
      end
      S_T4_BLK: begin
        fb_n = rd_data;
        rd_en = 1'b1; rd_addr = at(front_base, rd_data);
        st_n = S_T4_BITS;
      end
      S_T4_BITS: begin
        bits_n = rd_data;
        st_n = S_T4_LOOP;
      end
      S_T4_LOOP: begin
        if (bits != '0) begin
          if (!iq1_full) begin
            wr_en = 1'b1; wr_addr = q_tail_addr[Q_IQ1]; wr_data = (fb << 5) | 32'(k);
            q_push[Q_IQ1] = 1'b1;
            bits_n = bits & ~(32'd1 << k);
          end else begin
            wr_en = 1'b1; wr_addr = at(front_base, fb); wr_data = bits;
            st_n = S_DONE;
          end
        end else begin
          wr_en = 1'b1; wr_addr = at(front_base, fb); wr_data = '0;
          q_pop[Q_IQ4] = 1'b1;
          blocks_n = blocks - 1;
          st_n = (blocks != 32'd1 && !iq1_full) ? S_T4_NEXT : S_DONE;
        end
      end
      S_T4_NEXT: begin
        rd_en = 1'b1; rd_addr = q_head_addr[Q_IQ4];
        st_n = S_T4_BLK;
      end

      S_DONE: begin
        task_done = 1'b1;
        st_n = S_IDLE;
      end
      default: st_n = S_IDLE;
    endcase

    // the clock gate: nothing happens while the PU clock is off
    if (!clk_en) begin
      st_n = st;
      rd_en = 1'b0; wr_en = 1'b0; task_done = 1'b0;
      for (int q = 0; q < NUM_Q; q++) begin
        q_push[q] = 1'b0;
        q_pop[q]  = 1'b0;
      end
    end
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      vid <= '0; nb <= '0; ne <= '0; vdist <= '0; pend <= '0; tbase <= '0;
      b <= '0; e <= '0; d <= '0; n <= '0; nd <= '0; fb <= '0; bits <= '0;
      new_vertex <= 1'b1;
      blocks <= '0;
      dist_base  <= AW'(32'h20000);
      ptr_base   <= AW'(32'h40000);
      eidx_base  <= AW'(32'h80000);
      eval_base  <= AW'(32'hC0000);
      front_base <= AW'(32'h01200);
      epcl       <= 5'd18;
      oqt2       <= 32'd512;
    end else begin
      if (clk_en) begin
        st <= st_n;
        vid <= vid_n; nb <= nb_n; ne <= ne_n; vdist <= vdist_n; pend <= pend_n; tbase <= tbase_n;
        b <= b_n; e <= e_n; d <= d_n; n <= n_n; nd <= nd_n; fb <= fb_n; bits <= bits_n;
        new_vertex <= new_vertex_n;
        blocks <= blocks_n;
      end
      if (cfg_we) begin
        unique case (cfg_idx)
          CFG_PU_DIST:  dist_base  <= cfg_wdata[AW-1:0];
          CFG_PU_PTR:   ptr_base   <= cfg_wdata[AW-1:0];
          CFG_PU_EIDX:  eidx_base  <= cfg_wdata[AW-1:0];
          CFG_PU_EVAL:  eval_base  <= cfg_wdata[AW-1:0];
          CFG_PU_FRONT: front_base <= cfg_wdata[AW-1:0];
          CFG_PU_EPCL:  epcl       <= cfg_wdata[4:0];
          CFG_PU_OQT2:  oqt2       <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  // A task is only started when the PU is idle.
  assert property (@(posedge clk) disable iff (!rst_n) task_valid |-> st == S_IDLE)
    else $error("dalorex_pu: task offered while busy");

endmodule
