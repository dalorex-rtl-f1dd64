// dalorex_pkg: constants and types shared by the Dalorex tile RTL.
//
// A flit is one 32-bit word, the width of a queue entry, of the processing
// unit's datapath and of a memory word (as in the paper's 32-bit
// configuration). Two logical network channels share the NoC: channel 0
// carries task T2 invocations (three flits), channel 1 carries T3
// invocations (two flits), which is the SSSP channel table of the paper's
// tile figure. Queue numbering is this design's own: the four task input
// queues IQ1..IQ4 are queues 0..3 and the channel queues CQ1, CQ2 are
// queues 4 and 5.
package dalorex_pkg;

  parameter int unsigned FLIT_W    = 32;
  parameter int unsigned NUM_TASKS = 4;
  parameter int unsigned NUM_CH    = 2;
  parameter int unsigned NUM_Q     = NUM_TASKS + NUM_CH;
  parameter int unsigned QID_W     = 3;
  parameter int unsigned TID_W     = 2;
  parameter int unsigned NUM_PORTS = 5;

  typedef logic [FLIT_W-1:0] flit_t;

  // Router port order. N is toward row y-1, S toward y+1, E toward x+1,
  // W toward x-1, T is the tile's own TSU.
  typedef enum logic [2:0] {
    PORT_N = 3'd0,
    PORT_S = 3'd1,
    PORT_E = 3'd2,
    PORT_W = 3'd3,
    PORT_T = 3'd4
  } port_e;

  // Queue identifiers.
  localparam logic [QID_W-1:0] Q_IQ1 = 3'd0;
  localparam logic [QID_W-1:0] Q_IQ2 = 3'd1;
  localparam logic [QID_W-1:0] Q_IQ3 = 3'd2;
  localparam logic [QID_W-1:0] Q_IQ4 = 3'd3;
  localparam logic [QID_W-1:0] Q_CQ1 = 3'd4;
  localparam logic [QID_W-1:0] Q_CQ2 = 3'd5;

  // Task identifiers (task Tn has id n-1).
  localparam logic [TID_W-1:0] T1 = 2'd0;
  localparam logic [TID_W-1:0] T2 = 2'd1;
  localparam logic [TID_W-1:0] T3 = 2'd2;
  localparam logic [TID_W-1:0] T4 = 2'd3;

  // Host configuration space: a host write whose address has bit 31 set
  // goes to a configuration register; the low 8 bits select it.
  localparam logic [7:0] CFG_Q_BASE   = 8'h00; // + q : queue base address
  localparam logic [7:0] CFG_Q_LEN    = 8'h08; // + q : queue length (entries)
  localparam logic [7:0] CFG_Q_PUSH   = 8'h10; // + q : push the data word into queue q
  localparam logic [7:0] CFG_T_NPAR   = 8'h18; // + t : parameters popped per invocation
  localparam logic [7:0] CFG_T_OQ     = 8'h1C; // + t : output queue of task t
  localparam logic [7:0] CFG_T_NEED   = 8'h20; // + t : free OQ entries needed to invoke t
  localparam logic [7:0] CFG_C_LOG2   = 8'h24; // + c : log2 of the chunk size used by the head encoder
  localparam logic [7:0] CFG_C_LEN    = 8'h26; // + c : flits per message (chain length)
  localparam logic [7:0] CFG_C_TGT    = 8'h28; // + c : input queue that receives channel c
  localparam logic [7:0] CFG_PU_DIST  = 8'h40; // base of dist[]
  localparam logic [7:0] CFG_PU_PTR   = 8'h41; // base of ptr[] (NODES_PER_CHUNK+1 entries)
  localparam logic [7:0] CFG_PU_EIDX  = 8'h42; // base of edge_idx[]
  localparam logic [7:0] CFG_PU_EVAL  = 8'h43; // base of edge_values[]
  localparam logic [7:0] CFG_PU_FRONT = 8'h44; // base of the frontier bitmap
  localparam logic [7:0] CFG_PU_EPCL  = 8'h45; // log2(EDGES_PER_CHUNK)
  localparam logic [7:0] CFG_PU_OQT2  = 8'h46; // OQT2, largest T2 edge range

endpackage
