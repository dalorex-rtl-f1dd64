// dalorex_fifo: small synchronous FIFO used for the router channel buffers
// and the Router-TSU buffers.
//
// Push and pop may happen in the same cycle. rd_data shows the oldest entry
// combinationally while empty is low. `free` is the number of empty slots,
// from registers only, so a neighbour may use it as a credit count. Pushing
// when full or popping when empty is a protocol error (asserted). Buffer
// depths are not given by the paper; they are parameters of the instances.
module dalorex_fifo #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned DW    = 32,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] wr_data,
  input  logic          pop,
  output logic [DW-1:0] rd_data,
  output logic          empty,
  output logic          full,
  output logic [CW-1:0] count,
  output logic [CW-1:0] free
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign free    = CW'(DEPTH) - count;
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("dalorex_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("dalorex_fifo: pop while empty");

endmodule
