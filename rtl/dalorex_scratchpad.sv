// dalorex_scratchpad: the private SRAM of one Dalorex tile.
//
// The scratchpad holds the tile's chunk of every data array, the task code
// and the circular input/output queues. It has two read and two write
// ports: port A belongs to the processing unit (one read and one write per
// cycle, as the paper states) and port B to the task scheduling unit (the
// "write to mem" and "read from mem" paths of the tile figure, which move
// flits between the router buffers and the queues). Reads are synchronous:
// the word addressed in cycle n is on rd_data in cycle n+1, read-before-write.
// If both write ports hit the same word in one cycle, port A wins; the tile
// never does this because each queue and array has a single writer.
// The default size is 4 MiB (2^20 words of 32 bits), the "4MB tiles" the
// paper uses for its 16x16 torus; the memory is a plain array here, standing
// in for the banked 7nm SRAM macros the paper assumes.
module dalorex_scratchpad #(
  parameter int unsigned WORDS = 1 << 20,
  parameter int unsigned AW    = $clog2(WORDS),
  parameter int unsigned DW    = 32
) (
  input  logic          clk,
  // port A (processing unit)
  input  logic          a_rd_en,
  input  logic [AW-1:0] a_rd_addr,
  output logic [DW-1:0] a_rd_data,
  input  logic          a_wr_en,
  input  logic [AW-1:0] a_wr_addr,
  input  logic [DW-1:0] a_wr_data,
  // port B (task scheduling unit / host)
  input  logic          b_rd_en,
  input  logic [AW-1:0] b_rd_addr,
  output logic [DW-1:0] b_rd_data,
  input  logic          b_wr_en,
  input  logic [AW-1:0] b_wr_addr,
  input  logic [DW-1:0] b_wr_data
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_rd_en) a_rd_data <= mem[a_rd_addr];
    if (b_rd_en) b_rd_data <= mem[b_rd_addr];
    if (b_wr_en && !(a_wr_en && a_wr_addr == b_wr_addr)) mem[b_wr_addr] <= b_wr_data;
    if (a_wr_en) mem[a_wr_addr] <= a_wr_data;
  end

endmodule
