// dalorex_head_encoder: builds the head flit of an outgoing message.
//
// Dalorex messages carry no routing header. The first flit of every message
// is an index into a distributed array, and the arrays are split into equal
// power-of-two chunks, one per tile, so the owner of index i is tile
// i >> chunk_log2 and the local index is i mod 2^chunk_log2. The encoder
// writes the destination tile number into the upper log2(W)+log2(H) bits of
// the flit and keeps the local index in the rest; tile number t sits at
// X = t mod W, Y = t / W. Purely combinational. The chunk size comes from
// the channel table (the "Head Encod." column: Edge or Node chunk). An index
// whose local part does not fit below the tile bits is a configuration error.
module dalorex_head_encoder #(
  parameter int unsigned XW = 4,   // log2(grid width)
  parameter int unsigned YW = 4,   // log2(grid height)
  parameter int unsigned DW = 32
) (
  input  logic [DW-1:0] index,       // global array index
  input  logic [4:0]    chunk_log2,  // log2 of the chunk size
  output logic [DW-1:0] head,        // {dest_y, dest_x, local index}
  output logic [XW-1:0] dest_x,
  output logic [YW-1:0] dest_y
);

  localparam int unsigned TW = XW + YW;

  logic [DW-1:0] tile;
  logic [DW-1:0] local_idx;

  always_comb begin
    tile      = index >> chunk_log2;
    local_idx = index & ((DW'(1) << chunk_log2) - 1'b1);
    dest_x    = tile[XW-1:0];
    dest_y    = tile[TW-1:XW];
    head      = {tile[TW-1:0], local_idx[DW-TW-1:0]};
  end

endmodule
