// dalorex_head_decoder: recovers the local index from an arriving head flit.
//
// When a message reaches its destination tile, the TSU strips the tile
// number that the head encoder placed in the upper log2(W)+log2(H) bits,
// leaving the index local to this tile's chunk, and pushes that into the
// input queue. Body flits pass through unchanged (is_head low).
// Combinational; dest_x/dest_y expose the tile bits for the router.
module dalorex_head_decoder #(
  parameter int unsigned XW = 4,
  parameter int unsigned YW = 4,
  parameter int unsigned DW = 32
) (
  input  logic [DW-1:0] flit,
  input  logic          is_head,
  output logic [DW-1:0] data,
  output logic [XW-1:0] dest_x,
  output logic [YW-1:0] dest_y
);

  localparam int unsigned TW = XW + YW;

  always_comb begin
    dest_x = flit[DW-TW +: XW];
    dest_y = flit[DW-YW +: YW];
    data   = is_head ? {{TW{1'b0}}, flit[DW-TW-1:0]} : flit;
  end

endmodule
