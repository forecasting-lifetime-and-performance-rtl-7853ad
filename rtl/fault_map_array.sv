// fault_map_array: the per-frame bitmap of disabled bytes.
//
// Every frame of the cache has a FRAME_BYTES-bit map, bit b set when byte b has
// suffered a hard fault and is out of service. The paper attaches such a bitmap
// to every frame; its organisation here is this design's choice: one word per
// set holding the maps of all WAYS frames, read combinationally for a whole set
// (the replacement logic needs every way's map), written synchronously.
//
// Ports:
//   rd_set -> rd_maps         combinational read of one set
//   dis_en, dis_set/way/byte  disable one byte (set its bit) at the clock edge
//   clr_en, clr_set           clear all maps of one set (used once per set
//                             after power-up of a fresh array; it has priority)
// Contents are not reset: the owner clears every set once before use.
module fault_map_array
  import nvllc_pkg::*;
#(
  parameter int unsigned SETS = 4096,
  parameter int unsigned WAYS = 16,
  localparam int unsigned SW = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                   clk,
  input  logic [SW-1:0]          rd_set,
  output byte_mask_t [WAYS-1:0]  rd_maps,
  input  logic                   dis_en,
  input  logic [SW-1:0]          dis_set,
  input  logic [WW-1:0]          dis_way,
  input  logic [POS_W-1:0]       dis_byte,
  input  logic                   clr_en,
  input  logic [SW-1:0]          clr_set
);

  byte_mask_t [WAYS-1:0] mem [SETS];

  always_ff @(posedge clk) begin
    if (clr_en) begin
      mem[clr_set] <= '0;
    end else if (dis_en) begin
      mem[dis_set][dis_way][dis_byte] <= 1'b1;
    end
  end

  assign rd_maps = mem[rd_set];

endmodule
