// nvm_frame_array: the non-volatile (STT-RAM) data array of the cache.
//
// FRAMES frames of FRAME_BYTES bytes (64 data + 2 check bytes). A write stores
// only the bytes whose write-control bit is set, which is what lets a
// compressed block wear just the bytes it occupies; the other bytes keep their
// contents. Reads are synchronous: rdata holds the addressed frame one clock
// after rd_en. Written here as a plain memory array; the paper takes the
// STT-RAM technology and its latencies from elsewhere and does not design the
// macro, so device timing, write energy and wear-out are not modelled.
module nvm_frame_array
  import nvllc_pkg::*;
#(
  parameter int unsigned FRAMES = 65536,
  localparam int unsigned AW = (FRAMES > 1) ? $clog2(FRAMES) : 1
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  byte_mask_t     wr_be,
  input  frame_t         wr_data,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output frame_t         rd_data
);

  frame_t mem [FRAMES];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < int'(FRAME_BYTES); b++)
        if (wr_be[b]) mem[wr_addr][b] <= wr_data[b];
    end
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
