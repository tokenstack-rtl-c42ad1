// page_buffer -- the base die's shared SRAM page buffer.
//
// Holds one page of one head group in FP16: T_PAGE tokens x D dimensions of
// Keys and the same of Values, T_PAGE*D*4 bytes (8 KiB at the defaults, the
// paper's "few KB"). Both halves are stored token-first, the order of the
// capacity-layer pages; the migration DMA produces the Value transpose by
// writing or reading it in dimension order from the compute-layer side.
//
// It is organised in chunks of CH consecutive dimensions of one token. The
// write port takes a chunk address, CH lanes of data and a lane mask, so the
// DMA can write single elements (gather from PIM banks) or whole dequantized
// chunks (promotion). The read port returns one chunk with one cycle of
// latency, as a synchronous SRAM would. Chunk address = {kv, token, d / CH}.
module page_buffer
  import ts_fp16_pkg::*;
#(
  parameter int D      = ts_pkg::D_HEAD,
  parameter int T_PAGE = ts_pkg::T_PAGE,
  parameter int CH     = 16,
  localparam int NCH   = 2 * T_PAGE * (D / CH),
  localparam int AW    = $clog2(NCH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [CH-1:0] wr_mask,
  input  fp16_t         wr_data [CH],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp16_t         rd_data [CH]
);

  fp16_t mem [NCH][CH];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < CH; i++)
        if (wr_mask[i]) mem[wr_addr][i] <= wr_data[i];
    if (rd_en)
      for (int i = 0; i < CH; i++) rd_data[i] <= mem[rd_addr][i];
  end

endmodule
