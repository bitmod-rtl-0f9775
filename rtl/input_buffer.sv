// input_buffer: banked on-chip FP16 activation buffer.
//
// One bank per PE row of the array (NBANK = 4 tile rows x 8 rows = 32). A bank
// word holds the four FP16 activations one PE consumes per cycle (64 bits), so
// one read, at a common address, serves every PE row at once. With the default
// depth of 2048 words the buffer holds 32 x 2048 x 8 bytes = 512 KB.
//
// The 512 KB capacity and the banking for PE bandwidth follow the paper; the
// bank organisation, one write port (filled from off-chip memory) and the
// one-cycle synchronous read are this design's choices. rd_data holds its
// value until the next read.
module input_buffer
  import bitmod_pkg::*;
#(
  parameter int unsigned NBANK = 32,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [$clog2(NBANK)-1:0]            wr_bank,
  input  logic [$clog2(DEPTH)-1:0]            wr_addr,
  input  fp16_t [LANES-1:0]                   wr_data,
  input  logic                                rd_en,
  input  logic [$clog2(DEPTH)-1:0]            rd_addr,
  output fp16_t [NBANK-1:0][LANES-1:0]        rd_data
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [LANES*16-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && 32'(wr_bank) == b) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data[b] <= mem[rd_addr];
    end
  end
endmodule
