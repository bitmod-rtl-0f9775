// weight_buffer: banked on-chip buffer of quantized weights and group metadata.
//
// One bank per PE column of the array (NBANK = 4 tile columns x 8 columns = 32).
// A bank word holds the four weights one PE column consumes per term sequence,
// each in an 8-bit slot (INT8 uses all 8 bits, INT6 the low 6, FP4 the low 4,
// FP3 the low 3). With 4096 words per bank the weight storage is
// 32 x 4096 x 4 bytes = 512 KB. Every bank has a small metadata memory with one
// entry per weight group: the 8-bit scaling factor and the 2-bit special-value
// select (10 bits per group).
//
// The 512 KB capacity, banking and 8 + 2 bits of metadata per group follow the
// paper. Fixed 8-bit slots (rather than dense packing of 6/4/3-bit weights),
// the separate metadata memory, one write port per memory and the one-cycle
// synchronous reads are this design's choices.
module weight_buffer
  import bitmod_pkg::*;
#(
  parameter int unsigned NBANK  = 32,
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned MDEPTH = 128
) (
  input  logic                                   clk,
  input  logic                                   wr_en,
  input  logic [$clog2(NBANK)-1:0]               wr_bank,
  input  logic [$clog2(DEPTH)-1:0]               wr_addr,
  input  logic [LANES-1:0][7:0]                  wr_data,
  input  logic                                   mwr_en,
  input  logic [$clog2(NBANK)-1:0]               mwr_bank,
  input  logic [$clog2(MDEPTH)-1:0]              mwr_addr,
  input  logic [1:0]                             mwr_sel,
  input  logic [SF_W-1:0]                        mwr_sf,
  input  logic                                   rd_en,
  input  logic [$clog2(DEPTH)-1:0]               rd_addr,
  input  logic [$clog2(MDEPTH)-1:0]              mrd_addr,
  output logic [NBANK-1:0][LANES-1:0][7:0]       rd_data,
  output logic [NBANK-1:0][1:0]                  rd_sel,
  output logic [NBANK-1:0][SF_W-1:0]             rd_sf
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [LANES*8-1:0]   mem  [DEPTH];
    logic [SF_W+1:0]      meta [MDEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && 32'(wr_bank) == b)   mem[wr_addr]   <= wr_data;
      if (mwr_en && 32'(mwr_bank) == b) meta[mwr_addr] <= {mwr_sel, mwr_sf};
      if (rd_en) begin
        rd_data[b]           <= mem[rd_addr];
        {rd_sel[b], rd_sf[b]} <= meta[mrd_addr];
      end
    end
  end
endmodule
