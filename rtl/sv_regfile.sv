// sv_regfile: the special-value register file (SV_reg).
//
// Holds the four special values that may replace the redundant negative zero
// of an extended FP4/FP3 weight group (for example -5/+5/-8/+8 for FP4 or
// -3/+3/-6/+6 for FP3). It is programmed once before a model is deployed
// through a simple write port and read through N_RD independent 2-bit selects,
// one per weight lane, each acting as the 4:1 mux in front of the decoder.
//
// Four entries and their role follow the paper. The write port, the reset
// contents (FP4-ER/EA values +5, -5, +8, -8 in entries 0..3) and the read
// fan-out are this design's choices. Timing: writes take effect at the next
// clock edge; reads are combinational.
module sv_regfile
  import bitmod_pkg::*;
#(
  parameter int unsigned N_RD = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [1:0]             waddr,
  input  sv_t                    wdata,
  input  logic [N_RD-1:0][1:0]   sel,
  output sv_t  [N_RD-1:0]        sv
);
  sv_t regs [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs[0] <= '{sign: 1'b0, mag: 5'd10};  // +5
      regs[1] <= '{sign: 1'b1, mag: 5'd10};  // -5
      regs[2] <= '{sign: 1'b0, mag: 5'd16};  // +8
      regs[3] <= '{sign: 1'b1, mag: 5'd16};  // -8
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb
    for (int i = 0; i < int'(N_RD); i++) sv[i] = regs[sel[i]];
endmodule
