// pe_dequant: bit-serial per-group dequantization (step 4 of the PE).
//
// When a group's dot product is complete the PE hands its accumulator
// (mantissa m, exponent e) and the group's 8-bit scaling factor here. The
// mantissa is multiplied by the scaling factor one bit per cycle, most
// significant bit first: acc <= (first ? 0 : acc << 1) + (sf[i] ? m : 0).
// After SF_W = 8 cycles the 21-bit product is normalised back to 15 significant
// bits (arithmetic right shift by 0..7) and that shift is added to e to give
// the exponent of the dequantized partial sum. Because a group takes at least
// 64 cycles in the PE, these 8 cycles overlap the next group and never stall it.
//
// Follows the paper: one scale bit per cycle, AND gate, shift-and-add with a
// 0/<<1 feedback mux, 21-bit m_GRP, 3-bit normalize amount added to e_ACC.
// This design's choices: MSB-first order; the scaling factor is the non-negative
// output of symmetric INT8 quantization of positive scales (0..127), which
// keeps the 21-bit product from overflowing; the result is truncated when
// normalised. Interface: 'start' loads the operands (ignored while busy, which
// an assertion flags); 'done' pulses for one cycle with 'res' valid and held
// until the next 'done'.
module pe_dequant
  import bitmod_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [MACC_W-1:0] m_in,
  input  logic [EW-1:0]            e_in,
  input  logic [SF_W-1:0]          sf_in,
  output logic                     busy,
  output logic                     done,
  output grp_t                     res
);
  logic signed [MACC_W-1:0] m_q;
  logic [EW-1:0]            e_q;
  logic [SF_W-1:0]          sf_q;
  logic [2:0]               cnt;
  logic signed [MGRP_W-1:0] acc, acc_nx, prod_n;
  logic [2:0]               nrm;

  // shift-and-add step
  always_comb begin
    acc_nx = (cnt == 3'd0) ? '0 : (acc <<< 1);
    if (sf_q[3'(SF_W-1) - cnt]) acc_nx = acc_nx + MGRP_W'(m_q);
  end

  // normalise the finished product to 15 significant bits
  always_comb begin
    nrm = 3'd7;
    for (int s = 7; s >= 0; s--) begin
      prod_n = acc_nx >>> s;
      if (prod_n >= -(MGRP_W'(1) <<< (MACC_W-1)) && prod_n < (MGRP_W'(1) <<< (MACC_W-1)))
        nrm = 3'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      acc  <= '0;
      m_q  <= '0;
      e_q  <= '0;
      sf_q <= '0;
      res  <= '0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        acc <= acc_nx;
        cnt <= cnt + 3'd1;
        if (cnt == 3'(SF_W-1)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          res.m <= acc_nx >>> nrm;
          res.e <= e_q + EW'(nrm);
        end
      end else if (start) begin
        busy <= 1'b1;
        cnt  <= '0;
        m_q  <= m_in;
        e_q  <= e_in;
        sf_q <= sf_in;
      end
    end
  end

  // The pipeline relies on the dequantizer being free when a group ends.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("pe_dequant: group finished while the previous dequantization was running");
  a_sf_positive: assert property (@(posedge clk) disable iff (!rst_n) start |-> !sf_in[SF_W-1])
    else $error("pe_dequant: scaling factor must be in 0..127");
endmodule
