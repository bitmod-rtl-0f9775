// tb_pe_column: a full 8-PE column. Random FP16 activations per row and random
// bit-serial terms shared by the column are streamed for two output passes
// (3 groups, then 2 groups, INT8 term pattern, 128 cycles per group). After
// each pass every output-buffer word must equal sum_g sf_g * dot_g(row) within
// the floating-point tolerance; the second pass must overwrite, not add to,
// the first. Also checks the drain takes ROWS cycles and overlaps computation.
module tb_pe_column;
  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  fp16_t [ROWS-1:0][LANES-1:0] act = '0;
  tctl_t ctl = '0;
  colterm_t wt = '0;
  logic [2:0] rd_row = 0;
  outw_t rd_data;
  logic drain_busy;
  logic [ROWS-1:0] dq_busy, norm_event;
  int checks = 0, failures = 0, n_drain = 0, n_drain_overlap = 0;

  pe_column #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (drain_busy) n_drain++;
    if (drain_busy && ctl.valid) n_drain_overlap++;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv [ROWS], mag [ROWS], gdot [ROWS], gmag [ROWS], p, got;
    int ngrp;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      ngrp = (pass == 0) ? 3 : 2;
      for (int r = 0; r < ROWS; r++) begin expv[r] = 0.0; mag[r] = 0.0; end
      for (int g = 0; g < ngrp; g++) begin
        for (int r = 0; r < ROWS; r++) begin gdot[r] = 0.0; gmag[r] = 0.0; end
        for (int wd = 0; wd < 32; wd++) begin
          for (int s = 0; s < 4; s++) begin
            @(negedge clk);
            if (s == 0 && wd == 0) wt.sf = 8'($urandom % 128);
            if (s == 0)
              for (int r = 0; r < ROWS; r++)
                for (int l = 0; l < LANES; l++) act[r][l] = rand_fp16(10, 20);
            ctl.valid = 1'b1;
            ctl.bsig = 3'(6 - 2 * s);
            ctl.grp_last = (wd == 31) && (s == 3);
            ctl.pass_first = (g == 0);
            for (int l = 0; l < LANES; l++) wt.t[l] = wterm_t'($urandom);
            for (int r = 0; r < ROWS; r++)
              for (int l = 0; l < LANES; l++) begin
                p = fp16_to_real(act[r][l]) * term_real(wt.t[l], int'(ctl.bsig));
                gdot[r] += p; gmag[r] += absr(p);
              end
          end
        end
        for (int r = 0; r < ROWS; r++) begin
          expv[r] += gdot[r] * real'(wt.sf);
          mag[r]  += gmag[r] * real'(wt.sf);
        end
      end
      @(negedge clk);
      ctl = '0;
      repeat (30) @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        rd_row = 3'(r);
        #1;
        got = mant_exp_real(longint'($signed(rd_data.m)), int'(rd_data.e));
        checks++;
        if (absr(got - expv[r]) > mag[r] * pow2(-8)) begin
          failures++;
          $display("pass %0d row %0d: got %e expected %e (mag %e) m=%0d e=%0d", pass, r, got, expv[r], mag[r], $signed(rd_data.m), rd_data.e);
        end
      end
    end
    checks++;
    if (n_drain != 5 * ROWS) begin
      failures++;
      $display("drain cycles %0d, expected %0d", n_drain, 5 * ROWS);
    end
    checks++;
    if (n_drain_overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
