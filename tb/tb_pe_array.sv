// tb_pe_array: a reduced PE array (2 x 2 tiles of 2 x 2 PEs). The testbench
// acts as the feeder: tile row i receives the activation stream delayed by i
// cycles and tile column j the term stream delayed by j cycles, so that every
// tile pairs the same activations with the same terms after the systolic hops.
// Random FP16 activations and random INT8-pattern terms (bsig 6/4/2/0) form one
// pass of two 32-cycle groups with random per-column scaling factors.
// Checks: all 16 outputs equal sum_g sf_g * sum_t x . term within the
// floating-point tolerance, and the last column drain is sampled busy for the
// last time at loop cycle (NCYC - 1) + (TR - 1) + (TC - 1) + SF_W + ROWS + 3:
// last term plus skew plus hops, the SF_W + 1 cycle dequantization, the
// result-valid register, the drain-start register and ROWS drain cycles, with
// the flag sampled one edge after it is set.
module tb_pe_array;
  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int TR = 2, TC = 2, ROWS = 2, COLS = 2;
  localparam int NR = TR * ROWS, NC = TC * COLS;
  localparam int NG = 2, GL = 32, NCYC = NG * GL, TAIL = 40;
  logic clk = 0, rst_n = 0;
  fp16_t [TR-1:0][ROWS-1:0][LANES-1:0] act_in = '0;
  tctl_t [TC-1:0] ctl_in = '0;
  colterm_t [TC-1:0][COLS-1:0] wt_in = '0;
  logic rd_tr = 0, rd_tc = 0, rd_col = 0, rd_row = 0;
  outw_t rd_data;
  logic drain_busy, dq_busy, norm_event;
  int checks = 0, failures = 0, cyc = 0, last_drain = -1, n_norm = 0;

  fp16_t    xs [NCYC][NR][LANES];
  wterm_t   ts [NCYC][NC][LANES];
  logic [7:0] sfs [NG][NC];

  pe_array #(.TR(TR), .TC(TC), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (drain_busy) last_drain = cyc;
    if (norm_event) n_norm++;
  end

  initial begin
    real expv, mag, p, gs, gm, got;
    int t, expd;
    for (int s = 0; s < NCYC; s++)
      for (int l = 0; l < LANES; l++) begin
        for (int r = 0; r < NR; r++)
          xs[s][r][l] = (s % 4 == 0) ? rand_fp16(10, 20) : xs[s - 1][r][l];
        for (int c = 0; c < NC; c++) ts[s][c][l] = wterm_t'($urandom);
      end
    for (int g = 0; g < NG; g++)
      for (int c = 0; c < NC; c++) sfs[g][c] = 8'($urandom % 128);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // cycle cyc presents stream element cyc - i to tile row i and cyc - j to
    // tile column j
    for (cyc = 0; cyc < NCYC + TAIL; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < TR; i++) begin
        t = cyc - i;
        for (int r = 0; r < ROWS; r++)
          for (int l = 0; l < LANES; l++)
            act_in[i][r][l] = (t >= 0 && t < NCYC) ? xs[t][i * ROWS + r][l] : '0;
      end
      for (int j = 0; j < TC; j++) begin
        t = cyc - j;
        if (t >= 0 && t < NCYC) begin
          ctl_in[j] = '{valid: 1'b1, grp_last: (t % GL == GL - 1), pass_first: (t < GL),
                        bsig: 3'(6 - 2 * (t % 4))};
          for (int c = 0; c < COLS; c++) begin
            for (int l = 0; l < LANES; l++) wt_in[j][c].t[l] = ts[t][j * COLS + c][l];
            wt_in[j][c].sf = sfs[t / GL][j * COLS + c];
          end
        end else begin
          ctl_in[j] = '0;
          wt_in[j] = '0;
        end
      end
    end
    expd = (NCYC - 1) + (TR - 1) + (TC - 1) + SF_W + ROWS + 3;
    checks++;
    if (last_drain != expd) begin
      failures++;
      $display("last drain cycle %0d expected %0d", last_drain, expd);
    end
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        expv = 0.0; mag = 0.0;
        for (int g = 0; g < NG; g++) begin
          gs = 0.0; gm = 0.0;
          for (int s = g * GL; s < (g + 1) * GL; s++)
            for (int l = 0; l < LANES; l++) begin
              p = fp16_to_real(xs[s][r][l]) * term_real(ts[s][c][l], 6 - 2 * (s % 4));
              gs += p; gm += absr(p);
            end
          expv += gs * real'(sfs[g][c]);
          mag  += gm * real'(sfs[g][c]);
        end
        rd_tr = 1'(r / ROWS); rd_row = 1'(r % ROWS);
        rd_tc = 1'(c / COLS); rd_col = 1'(c % COLS);
        #1;
        got = mant_exp_real(longint'($signed(rd_data.m)), int'(rd_data.e));
        checks++;
        if (absr(got - expv) > mag * pow2(-8) + 1.0) begin
          failures++;
          $display("out[%0d][%0d] = %e expected %e", r, c, got, expv);
        end
      end
    checks++; if (n_norm == 0) begin failures++; $display("no normalisation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
