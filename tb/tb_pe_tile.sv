// tb_pe_tile: a reduced PE tile (2 rows x 3 columns). Random FP16 activations
// per row and random bit-serial terms per column, in the INT8 pattern (bsig
// 6/4/2/0, activations held for the four terms of a weight word), are streamed
// for one output pass of two 32-cycle groups with random scaling factors.
// Checks: act_out/ctl_out/wt_out equal the inputs of the previous cycle (one
// cycle per systolic hop); every output (row, column) equals
// sum_g sf_g * sum_t x . term within the floating-point tolerance; the
// dequantization and drain status outputs were seen active.
module tb_pe_tile;
  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int ROWS = 2, COLS = 3, NG = 2, GL = 32, NCYC = NG * GL;
  logic clk = 0, rst_n = 0;
  fp16_t [ROWS-1:0][LANES-1:0] act_in = '0, act_out, act_prev;
  tctl_t ctl_in = '0, ctl_out, ctl_prev;
  colterm_t [COLS-1:0] wt_in = '0, wt_out, wt_prev;
  logic [1:0] rd_col = '0;
  logic       rd_row = '0;
  outw_t rd_data;
  logic drain_busy, dq_busy, norm_event;
  int checks = 0, failures = 0, n_drain = 0, n_dq = 0, n_hop = 0;

  fp16_t    xs [NCYC][ROWS][LANES];
  wterm_t   ts [NCYC][COLS][LANES];
  logic [7:0] sfs [NG][COLS];

  pe_tile #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one-cycle hop check
  always @(posedge clk) begin
    act_prev <= act_in;
    ctl_prev <= ctl_in;
    wt_prev  <= wt_in;
    if (rst_n) begin
      #1;
      checks++;
      n_hop++;
      if (act_out !== act_prev || ctl_out !== ctl_prev || wt_out !== wt_prev) begin
        failures++;
        if (failures < 5) $display("hop mismatch at %0t", $time);
      end
    end
  end

  always @(posedge clk) begin
    if (drain_busy) n_drain++;
    if (dq_busy) n_dq++;
  end

  initial begin
    real expv, mag, p, gs, gm, got;
    for (int t = 0; t < NCYC; t++)
      for (int l = 0; l < LANES; l++) begin
        for (int r = 0; r < ROWS; r++)
          xs[t][r][l] = (t % 4 == 0) ? rand_fp16(10, 20) : xs[t - 1][r][l];
        for (int c = 0; c < COLS; c++) ts[t][c][l] = wterm_t'($urandom);
      end
    for (int g = 0; g < NG; g++)
      for (int c = 0; c < COLS; c++) sfs[g][c] = 8'($urandom % 128);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < NCYC; t++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) act_in[r] = {xs[t][r][3], xs[t][r][2], xs[t][r][1], xs[t][r][0]};
      ctl_in = '{valid: 1'b1, grp_last: (t % GL == GL - 1), pass_first: (t < GL),
                 bsig: 3'(6 - 2 * (t % 4))};
      for (int c = 0; c < COLS; c++) begin
        for (int l = 0; l < LANES; l++) wt_in[c].t[l] = ts[t][c][l];
        wt_in[c].sf = sfs[t / GL][c];
      end
    end
    @(negedge clk);
    ctl_in = '0;
    act_in = '0;
    wt_in = '0;
    repeat (SF_W + ROWS + 6) @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        expv = 0.0; mag = 0.0;
        for (int g = 0; g < NG; g++) begin
          gs = 0.0; gm = 0.0;
          for (int t = g * GL; t < (g + 1) * GL; t++)
            for (int l = 0; l < LANES; l++) begin
              p = fp16_to_real(xs[t][r][l]) * term_real(ts[t][c][l], 6 - 2 * (t % 4));
              gs += p; gm += absr(p);
            end
          expv += gs * real'(sfs[g][c]);
          mag  += gm * real'(sfs[g][c]);
        end
        rd_row = r[0]; rd_col = 2'(c);
        #1;
        got = mant_exp_real(longint'($signed(rd_data.m)), int'(rd_data.e));
        checks++;
        if (absr(got - expv) > mag * pow2(-8) + 1.0) begin
          failures++;
          $display("out[%0d][%0d] = %e expected %e", r, c, got, expv);
        end
      end
    checks++; if (n_drain != NG * ROWS) begin failures++; $display("drain cycles %0d", n_drain); end
    checks++; if (n_dq == 0) begin failures++; $display("no dequantization seen"); end
    checks++; if (n_hop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
