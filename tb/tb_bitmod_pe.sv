// tb_bitmod_pe: random FP16 activations and random bit-serial terms through one
// PE, group after group, with an INT8 term pattern (bsig 6/4/2/0, 128 cycles
// per group) and an FP pattern (bsig 1/0, 64 cycles per group, the shortest
// group, back to back). The reference is the exact real-valued dot product
// times the group scaling factor; the tolerance allows for the 15-bit floating
// accumulator. Also checks that res_valid arrives SF_W + 1 cycles after the
// last term, that dequantization overlaps the next group (no stall) and that
// normalisation happened.
module tb_bitmod_pe;
  import bitmod_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  fp16_t [LANES-1:0] act = '0;
  tctl_t ctl = '0;
  colterm_t wt = '0;
  grp_t res;
  logic res_valid, res_pass_first, dq_busy, norm_event;
  int checks = 0, failures = 0;
  int n_norm = 0, n_overlap = 0;

  bitmod_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (norm_event) n_norm++;
    if (dq_busy && ctl.valid) n_overlap++;
  end

  // expected results, produced by the driver, consumed by the checker
  real exp_q [$];
  real mag_q [$];
  int  last_cyc_q [$];
  int  cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : result_check
    real got, e, m;
    int lc;
    forever begin
      @(posedge clk);
      #1;
      if (res_valid) begin
        e = exp_q.pop_front(); m = mag_q.pop_front(); lc = last_cyc_q.pop_front();
        got = mant_exp_real(longint'($signed(res.m)), int'(res.e));
        checks++;
        if (absr(got - e) > m * pow2(-9) + pow2(-20)) begin
          failures++;
          $display("group result %e expected %e (magnitude %e)", got, e, m);
        end
        checks++;
        if (cyc - lc != SF_W + 1) begin
          failures++;
          $display("latency %0d", cyc - lc);
        end
      end
    end
  end

  initial begin
    real dot, mag, p;
    int T, words;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int grp = 0; grp < 12; grp++) begin
      T = (grp < 6) ? 4 : 2;
      words = 32;
      dot = 0.0; mag = 0.0;
      for (int wd = 0; wd < words; wd++) begin
        for (int s = 0; s < T; s++) begin
          @(negedge clk);
          if (s == 0 && wd == 0) wt.sf = 8'($urandom % 128);
          if (s == 0) begin
            for (int l = 0; l < LANES; l++) act[l] = rand_fp16(8, 22);
            if (wd == 3) act[0] = '{sign: 1'b0, exp: 5'd0, frac: 10'h155};  // subnormal
          end
          ctl.valid    = 1'b1;
          ctl.bsig     = (T == 4) ? 3'(6 - 2 * s) : 3'(1 - s);
          ctl.grp_last = (wd == words - 1) && (s == T - 1);
          ctl.pass_first = (grp == 0);
          for (int l = 0; l < LANES; l++) begin
            wt.t[l] = wterm_t'($urandom);
            p = fp16_to_real(act[l]) * term_real(wt.t[l], int'(ctl.bsig));
            dot += p;
            mag += absr(p);
          end
          if (ctl.grp_last) begin
            exp_q.push_back(dot * real'(wt.sf));
            mag_q.push_back(mag * real'(wt.sf));
            last_cyc_q.push_back(cyc + 1);
          end
        end
      end
      // one idle cycle between some groups
      if (grp % 3 == 2) begin
        @(negedge clk);
        ctl = '0;
      end
    end
    @(negedge clk);
    ctl = '0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d group results missing", exp_q.size());
    end
    checks++;
    if (n_norm == 0) failures++;
    checks++;
    if (n_overlap == 0) failures++;
    $display("normalisations=%0d overlapped dequant cycles=%0d", n_norm, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
