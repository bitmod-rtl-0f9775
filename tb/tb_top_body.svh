// Shared body of the end-to-end testbenches of bitmod_top. The including
// module defines P_TR, P_TC, P_ROWS, P_COLS, P_GROUP, P_IDEPTH, P_WDEPTH,
// P_MDEPTH (the DUT's sizes), P_NG (groups per pass) and instantiates the DUT
// as 'dut' after this file.
//
// Four output passes are run, one per weight data type (INT8, INT6, FP4 with
// the reset special values +-5/+-8, FP3 after reprogramming the special values
// to +-3/+-6), each over P_NG groups, from different buffer base addresses,
// then a fifth pass (INT6) started in accumulate mode, which must add to the
// outputs of the FP3 pass instead of replacing them.
// Weights, scaling factors, special-value selects and FP16 activations are
// random; negative-zero codes are injected so that special values are used.
// The reference for output (r, c) is sum_g sf[c][g] * sum_k x[r][k] * w[c][k],
// with w the weight's value (FP values in half units, as the datapath keeps
// them). Checks: every output within the floating-point tolerance, and the
// pass latency n_groups * GROUP/4 * T + LAT + 1 cycles. Mechanisms counted
// (each must occur): all four data types, special-value substitution, SV
// register reprogramming, accumulate-mode pass, accumulator normalisation, dequantization and
// column drain overlapping computation, multi-group accumulation and the
// overwrite of old outputs by a new pass.

  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int NR  = P_TR * P_ROWS;
  localparam int NC  = P_TC * P_COLS;
  localparam int K   = P_NG * P_GROUP;
  localparam int GW  = P_GROUP / LANES;
  localparam int LAT = P_TR + P_TC + SF_W + P_ROWS + 6;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  dtype_e cfg_dtype = DT_INT8;
  logic [7:0] cfg_ngroups = 8'(P_NG);
  logic cfg_accum = 1'b0;
  logic [$clog2(P_IDEPTH)-1:0] cfg_ibase = '0;
  logic [$clog2(P_WDEPTH)-1:0] cfg_wbase = '0;
  logic [$clog2(P_MDEPTH)-1:0] cfg_mbase = '0;
  logic sv_we = 0;
  logic [1:0] sv_waddr = 0;
  sv_t sv_wdata = '0;
  logic ib_wr_en = 0;
  logic [$clog2(NR)-1:0] ib_wr_bank = '0;
  logic [$clog2(P_IDEPTH)-1:0] ib_wr_addr = '0;
  fp16_t [LANES-1:0] ib_wr_data = '0;
  logic wb_wr_en = 0;
  logic [$clog2(NC)-1:0] wb_wr_bank = '0;
  logic [$clog2(P_WDEPTH)-1:0] wb_wr_addr = '0;
  logic [LANES-1:0][7:0] wb_wr_data = '0;
  logic wb_mwr_en = 0;
  logic [$clog2(NC)-1:0] wb_mwr_bank = '0;
  logic [$clog2(P_MDEPTH)-1:0] wb_mwr_addr = '0;
  logic [1:0] wb_mwr_sel = '0;
  logic [SF_W-1:0] wb_mwr_sf = '0;
  logic [$clog2(P_TR)-1:0] rd_tr = '0;
  logic [$clog2(P_TC)-1:0] rd_tc = '0;
  logic [$clog2(P_COLS)-1:0] rd_col = '0;
  logic [$clog2(P_ROWS)-1:0] rd_row = '0;
  outw_t rd_data;
  logic stat_special, stat_norm, stat_dq_busy, stat_drain;

  int checks = 0, failures = 0;
  int n_mode [4];
  int n_special = 0, n_norm = 0, n_dq_overlap = 0, n_drain_overlap = 0, n_svprog = 0;
  int n_multigroup = 0, n_overwrite = 0, n_accum = 0;
  real prev_exp [NR][NC];
  real prev_mag [NR][NC];

  fp16_t       xa [NR][K];
  logic [7:0]  wq [NC][K];
  logic [7:0]  sfq [NC][P_NG];
  logic [1:0]  selq [NC][P_NG];
  real         svv [4] = '{5.0, -5.0, 8.0, -8.0};

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (stat_special) n_special++;
    if (stat_norm) n_norm++;
    if (stat_dq_busy && dut.g_ctl.valid) n_dq_overlap++;
    if (stat_drain && dut.g_ctl.valid) n_drain_overlap++;
  end

  initial begin
    #(64'd4000000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real wval(dtype_e dt, logic [7:0] w, logic [1:0] sel);
    logic [3:0] c;
    case (dt)
      DT_INT8: return real'($signed(w));
      DT_INT6: return real'($signed(w[5:0]));
      default: begin
        c = (dt == DT_FP3) ? {w[2:0], 1'b0} : w[3:0];
        if (c == 4'b1000) return 2.0 * svv[sel];
        return 2.0 * (c[3] ? -fp4_mag(c[2:0]) : fp4_mag(c[2:0]));
      end
    endcase
  endfunction

  task automatic program_sv(real v0, real v1, real v2, real v3);
    real v [4] = '{v0, v1, v2, v3};
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      sv_we = 1; sv_waddr = 2'(i);
      sv_wdata = '{sign: v[i] < 0.0, mag: 5'(int'(absr(v[i]) * 2.0))};
      svv[i] = v[i];
    end
    @(negedge clk) sv_we = 0;
    n_svprog++;
  endtask

  task automatic load_pass(dtype_e dt, int ib, int wb, int mb);
    for (int r = 0; r < NR; r++)
      for (int k = 0; k < K; k++) xa[r][k] = rand_fp16(10, 20);
    for (int c = 0; c < NC; c++) begin
      for (int g = 0; g < P_NG; g++) begin
        sfq[c][g]  = 8'($urandom % 128);
        selq[c][g] = 2'($urandom);
      end
      for (int k = 0; k < K; k++) begin
        case (dt)
          DT_INT8: wq[c][k] = 8'($urandom);
          DT_INT6: wq[c][k] = {2'b00, 6'($urandom)};
          DT_FP4:  wq[c][k] = ($urandom % 6 == 0) ? 8'h08 : {4'h0, 4'($urandom)};
          default: wq[c][k] = ($urandom % 6 == 0) ? 8'h04 : {5'h0, 3'($urandom)};
        endcase
      end
    end
    for (int r = 0; r < NR; r++)
      for (int wd = 0; wd < K / LANES; wd++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_bank = $bits(ib_wr_bank)'(r); ib_wr_addr = $bits(ib_wr_addr)'(ib + wd);
        for (int l = 0; l < LANES; l++) ib_wr_data[l] = xa[r][wd * LANES + l];
      end
    @(negedge clk) ib_wr_en = 0;
    for (int c = 0; c < NC; c++) begin
      for (int wd = 0; wd < K / LANES; wd++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_bank = $bits(wb_wr_bank)'(c); wb_wr_addr = $bits(wb_wr_addr)'(wb + wd);
        for (int l = 0; l < LANES; l++) wb_wr_data[l] = wq[c][wd * LANES + l];
        if (wd < P_NG) begin
          wb_mwr_en = 1; wb_mwr_bank = $bits(wb_mwr_bank)'(c);
          wb_mwr_addr = $bits(wb_mwr_addr)'(mb + wd);
          wb_mwr_sel = selq[c][wd]; wb_mwr_sf = sfq[c][wd];
        end else wb_mwr_en = 0;
      end
    end
    @(negedge clk) begin wb_wr_en = 0; wb_mwr_en = 0; end
  endtask

  task automatic run_pass(dtype_e dt, int ib, int wb, int mb, bit acc);
    int cyc, expc, T;
    real expv, mag, p, gs, gm, got;
    @(negedge clk);
    cfg_dtype = dt; cfg_ibase = $bits(cfg_ibase)'(ib); cfg_wbase = $bits(cfg_wbase)'(wb);
    cfg_mbase = $bits(cfg_mbase)'(mb); cfg_accum = acc; start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    T = int'(terms_of(dt));
    expc = P_NG * GW * T + LAT + 1;
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("dtype %0d: pass took %0d cycles, expected %0d", dt, cyc, expc);
    end
    checks++;
    if (stat_drain || stat_dq_busy) begin
      failures++;
      $display("dtype %0d: array still busy at done", dt);
    end
    n_mode[dt]++;
    if (P_NG > 1) n_multigroup++;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        expv = acc ? prev_exp[r][c] : 0.0;
        mag  = acc ? prev_mag[r][c] : 0.0;
        for (int g = 0; g < P_NG; g++) begin
          gs = 0.0; gm = 0.0;
          for (int k = g * P_GROUP; k < (g + 1) * P_GROUP; k++) begin
            p = fp16_to_real(xa[r][k]) * wval(dt, wq[c][k], selq[c][g]);
            gs += p; gm += absr(p);
          end
          expv += gs * real'(sfq[c][g]);
          mag  += gm * real'(sfq[c][g]);
        end
        rd_tr = $bits(rd_tr)'(r / P_ROWS); rd_row = $bits(rd_row)'(r % P_ROWS);
        rd_tc = $bits(rd_tc)'(c / P_COLS); rd_col = $bits(rd_col)'(c % P_COLS);
        prev_exp[r][c] = expv;
        prev_mag[r][c] = mag;
        #1;
        got = mant_exp_real(longint'($signed(rd_data.m)), int'(rd_data.e));
        checks++;
        if (absr(got - expv) > mag * pow2(-8) + 1.0) begin
          failures++;
          if (failures < 10)
            $display("dtype %0d out[%0d][%0d] = %e expected %e (mag %e)", dt, r, c, got, expv, mag);
        end
      end
    if (acc) n_accum++;
    else if (n_mode[0] + n_mode[1] + n_mode[2] + n_mode[3] > 1) n_overwrite++;
    $display("pass dtype %0d done in %0d cycles", dt, cyc);
  endtask

  initial begin
    int words;
    words = K / LANES;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int d = 0; d < 4; d++) begin
      if (d == 3) program_sv(3.0, -3.0, 6.0, -6.0);
      load_pass(dtype_e'(d), (d * words) % P_IDEPTH, (d * words) % P_WDEPTH, (d * P_NG) % P_MDEPTH);
      run_pass(dtype_e'(d), (d * words) % P_IDEPTH, (d * words) % P_WDEPTH, (d * P_NG) % P_MDEPTH, 1'b0);
    end
    load_pass(DT_INT6, (4 * words) % P_IDEPTH, (4 * words) % P_WDEPTH, (4 * P_NG) % P_MDEPTH);
    run_pass(DT_INT6, (4 * words) % P_IDEPTH, (4 * words) % P_WDEPTH, (4 * P_NG) % P_MDEPTH, 1'b1);
    $display("modes INT8=%0d INT6=%0d FP4=%0d FP3=%0d special=%0d svprog=%0d norm=%0d dq_overlap=%0d drain_overlap=%0d multigroup=%0d overwrite=%0d accum=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_special, n_svprog, n_norm,
             n_dq_overlap, n_drain_overlap, n_multigroup, n_overwrite, n_accum);
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (n_mode[d] == 0) failures++;
    end
    checks++; if (n_special == 0) begin failures++; $display("no special value used"); end
    checks++; if (n_svprog == 0) failures++;
    checks++; if (n_norm == 0) begin failures++; $display("no normalisation"); end
    checks++; if (n_dq_overlap == 0) begin failures++; $display("no dequant overlap"); end
    checks++; if (n_drain_overlap == 0) begin failures++; $display("no drain overlap"); end
    checks++; if (n_multigroup == 0) begin failures++; $display("no multi-group pass"); end
    checks++; if (n_overwrite == 0) failures++;
    checks++; if (n_accum == 0) begin failures++; $display("no accumulate-mode pass"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
