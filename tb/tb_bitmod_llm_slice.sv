// tb_bitmod_llm_slice: one output block of an LLM feed-forward down-projection
// (reduction length K = 11008, the FFN width of 7B-class Llama models) through
// the accelerator, with the full-depth 512 KB buffers, group size 128 and a
// 2 x 2-tile array (16 x 16 outputs per pass instead of 32 x 32, to keep the
// simulation short; the per-column behaviour is the same).
//
// An input bank holds 8192 FP16 values, so the 86 groups are run as two passes:
// groups 0-63 from the first 8192 activations, then the input buffer is
// reloaded with the remaining 2816 and groups 64-85 run in accumulate mode. All
// 11008 weights of a channel and its 86 metadata entries stay in the weight
// buffer. This is done for INT6 (the lossless configuration) and FP3 with
// special values +-6 (the lossy configuration for generation).
// Checks: every output against the exact reference within the floating-point
// tolerance, and each pass's latency n_groups * 32 * T + LAT + 1.
module tb_bitmod_llm_slice;
  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int TR = 2, TC = 2, ROWS = 8, COLS = 8, GROUP = 128;
  localparam int NR = TR * ROWS, NC = TC * COLS;
  localparam int K = 11008, NG = K / GROUP, NG1 = 64, NG2 = NG - NG1;
  localparam int GW = GROUP / LANES;
  localparam int LAT = TR + TC + SF_W + ROWS + 6;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  dtype_e cfg_dtype = DT_INT6;
  logic [7:0] cfg_ngroups = '0;
  logic cfg_accum = 1'b0;
  logic [10:0] cfg_ibase = '0;
  logic [11:0] cfg_wbase = '0;
  logic [6:0]  cfg_mbase = '0;
  logic sv_we = 0;
  logic [1:0] sv_waddr = 0;
  sv_t sv_wdata = '0;
  logic ib_wr_en = 0;
  logic [3:0] ib_wr_bank = '0;
  logic [10:0] ib_wr_addr = '0;
  fp16_t [LANES-1:0] ib_wr_data = '0;
  logic wb_wr_en = 0;
  logic [3:0] wb_wr_bank = '0;
  logic [11:0] wb_wr_addr = '0;
  logic [LANES-1:0][7:0] wb_wr_data = '0;
  logic wb_mwr_en = 0;
  logic [3:0] wb_mwr_bank = '0;
  logic [6:0] wb_mwr_addr = '0;
  logic [1:0] wb_mwr_sel = '0;
  logic [SF_W-1:0] wb_mwr_sf = '0;
  logic rd_tr = 0, rd_tc = 0;
  logic [2:0] rd_col = '0, rd_row = '0;
  outw_t rd_data;
  logic stat_special, stat_norm, stat_dq_busy, stat_drain;

  int checks = 0, failures = 0;
  fp16_t      xa  [NR][K];
  logic [7:0] wq  [NC][K];
  logic [7:0] sfq [NC][NG];
  logic [1:0] selq [NC][NG];
  real        svv [4];

  bitmod_top #(.TR(TR), .TC(TC), .ROWS(ROWS), .COLS(COLS), .GROUP(GROUP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #(64'd200000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real wval(dtype_e dt, logic [7:0] w, logic [1:0] sel);
    logic [3:0] c;
    if (dt == DT_INT6) return real'($signed(w[5:0]));
    c = {w[2:0], 1'b0};
    if (c == 4'b1000) return 2.0 * svv[sel];
    return 2.0 * (c[3] ? -fp4_mag(c[2:0]) : fp4_mag(c[2:0]));
  endfunction

  // load activations k0 .. k0 + n - 1 of every row at input address 0
  task automatic load_inputs(int k0, int n);
    for (int r = 0; r < NR; r++)
      for (int wd = 0; wd < n / LANES; wd++) begin
        @(negedge clk);
        ib_wr_en = 1; ib_wr_bank = 4'(r); ib_wr_addr = 11'(wd);
        for (int l = 0; l < LANES; l++) ib_wr_data[l] = xa[r][k0 + wd * LANES + l];
      end
    @(negedge clk) ib_wr_en = 0;
  endtask

  task automatic load_weights();
    for (int c = 0; c < NC; c++)
      for (int wd = 0; wd < K / LANES; wd++) begin
        @(negedge clk);
        wb_wr_en = 1; wb_wr_bank = 4'(c); wb_wr_addr = 12'(wd);
        for (int l = 0; l < LANES; l++) wb_wr_data[l] = wq[c][wd * LANES + l];
        wb_mwr_en = (wd < NG);
        wb_mwr_bank = 4'(c); wb_mwr_addr = 7'(wd);
        if (wd < NG) begin wb_mwr_sel = selq[c][wd]; wb_mwr_sf = sfq[c][wd]; end
      end
    @(negedge clk) begin wb_wr_en = 0; wb_mwr_en = 0; end
  endtask

  task automatic run(dtype_e dt, int ng, int wbase, int mbase, bit acc);
    int cyc, expc;
    @(negedge clk);
    cfg_dtype = dt; cfg_ngroups = 8'(ng); cfg_ibase = '0; cfg_wbase = 12'(wbase);
    cfg_mbase = 7'(mbase); cfg_accum = acc; start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    expc = ng * GW * int'(terms_of(dt)) + LAT + 1;
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("pass of %0d groups took %0d cycles, expected %0d", ng, cyc, expc);
    end
  endtask

  task automatic layer(dtype_e dt);
    real expv, mag, p, got;
    for (int r = 0; r < NR; r++)
      for (int k = 0; k < K; k++) xa[r][k] = rand_fp16(8, 16);
    for (int c = 0; c < NC; c++) begin
      for (int g = 0; g < NG; g++) begin
        sfq[c][g] = 8'($urandom % 128);
        selq[c][g] = 2'($urandom);
      end
      for (int k = 0; k < K; k++)
        wq[c][k] = (dt == DT_INT6) ? {2'b00, 6'($urandom)} : {5'h0, 3'($urandom)};
    end
    load_weights();
    load_inputs(0, NG1 * GROUP);
    run(dt, NG1, 0, 0, 1'b0);
    load_inputs(NG1 * GROUP, NG2 * GROUP);
    run(dt, NG2, NG1 * GW, NG1, 1'b1);
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        expv = 0.0; mag = 0.0;
        for (int k = 0; k < K; k++) begin
          p = fp16_to_real(xa[r][k]) * wval(dt, wq[c][k], selq[c][k / GROUP]) * real'(sfq[c][k / GROUP]);
          expv += p; mag += absr(p);
        end
        rd_tr = 1'(r / ROWS); rd_row = 3'(r % ROWS);
        rd_tc = 1'(c / COLS); rd_col = 3'(c % COLS);
        #1;
        got = mant_exp_real(longint'($signed(rd_data.m)), int'(rd_data.e));
        checks++;
        if (absr(got - expv) > mag * pow2(-8) + 1.0) begin
          failures++;
          if (failures < 10) $display("dtype %0d out[%0d][%0d] = %e expected %e", dt, r, c, got, expv);
        end
      end
    $display("dtype %0d: K = %0d done", dt, K);
  endtask

  initial begin
    svv = '{5.0, -5.0, 8.0, -8.0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    layer(DT_INT6);
    // FP3 with the +-6 special values (and +-3 as the alternative pair)
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      sv_we = 1; sv_waddr = 2'(i);
      svv[i] = (i < 2) ? 3.0 : 6.0;
      if (i % 2 == 1) svv[i] = -svv[i];
      sv_wdata = '{sign: svv[i] < 0.0, mag: 5'(int'(absr(svv[i]) * 2.0))};
    end
    @(negedge clk) sv_we = 0;
    layer(DT_FP3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
