// tb_bs_term_gen: drives the term generator (2 columns) with random weight
// words in all four data types and rebuilds each weight from the emitted
// terms. Checks: the value of every weight (INT as signed integer, FP4/FP3 as
// twice the table value or the selected special value), the number of terms
// per word (4/3/2/2 cycles), the one-cycle latency, grp_last only on the last
// term of the last word, the scaling factor pass-through and the special-value
// flag.
module tb_bs_term_gen;
  import bitmod_pkg::*;
  import tb_pkg::*;

  localparam int NCOL = 2;
  logic clk = 0, rst_n = 0;
  logic sv_we = 0;
  logic [1:0] sv_waddr = 0;
  sv_t sv_wdata = '0;
  dtype_e dtype = DT_INT8;
  logic in_valid = 0, in_grp_last = 0, in_pass_first = 0;
  logic [1:0] in_step = 0;
  logic [NCOL-1:0][LANES-1:0][7:0] in_w = '0;
  logic [NCOL-1:0][1:0] in_sv_sel = '0;
  logic [NCOL-1:0][SF_W-1:0] in_sf = '0;
  tctl_t out_ctl;
  colterm_t [NCOL-1:0] out_col;
  logic [NCOL-1:0] out_special;
  int checks = 0, failures = 0;
  real svval [4] = '{5.0, -5.0, 8.0, -8.0};

  bs_term_gen #(.NCOL(NCOL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real weight_val(dtype_e dt, logic [7:0] w, logic [1:0] sel);
    logic [3:0] c;
    case (dt)
      DT_INT8: return real'($signed(w));
      DT_INT6: return real'($signed(w[5:0]));
      default: begin
        c = (dt == DT_FP3) ? {w[2:0], 1'b0} : w[3:0];
        if (c == 4'b1000) return 2.0 * svval[sel];
        return 2.0 * (c[3] ? -fp4_mag(c[2:0]) : fp4_mag(c[2:0]));
      end
    endcase
  endfunction

  initial begin
    real acc [NCOL][LANES];
    int  nterm, nspec;
    logic any_special;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 4; d++) begin
      dtype = dtype_e'(d);
      nspec = 0;
      for (int word = 0; word < 40; word++) begin
        @(negedge clk);
        for (int c = 0; c < NCOL; c++) begin
          in_sv_sel[c] = 2'($urandom);
          in_sf[c]     = 8'($urandom);
          for (int l = 0; l < LANES; l++) begin
            in_w[c][l] = 8'($urandom);
            if ($urandom % 5 == 0) in_w[c][l] = (dtype == DT_FP3) ? 8'h4 : 8'h8;  // -0
            acc[c][l] = 0.0;
          end
        end
        nterm = 0;
        any_special = 1'b0;
        for (int s = 0; s < int'(terms_of(dtype)); s++) begin
          in_valid = 1; in_step = 2'(s); in_grp_last = (word % 4 == 3); in_pass_first = (word < 4);
          @(posedge clk); #1;
          // outputs registered: they now reflect step s
          nterm++;
          checks++;
          if (!out_ctl.valid || out_ctl.pass_first != (word < 4)) failures++;
          checks++;
          if (out_ctl.grp_last != ((word % 4 == 3) && s == int'(terms_of(dtype)) - 1)) begin
            failures++;
            $display("grp_last wrong dtype %0d word %0d step %0d", d, word, s);
          end
          for (int c = 0; c < NCOL; c++) begin
            any_special |= out_special[c];
            checks++;
            if (out_col[c].sf != in_sf[c]) failures++;
            for (int l = 0; l < LANES; l++)
              acc[c][l] += term_real(out_col[c].t[l], int'(out_ctl.bsig));
          end
          @(negedge clk);
        end
        in_valid = 0;
        checks++;
        if (nterm != ((d == 0) ? 4 : (d == 1) ? 3 : 2)) failures++;
        if (any_special) nspec++;
        for (int c = 0; c < NCOL; c++)
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (acc[c][l] != weight_val(dtype, in_w[c][l], in_sv_sel[c])) begin
              failures++;
              $display("dtype %0d w=%h sel=%0d: got %f expected %f", d, in_w[c][l],
                       in_sv_sel[c], acc[c][l], weight_val(dtype, in_w[c][l], in_sv_sel[c]));
            end
          end
      end
      checks++;
      if ((d >= 2) != (nspec > 0)) begin
        failures++;
        $display("special-value flag wrong for dtype %0d", d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
