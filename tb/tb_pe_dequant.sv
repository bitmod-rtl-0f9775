// tb_pe_dequant: random group partial sums and scaling factors through the
// bit-serial dequantizer. Checks the product value (exact up to the truncation
// of the final normalisation), that the mantissa fits 15 bits after
// normalisation, busy during exactly 8 cycles and 'done' 9 cycles after start.
module tb_pe_dequant;
  import bitmod_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [MACC_W-1:0] m_in = '0;
  logic [EW-1:0] e_in = '0;
  logic [SF_W-1:0] sf_in = '0;
  grp_t res;
  int checks = 0, failures = 0;

  pe_dequant dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv, got;
    int cyc, nbusy;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      m_in  = MACC_W'($signed(int'($urandom % 16385) - 8192));
      if (it < 4) m_in = (it % 2) ? -15'sd8192 : 15'sd8192;
      e_in  = EW'($urandom % 40);
      sf_in = (it < 4) ? 8'd127 : 8'($urandom % 128);
      start = 1;
      expv  = real'(m_in) * real'(sf_in) * pow2(int'(e_in));
      @(negedge clk);
      start = 0;
      cyc = 1; nbusy = 0;
      while (!done && cyc < 30) begin
        if (busy) nbusy++;
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != 9 || nbusy != 8) begin
        failures++;
        $display("timing: done after %0d cycles, busy %0d", cyc, nbusy);
      end
      got = real'(res.m) * pow2(int'(res.e));
      checks++;
      if (absr(got - expv) >= pow2(int'(res.e)) + 0.0) begin
        failures++;
        $display("m=%0d sf=%0d e=%0d: got %f expected %f", m_in, sf_in, e_in, got, expv);
      end
      checks++;
      if (res.m > 21'sd16383 || res.m < -21'sd16384) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
