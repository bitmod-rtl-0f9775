// tb_booth_term: exhaustive check of the radix-4 Booth term decoder. For every
// INT8 value the four terms, weighted by their bit-significance, must add up to
// the signed weight; likewise the three terms of every INT6 value. The Booth
// truth table (string -> operation) and the bsig values 0/2/4/6 are also
// checked case by case.
module tb_booth_term;
  import bitmod_pkg::*;
  import tb_pkg::*;

  logic [7:0] w;
  logic [1:0] k;
  wterm_t     term;
  logic [2:0] bsig;
  int checks = 0, failures = 0;

  booth_term dut (.w, .k, .term, .bsig);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum;
    // INT8
    for (int v = -128; v < 128; v++) begin
      sum = 0.0;
      for (int kk = 0; kk < 4; kk++) begin
        w = 8'(v); k = 2'(kk); #1;
        checks++;
        if (int'(bsig) != 2 * kk) failures++;
        sum += term_real(term, int'(bsig));
      end
      checks++;
      if (sum != real'(v)) begin
        failures++;
        $display("INT8 %0d decoded as %f", v, sum);
      end
    end
    // INT6 (upper bits random, must be ignored)
    for (int v = -32; v < 32; v++) begin
      sum = 0.0;
      for (int kk = 0; kk < 3; kk++) begin
        w = {2'($urandom), 6'(v)}; k = 2'(kk); #1;
        sum += term_real(term, int'(bsig));
      end
      checks++;
      if (sum != real'(v)) begin
        failures++;
        $display("INT6 %0d decoded as %f", v, sum);
      end
    end
    // truth table: string 011 -> +2x, 100 -> -2x, 111 -> 0 (term k = 1)
    w = 8'b0000_1100; k = 2'd1; #1;   // string {w3,w2,w1} = 110 -> -x
    checks++; if (!(term.sign && term.exp == 0 && term.man)) failures++;
    w = 8'b0000_0110; k = 2'd1; #1;   // string 011 -> +2x
    checks++; if (!(!term.sign && term.exp == 1 && term.man)) failures++;
    w = 8'b0000_1000; k = 2'd1; #1;   // string 100 -> -2x
    checks++; if (!(term.sign && term.exp == 1 && term.man)) failures++;
    w = 8'b0000_1110; k = 2'd1; #1;   // string 111 -> 0
    checks++; if (term.man) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
