// tb_input_buffer: fills a reduced buffer (4 banks x 64 words) bank by bank
// with random activations and reads every address back, checking all banks
// at once, the one-cycle read latency and that rd_data holds while rd_en = 0.
module tb_input_buffer;
  import bitmod_pkg::*;

  localparam int NBANK = 4, DEPTH = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [1:0] wr_bank = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  fp16_t [LANES-1:0] wr_data = '0;
  fp16_t [NBANK-1:0][LANES-1:0] rd_data;
  logic [LANES*16-1:0] model [NBANK][DEPTH];
  int checks = 0, failures = 0;

  input_buffer #(.NBANK(NBANK), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = 6'(a);
        wr_data = {$urandom, $urandom};
        model[b][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 6'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 6'(a + 1);
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (rd_data[b] !== model[b][a]) failures++;
      end
      @(negedge clk);   // no read: data must hold
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (rd_data[b] !== model[b][a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
