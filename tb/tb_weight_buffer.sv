// tb_weight_buffer: fills a reduced weight buffer (4 banks x 64 words, 16
// metadata entries) with random weight words and group metadata, then reads
// them back: all banks in parallel, one-cycle latency, data held without rd_en.
module tb_weight_buffer;
  import bitmod_pkg::*;

  localparam int NBANK = 4, DEPTH = 64, MDEPTH = 16;
  logic clk = 0, wr_en = 0, mwr_en = 0, rd_en = 0;
  logic [1:0] wr_bank = 0, mwr_bank = 0, mwr_sel = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [3:0] mwr_addr = 0, mrd_addr = 0;
  logic [LANES-1:0][7:0] wr_data = '0;
  logic [SF_W-1:0] mwr_sf = 0;
  logic [NBANK-1:0][LANES-1:0][7:0] rd_data;
  logic [NBANK-1:0][1:0] rd_sel;
  logic [NBANK-1:0][SF_W-1:0] rd_sf;
  logic [31:0] wm [NBANK][DEPTH];
  logic [9:0]  mm [NBANK][MDEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.NBANK(NBANK), .DEPTH(DEPTH), .MDEPTH(MDEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBANK; b++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = 6'(a); wr_data = $urandom;
        wm[b][a] = wr_data;
        if (a < MDEPTH) begin
          mwr_en = 1; mwr_bank = 2'(b); mwr_addr = 4'(a);
          mwr_sel = 2'($urandom); mwr_sf = 8'($urandom);
          mm[b][a] = {mwr_sel, mwr_sf};
        end else mwr_en = 0;
      end
    end
    @(negedge clk) begin wr_en = 0; mwr_en = 0; end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 6'(a); mrd_addr = 4'(a % MDEPTH);
      @(negedge clk);
      rd_en = 0; rd_addr = 6'(a + 3);
      for (int k = 0; k < 2; k++) begin
        for (int b = 0; b < NBANK; b++) begin
          checks++;
          if (rd_data[b] !== wm[b][a]) failures++;
          checks++;
          if ({rd_sel[b], rd_sf[b]} !== mm[b][a % MDEPTH]) failures++;
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
