// tb_sv_regfile: reset contents, programming of the four entries and
// independent selection by several readers.
module tb_sv_regfile;
  import bitmod_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] waddr = 0;
  sv_t wdata = '0;
  logic [3:0][1:0] sel;
  sv_t [3:0] sv;
  sv_t model [4];
  int checks = 0, failures = 0;

  sv_regfile #(.N_RD(4)) dut (.clk, .rst_n, .we, .waddr, .wdata, .sel, .sv);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < 4; r++) begin
      for (int s = 0; s < 4; s++) begin
        sel[r] = 2'((s + r) % 4);
        #1;
        checks++;
        if (sv[r] !== model[(s + r) % 4]) begin
          failures++;
          $display("reader %0d entry %0d mismatch", r, (s + r) % 4);
        end
      end
    end
  endtask

  initial begin
    sel = '0;
    model = '{'{1'b0, 5'd10}, '{1'b1, 5'd10}, '{1'b0, 5'd16}, '{1'b1, 5'd16}};
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    // program the FP3 special values +3, -3, +6, -6
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      we = 1; waddr = 2'(i);
      wdata = '{sign: 1'(i % 2), mag: (i < 2) ? 5'd6 : 5'd12};
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    check_all();
    repeat (20) begin
      @(negedge clk);
      we = 1; waddr = 2'($urandom); wdata = sv_t'($urandom);
      model[waddr] = wdata;
    end
    @(negedge clk) we = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
