// bitmod_seq: sequencer that streams one output pass through the array.
//
// A pass computes a (TR*8) x (TC*8) block of outputs over n_groups weight
// groups. For every group and every weight word of the group (GROUP/4 words,
// four weights per PE lane set) it reads one word from each buffer bank and
// then steps the term index s = 0 .. T-1, where T is the number of bit-serial
// terms of the data type (INT8 4, INT6 3, FP4/FP3 2). Buffers are read only on
// s = 0 and hold their output for the remaining steps. The last word of a group
// is flagged (grp_last) and the first group of the pass carries pass_first so
// the column accumulators overwrite instead of add, unless the pass was started
// with 'accum' set: then every group adds to the outputs already held, so a
// reduction longer than the buffers hold can be split over several passes. After the last term the
// sequencer waits LAT cycles for the array to finish dequantizing and draining
// and then pulses 'done'.
//
// The paper does not describe a controller; this one is the simplest sequencing
// that produces the term stream the paper's PE array consumes. Timing: one term
// per cycle, so a pass takes n_groups * (GROUP/4) * T + LAT + 1 cycles from the
// clock edge that samples start
// to done.
module bitmod_seq
  import bitmod_pkg::*;
#(
  parameter int unsigned GROUP = 128,
  parameter int unsigned IADDR = 11,
  parameter int unsigned WADDR = 12,
  parameter int unsigned MADDR = 7,
  parameter int unsigned LAT   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  dtype_e           dtype,
  input  logic [7:0]       n_groups,
  input  logic             accum,
  input  logic [IADDR-1:0] ibase,
  input  logic [WADDR-1:0] wbase,
  input  logic [MADDR-1:0] mbase,
  output logic             busy,
  output logic             done,
  // buffer reads
  output logic             rd_en,
  output logic [IADDR-1:0] i_addr,
  output logic [WADDR-1:0] w_addr,
  output logic [MADDR-1:0] m_addr,
  // term control, aligned with the read request
  output logic             t_valid,
  output logic [1:0]       t_step,
  output logic             t_grp_last,
  output logic             t_pass_first
);
  localparam int unsigned GW = GROUP / LANES;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e           state;
  dtype_e           dt_q;
  logic             acc_q;
  logic [7:0]       ng_q, g;
  logic [$clog2(GW)-1:0] wd;
  logic [1:0]       s;
  logic [7:0]       fl;
  logic [IADDR-1:0] ia;
  logic [WADDR-1:0] wa;
  logic [MADDR-1:0] ma;
  logic             last_s, last_w, last_g;

  always_comb begin
    last_s = (32'(s) == terms_of(dt_q) - 1);
    last_w = (32'(wd) == GW - 1);
    last_g = (g == ng_q - 8'd1);
  end

  assign busy         = (state != S_IDLE);
  assign t_valid      = (state == S_RUN);
  assign t_step       = s;
  assign t_grp_last   = (state == S_RUN) && last_w;
  assign t_pass_first = (state == S_RUN) && (g == 8'd0) && !acc_q;
  assign rd_en        = (state == S_RUN) && (s == 2'd0);
  assign i_addr       = ia;
  assign w_addr       = wa;
  assign m_addr       = ma;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      dt_q  <= DT_INT8;
      acc_q <= 1'b0;
      ng_q  <= '0;
      g     <= '0;
      wd    <= '0;
      s     <= '0;
      fl    <= '0;
      ia    <= '0;
      wa    <= '0;
      ma    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && n_groups != 8'd0) begin
          state <= S_RUN;
          dt_q  <= dtype;
          acc_q <= accum;
          ng_q  <= n_groups;
          g     <= '0;
          wd    <= '0;
          s     <= '0;
          ia    <= ibase;
          wa    <= wbase;
          ma    <= mbase;
        end
        S_RUN: begin
          s <= s + 2'd1;
          if (last_s) begin
            s  <= '0;
            wd <= wd + 1'b1;
            ia <= ia + 1'b1;
            wa <= wa + 1'b1;
            if (last_w) begin
              wd <= '0;
              g  <= g + 8'd1;
              ma <= ma + 1'b1;
              if (last_g) begin
                state <= S_FLUSH;
                fl    <= 8'(LAT - 1);
              end
            end
          end
        end
        S_FLUSH: begin
          fl <= fl - 8'd1;
          if (fl == 8'd0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
