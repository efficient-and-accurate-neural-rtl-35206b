// haq_programmer: hardware-aware quantization (HAQ) write-read-compare loop.
//
// A weight w_tar, already scaled to [-1, 1], is stored in nbits cells of one
// crossbar row as w = sum_i b_i * (1/s)^i, where b_i = 2*g_i - 1 is the
// cell's normalised conductance g_i with the universal bias applied (about
// +1 for a set cell, -1 for a reset one). Instead of writing precomputed
// bits, the loop picks each bit from the error left by the cells already
// written, so each cell's write noise is compensated by the cells after it
// (paper Fig. 2d):
//   w_pro = 0, coef = 1
//   for i in 0 .. nbits-1:
//     dW = w_tar - w_pro
//     dW > 0 : set cell i to LRS, dW < 0 : reset cell i to HRS
//     read g_i back;  w_pro += (2*g_i - 1) * coef;  coef = coef / s
// The flowchart gives the branch directions and the end test; the choice of
// "set" when dW is exactly 0, the Q1.14 arithmetic and 1/s rounded to Q2.14
// are this design's.
//
// Interface: w_valid/w_ready accept one weight with its first cell (w_row,
// w_col; bit i goes to column w_col+i), bit count w_nbits and VCMAC switch
// code w_scode (s = 1 + 0.8 C4 + 0.4 C3 + 0.2 C2 + 0.1 C1). The cell command
// port drives the crossbar (two commands per bit: program then read); w_nbits
// is clamped to 1..NB_MAX. When
// all bits are written, res_valid pulses with res_w_pro, the value the cells
// now hold (Q2.14), and res_bits, the chosen bit pattern (bit i = 1 for set).
module haq_programmer
  import nf_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // weight input
  input  logic                  w_valid,
  output logic                  w_ready,
  input  logic signed [15:0]    w_tar,
  input  logic [ROW_W-1:0]      w_row,
  input  logic [COL_W-1:0]      w_col,
  input  logic [NB_W-1:0]       w_nbits,
  input  scode_t                w_scode,
  // crossbar cell command port
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output cell_cmd_e             cmd_op,
  output logic [ROW_W-1:0]      cmd_row,
  output logic [COL_W-1:0]      cmd_col,
  input  logic                  rsp_valid,
  input  cond_t                 rsp_g,
  // result
  output logic                  res_valid,
  output logic signed [17:0]    res_w_pro,
  output logic [NB_MAX-1:0]     res_bits
);

  typedef enum logic [2:0] {S_IDLE, S_PROG, S_PROG_WAIT, S_READ, S_READ_WAIT} state_e;
  state_e state;

  logic signed [17:0] tar, wpro;
  logic        [15:0] coef, inv_s;
  logic [ROW_W-1:0]   row;
  logic [COL_W-1:0]   col0;
  logic [NB_W-1:0]    nb, bit_i;
  logic               set_bit;

  logic signed [17:0] b_val;
  logic signed [35:0] prod;
  logic        [31:0] coef_next;

  assign b_val     = (18'(rsp_g) <<< 7) - 18'sd16384;      // (2g - 1) in Q.14
  assign prod      = 36'(b_val) * $signed({20'd0, coef});
  assign coef_next = (32'(coef) * 32'(inv_s)) >> 14;

  assign w_ready   = (state == S_IDLE);
  assign cmd_row   = row;
  assign cmd_col   = col0 + COL_W'(bit_i);
  assign cmd_valid = (state == S_PROG) || (state == S_READ);
  assign cmd_op    = (state == S_READ) ? CMD_READ : (set_bit ? CMD_SET : CMD_RESET);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tar       <= '0;
      wpro      <= '0;
      coef      <= '0;
      inv_s     <= '0;
      row       <= '0;
      col0      <= '0;
      nb        <= '0;
      bit_i     <= '0;
      set_bit   <= 1'b0;
      res_valid <= 1'b0;
      res_w_pro <= '0;
      res_bits  <= '0;
    end else begin
      res_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (w_valid) begin
          tar      <= 18'(w_tar);
          wpro     <= '0;
          coef     <= 16'd16384;
          inv_s    <= inv_s_q14(w_scode);
          row      <= w_row;
          col0     <= w_col;
          nb       <= (w_nbits == '0) ? NB_W'(1) :
                      (32'(w_nbits) > NB_MAX) ? NB_W'(NB_MAX) : w_nbits;
          bit_i    <= '0;
          res_bits <= '0;
          set_bit  <= (w_tar >= 0);
          state    <= S_PROG;
        end
        S_PROG: if (cmd_ready) state <= S_PROG_WAIT;
        S_PROG_WAIT: if (rsp_valid) state <= S_READ;
        S_READ: if (cmd_ready) state <= S_READ_WAIT;
        S_READ_WAIT: if (rsp_valid) begin
          logic signed [17:0] wnew;
          wnew = wpro + 18'(prod >>> 14);
          wpro <= wnew;
          coef <= coef_next[15:0];
          res_bits[bit_i[3:0]] <= set_bit;
          if (bit_i + NB_W'(1) >= nb) begin
            res_valid <= 1'b1;
            res_w_pro <= wnew;
            state     <= S_IDLE;
          end else begin
            bit_i   <= bit_i + NB_W'(1);
            set_bit <= (tar - wnew) >= 0;
            state   <= S_PROG;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
