// tb_haq_programmer: self-checking test of the hardware-aware quantization
// loop, connected to a 16 x 64 crossbar model.
// For 300 random weights in [-1, 1] (bit widths 4..16, random switch codes)
// the testbench reads the written cells' conductances out of the model and,
// in real arithmetic, replays the paper's rule: bit i is set (LRS) exactly
// when w_tar - sum_{j<i} (2 g_j - 1) (1/s)^j >= 0. It checks every bit
// decision, that set cells are in LRS and reset cells in HRS, that res_w_pro
// equals the replayed sum (within rounding), and that 100 12-bit weights
// with s = 1.5 land near their targets despite the write noise: RMS error at
// most 0.015 and at most 3 of them further than 0.05 (a cell whose noise is
// far out can exhaust what the remaining bits can correct).
module tb_haq_programmer;
  import nf_pkg::*;

  localparam int NR = 16, NC = 64;
  logic clk = 0, rst_n = 0;
  logic w_valid = 0, w_ready;
  logic signed [15:0] w_tar = 0;
  logic [ROW_W-1:0] w_row = 0;
  logic [COL_W-1:0] w_col = 0;
  logic [NB_W-1:0] w_nbits = 0;
  scode_t w_scode = 0;
  logic cmd_valid, cmd_ready, rsp_valid;
  cell_cmd_e cmd_op;
  logic [ROW_W-1:0] cmd_row;
  logic [COL_W-1:0] cmd_col;
  cond_t rsp_g;
  logic res_valid;
  logic signed [17:0] res_w_pro;
  logic [NB_MAX-1:0] res_bits;
  int checks = 0, failures = 0;
  cur_t sl_grp_cur [NB_MAX];
  logic vmm_done;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  haq_programmer dut (.*);

  rram_macro #(.N_ROWS(NR), .N_COLS(NC)) u_mac (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_row, .cmd_col,
    .rsp_valid, .rsp_g, .bl_we(1'b0), .bl_idx('0), .bl_val('0),
    .vmm_start(1'b0), .vmm_row_base('0), .vmm_row_cnt('0), .vmm_col_base('0),
    .vmm_col_cnt('0), .g_bias('0), .vmm_done, .sl_grp_base('0), .sl_grp_cur
  );

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real max_err12, sq12;
    int  nout12;
    max_err12 = 0.0;
    sq12 = 0.0;
    nout12 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int n, r, c0;
      real tr, s, coef, wp;
      n  = (t < 100) ? 12 : 4 + int'($urandom % 13);
      r  = int'($urandom % NR);
      c0 = int'($urandom % (NC - 16));
      @(negedge clk);
      while (!w_ready) @(negedge clk);
      w_valid = 1;
      w_tar   = 16'(int'($urandom % 32769) - 16384);
      w_row   = ROW_W'(r);
      w_col   = COL_W'(c0);
      w_nbits = NB_W'(n);
      w_scode = (t < 100) ? 4'b0101 : scode_t'($urandom);
      @(negedge clk);
      w_valid = 0;
      while (!res_valid) @(negedge clk);
      tr = real'(w_tar) / 16384.0;
      s  = real'(s_tenths(w_scode)) / 10.0;
      coef = 1.0;
      wp = 0.0;
      for (int i = 0; i < n; i++) begin
        int g;
        bit exp_set;
        g = int'(u_mac.g[r][c0 + i]);
        exp_set = (tr - wp) >= -1e-4;
        checks += 2;
        if (fabs(tr - wp) > 2e-3 && res_bits[i] != exp_set) begin
          failures++;
          $display("t %0d bit %0d: set %0d exp %0d", t, i, res_bits[i], exp_set);
        end
        if (res_bits[i] != (g > 64)) begin
          failures++;
          $display("t %0d bit %0d: cell g %0d but set=%0d", t, i, g, res_bits[i]);
        end
        wp += (2.0 * real'(g) / 256.0 - 1.0) * coef;
        coef = coef / s;
      end
      checks++;
      if (fabs(real'(res_w_pro) / 16384.0 - wp) > 0.005) begin
        failures++;
        $display("t %0d: w_pro %f exp %f", t, real'(res_w_pro) / 16384.0, wp);
      end
      if (t < 100) begin
        if (fabs(wp - tr) > max_err12) max_err12 = fabs(wp - tr);
        if (fabs(wp - tr) > 0.05) nout12++;
        sq12 += (wp - tr) * (wp - tr);
      end
    end
    $display("12-bit, s=1.5: RMS |w_pro - w_tar| = %f, max %f, %0d beyond 0.05",
             $sqrt(sq12 / 100.0), max_err12, nout12);
    checks += 2;
    if ($sqrt(sq12 / 100.0) > 0.015) failures++;
    if (nout12 > 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
