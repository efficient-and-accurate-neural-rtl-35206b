// tb_ct_workload: the CT-reconstruction network at its published size, run on
// the full-size engine (default parameters).
//
// Network (one query voxel (x, y, z) in, one attenuation value out):
//   encode   3 -> 64 Gaussian projections, [cos, sin, x, y, z] = 131 values
//   layer 0  131 -> 100, sine, 14 bits, s = 1.5   (3 row bands of 34 outputs)
//   layer 1  100 -> 10, none,  14 bits            (low-rank factor U)
//   layer 2  10 -> 100, sine,  14 bits            (low-rank factor V, 4 bands)
//   layer 3  100 -> 1, none,   12 bits
// 15,200 weights (212,600 cells) are written by the HAQ loop, random targets
// in [-1, 1]; the encoder matrix is formed at random. Crossbar placement:
//   layer 0 rows 0..392,   columns 0..475
//   layer 3 rows 0..99,    columns 476..487
//   layer 1 rows 393..492, columns 0..139
//   layer 2 rows 393..432, columns 140..503
// For four voxels the testbench checks every stage in real arithmetic
// against the cell conductances (inputs taken from the hardware's previous
// stage; the reference clips at the ADC full scale as the converter does),
// and reports how far the hardware output is from the same network computed
// with the exact target weights and no crossbar at all (the HAQ accuracy on
// this workload); that distance is checked against a loose bound (0.2). It also
// checks the HAQ results per layer: RMS error of the programmed weights at
// most 0.012 and no more than 1 % of them further than 0.05 from target.
module tb_ct_workload;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic h_sp_we = 0, h_sp_re = 0;
  logic [SP_AW-1:0] h_sp_addr = 0;
  act_t h_sp_wdata = 0, h_sp_rdata;
  logic ge_cfg_we = 0;
  logic [1:0] ge_cfg_idx = 0;
  ge_cfg_t ge_cfg_data;
  logic layer_we = 0;
  logic [4:0] layer_idx = 0;
  layer_desc_t layer_data;
  logic prog_we = 0;
  logic [5:0] prog_idx = 0;
  op_t prog_data;
  logic w_valid = 0, w_ready;
  logic signed [15:0] w_tar = 0;
  logic [ROW_W-1:0] w_row = 0;
  logic [COL_W-1:0] w_col = 0;
  logic [NB_W-1:0] w_nbits = 0;
  scode_t w_scode = 0;
  logic haq_res_valid;
  logic signed [17:0] haq_res_w_pro;
  logic [NB_MAX-1:0] haq_res_bits;
  logic ge_cmd_valid = 0, ge_cmd_ready, ge_rsp_valid;
  cell_cmd_e ge_cmd_op = CMD_FORM;
  logic [ROW_W-1:0] ge_cmd_row = 0;
  logic [COL_W-1:0] ge_cmd_col = 0;
  cond_t ge_rsp_g;
  logic start = 0, sample_first = 0, sample_last = 0, busy, done;
  logic pix_valid;
  act_t pix_rgb [3];
  logic [16:0] pix_trans;

  int checks = 0, failures = 0;
  int n_adc_sat = 0;

  ge_cfg_t     gcfg;
  layer_desc_t lyr [4];
  real         wt  [4][100][131];   // target weights [layer][out][in]

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  nf_top dut (.*);

  // count ADC conversions that hit full scale (PE side)
  always @(posedge clk) if (rst_n && dut.pa_valid &&
                            (dut.pa_code == 14'sh1fff || dut.pa_code == 14'sh2000)) n_adc_sat++;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sp_write(input int a, input int v);
    @(negedge clk);
    h_sp_we = 1; h_sp_addr = SP_AW'(a); h_sp_wdata = act_t'(v);
    @(negedge clk);
    h_sp_we = 0;
  endtask

  task automatic sp_read(input int a, output int v);
    @(negedge clk);
    h_sp_re = 1; h_sp_addr = SP_AW'(a);
    @(negedge clk);
    h_sp_re = 0;
    v = int'(h_sp_rdata);
  endtask

  function automatic int cell_row(layer_desc_t d, int k, int j);
    return int'(d.row_base) + (j / int'(d.outs_per_band)) * int'(d.in_dim) + k;
  endfunction

  function automatic int cell_col(layer_desc_t d, int j);
    return int'(d.col_base) + (j % int'(d.outs_per_band)) * int'(d.nbits);
  endfunction

  // HAQ accuracy per layer: RMS error and the share of weights more than
  // 0.05 from target (a cell whose write noise is far out can exhaust what
  // the remaining cells can correct, so single misses are expected)
  task automatic program_layer(input int li);
    layer_desc_t d;
    real e, sq;
    int nout, n;
    d = lyr[li];
    sq = 0.0;
    nout = 0;
    n = 0;
    for (int j = 0; j < int'(d.out_dim); j++)
      for (int k = 0; k < int'(d.in_dim); k++) begin
        int t;
        t = int'($urandom % 32769) - 16384;
        wt[li][j][k] = real'(t) / 16384.0;
        @(negedge clk);
        while (!w_ready) @(negedge clk);
        w_valid = 1;
        w_tar   = 16'(t);
        w_row   = ROW_W'(cell_row(d, k, j));
        w_col   = COL_W'(cell_col(d, j));
        w_nbits = d.nbits;
        w_scode = d.s_code;
        @(negedge clk);
        w_valid = 0;
        while (!haq_res_valid) @(negedge clk);
        e = real'(haq_res_w_pro) / 16384.0 - wt[li][j][k];
        sq += e * e;
        n++;
        if (fabs(e) > 0.05) nout++;
      end
    $display("layer %0d: %0d weights, HAQ RMS error %f, %0d beyond 0.05", li, n, $sqrt(sq / n), nout);
    checks += 2;
    if ($sqrt(sq / n) > 0.012) failures++;
    if (nout * 100 > n) failures++;
  endtask

  function automatic real act_ref(act_fn_e f, real y);
    if (y > 7.999) y = 7.999;
    if (y < -8.0) y = -8.0;
    unique case (f)
      ACT_RELU:    return (y < 0.0) ? 0.0 : y;
      ACT_SINE:    return $sin(y);
      ACT_SIGMOID: return 1.0 / (1.0 + $exp(-y));
      default:     return y;
    endcase
  endfunction

  // stage check; also returns the hardware values of the layer's output
  task automatic check_layer(input layer_desc_t d, output real yo [131]);
    int xv [131];
    int v;
    real s, sc, w, coef, acc, cur, fs, amp, yr, tol;
    for (int k = 0; k < int'(d.in_dim); k++) sp_read(int'(d.src_addr) + k, xv[k]);
    s   = real'(s_tenths(d.s_code)) / 10.0;
    sc  = real'(d.scale) / 4096.0;
    amp = $pow(s, real'(int'(d.nbits) - 1));
    fs  = 8191.0 * $pow(2.0, real'(int'(d.adc_shift) - 20));
    tol = 4.0 * $pow(2.0, real'(int'(d.adc_shift) - 20)) / amp * fabs(sc) + 6.0 / 4096.0;
    for (int j = 0; j < int'(d.out_dim); j++) begin
      acc = 0.0;
      for (int k = 0; k < int'(d.in_dim); k++) begin
        w = 0.0;
        coef = 1.0;
        for (int b = 0; b < int'(d.nbits); b++) begin
          w += (2.0 * real'(dut.u_pe_macro.g[cell_row(d, k, j)][cell_col(d, j) + b]) / 256.0 - 1.0)
               * coef;
          coef /= s;
        end
        acc += real'(xv[k]) / 4096.0 * w;
      end
      cur = acc * amp / 2.0;                  // VCMAC output current
      if (cur > fs) cur = fs;
      if (cur < -fs) cur = -fs;
      yr = act_ref(d.act, 2.0 * cur / amp * sc);
      sp_read(int'(d.dst_addr) + j, v);
      yo[j] = real'(v) / 4096.0;
      checks++;
      if (fabs(yo[j] - yr) > tol) begin
        failures++;
        $display("layer dst %0d out %0d: %f exp %f (tol %f)", d.dst_addr, j, yo[j], yr, tol);
      end
    end
  endtask

  initial begin
    int v, cyc;
    real hw [131], ideal_in [131], ideal_out [131], bx, err, err_max;
    int vox [4][3];

    ge_cfg_data = '0; layer_data = '0; prog_data = '0;
    err_max = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    gcfg = '{src_addr: 0, in_dim: 3, enc_dim: 64, row_base: 0, col_base: 0, dst_addr: 8,
             adc_shift: 10, scale: 16'sd4096, append_raw: 1'b1};
    lyr[0] = '{src_addr: 8, in_dim: 131, dst_addr: 200, out_dim: 100, row_base: 0, col_base: 0,
               outs_per_band: 34, nbits: 14, s_code: 4'b0101, adc_shift: 19, scale: 16'sd1024,
               act: ACT_SINE};
    lyr[1] = '{src_addr: 200, in_dim: 100, dst_addr: 300, out_dim: 10, row_base: 393, col_base: 0,
               outs_per_band: 10, nbits: 14, s_code: 4'b0101, adc_shift: 19, scale: 16'sd1024,
               act: ACT_NONE};
    lyr[2] = '{src_addr: 300, in_dim: 10, dst_addr: 400, out_dim: 100, row_base: 393, col_base: 140,
               outs_per_band: 26, nbits: 14, s_code: 4'b0101, adc_shift: 18, scale: 16'sd4096,
               act: ACT_SINE};
    lyr[3] = '{src_addr: 400, in_dim: 100, dst_addr: 500, out_dim: 1, row_base: 0, col_base: 476,
               outs_per_band: 1, nbits: 12, s_code: 4'b0101, adc_shift: 18, scale: 16'sd1024,
               act: ACT_NONE};
    @(negedge clk);
    ge_cfg_we = 1; ge_cfg_idx = 0; ge_cfg_data = gcfg;
    @(negedge clk);
    ge_cfg_we = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      layer_we = 1; layer_idx = 5'(i); layer_data = lyr[i];
      @(negedge clk);
      layer_we = 0;
    end
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      prog_we = 1; prog_idx = 6'(i);
      prog_data = '{opcode: (i == 0) ? OP_ENCODE : (i == 5) ? OP_END : OP_LAYER,
                    idx: 5'((i == 0) ? 0 : i - 1), a: '0, b: '0, len: '0, delta: '0};
      @(negedge clk);
      prog_we = 0;
    end

    // random Gaussian matrix (3 x 64) and the four layers
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 64; c++) begin
        @(negedge clk);
        while (!ge_cmd_ready) @(negedge clk);
        ge_cmd_valid = 1; ge_cmd_op = CMD_FORM; ge_cmd_row = ROW_W'(r); ge_cmd_col = COL_W'(c);
        @(negedge clk);
        ge_cmd_valid = 0;
        while (!ge_rsp_valid) @(negedge clk);
      end
    for (int i = 0; i < 4; i++) program_layer(i);
    $display("programmed 15200 weights by HAQ");

    for (int p = 0; p < 4; p++) begin
      for (int i = 0; i < 3; i++) begin
        vox[p][i] = int'($urandom % 8192) - 4096;
        sp_write(i, vox[p][i]);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      $display("voxel %0d: %0d clocks", p, cyc);

      // encoder stage
      for (int m = 0; m < 64; m++) begin
        bx = 0.0;
        for (int r = 0; r < 3; r++)
          bx += real'(vox[p][r]) / 4096.0 * (real'(dut.u_ge_macro.g[r][m]) / 256.0 - 1.0);
        ideal_in[m]      = $cos(2.0 * 3.14159265 * bx);
        ideal_in[64 + m] = $sin(2.0 * 3.14159265 * bx);
        sp_read(8 + m, v);
        checks++;
        if (fabs(real'(v) / 4096.0 - ideal_in[m]) > 0.02) failures++;
        sp_read(72 + m, v);
        checks++;
        if (fabs(real'(v) / 4096.0 - ideal_in[64 + m]) > 0.02) failures++;
      end
      for (int r = 0; r < 3; r++) ideal_in[128 + r] = real'(vox[p][r]) / 4096.0;

      // layer stages against the conductances
      for (int i = 0; i < 4; i++) check_layer(lyr[i], hw);

      // the same network with exact weights, no crossbar
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < int'(lyr[i].out_dim); j++) begin
          real a;
          a = 0.0;
          for (int k = 0; k < int'(lyr[i].in_dim); k++) a += ideal_in[k] * wt[i][j][k];
          ideal_out[j] = act_ref(lyr[i].act, a * real'(lyr[i].scale) / 4096.0);
        end
        for (int j = 0; j < int'(lyr[i].out_dim); j++) ideal_in[j] = ideal_out[j];
      end
      err = fabs(hw[0] - ideal_out[0]);
      if (err > err_max) err_max = err;
      $display("voxel %0d: output %f, exact-weight network %f", p, hw[0], ideal_out[0]);
    end
    checks++;
    if (err_max > 0.2) begin  // loose: the HAQ errors pass through four layers
      failures++;
      $display("hardware output differs from the exact network by %f", err_max);
    end
    $display("largest distance to the exact network %f; PE ADC conversions at full scale: %0d",
             err_max, n_adc_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
