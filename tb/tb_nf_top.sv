// tb_nf_top: end-to-end test of the whole engine at its default size
// (two 512 x 512 crossbars, 1024-word scratchpad), running a miniature
// dynamic-scene neural radiance field on one camera ray of four samples:
//
//   encode (x, y, z, t)       GE config 0: 4 -> 8 projections  -> sp[16..31]
//   deformation layer 0       16 -> 10, ReLU, 8 bits, 3 row bands -> sp[40..49]
//   deformation layer 1       10 -> 3, none  (dx, dy, dz)        -> sp[50..52]
//   x += dx                   OP_ADD on sp[0..2]
//   encode (x', y', z')       GE config 1: 3 -> 8 + raw inputs  -> sp[60..78]
//   encode (theta, phi)       GE config 2: 2 -> 4               -> sp[90..97]
//   canonical layer 2         19 -> 12, sine (SIREN style)      -> sp[100..111]
//   density layer 3           12 -> 1, ReLU                     -> sp[120]
//   feature layer 4           12 -> 6, none                     -> sp[84..89]
//   colour layer 5            [feature, gamma(d)] 14 -> 3, sigmoid -> sp[121..123]
//   render                    sigma = sp[120], rgb = sp[121..123]
//
// All weights are written through the HAQ programmer, the encoder matrix by
// random forming. After every sample the testbench reads the scratchpad and
// checks each stage in real arithmetic against the conductances held in the
// two crossbar models, using the hardware's own previous-stage values as
// inputs (tolerance: ADC step after rescaling, plus CORDIC and rounding
// error). The rendered pixel is checked against the quadrature formula over
// the four samples. The testbench also counts each mechanism (forming, HAQ
// writes, encoder passes, multi-band layers, every activation function, the
// vector add, render samples, pixels) and fails any that never happened.
module tb_nf_top;
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
  // mechanism counters
  int n_form = 0, n_haq = 0, n_enc = 0, n_layer = 0, n_multiband = 0, n_add = 0;
  int n_render = 0, n_pix = 0;
  int n_act [4];

  ge_cfg_t     gcfg [3];
  layer_desc_t lyr  [6];

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  nf_top dut (.*);

  // ------------------------------------------------------------ monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.ge_done) n_enc++;
    if (dut.pe_done) n_layer++;
    if (dut.u_pe_ctrl.state == dut.u_pe_ctrl.S_BAND && dut.u_pe_ctrl.jg != 0) n_multiband++;
    if (dut.av_valid && dut.av_ready) n_act[int'(dut.av_fn)]++;
    if (dut.q == dut.Q_ADD_W) n_add++;
    if (dut.q == dut.Q_REN_GO) n_render++;
    if (haq_res_valid) n_haq++;
    if (ge_rsp_valid) n_form++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------- host tasks
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

  task automatic program_layer(input layer_desc_t d);
    for (int j = 0; j < int'(d.out_dim); j++)
      for (int k = 0; k < int'(d.in_dim); k++) begin
        @(negedge clk);
        while (!w_ready) @(negedge clk);
        w_valid = 1;
        w_tar   = 16'(int'($urandom % 32769) - 16384);
        w_row   = ROW_W'(cell_row(d, k, j));
        w_col   = COL_W'(cell_col(d, j));
        w_nbits = d.nbits;
        w_scode = d.s_code;
        @(negedge clk);
        w_valid = 0;
        while (!haq_res_valid) @(negedge clk);
      end
  endtask

  task automatic form_region(input int r0, input int nr, input int c0, input int nc);
    for (int r = r0; r < r0 + nr; r++)
      for (int c = c0; c < c0 + nc; c++) begin
        @(negedge clk);
        while (!ge_cmd_ready) @(negedge clk);
        ge_cmd_valid = 1; ge_cmd_op = CMD_FORM;
        ge_cmd_row = ROW_W'(r); ge_cmd_col = COL_W'(c);
        @(negedge clk);
        ge_cmd_valid = 0;
        while (!ge_rsp_valid) @(negedge clk);
      end
  endtask

  task automatic put_op(input int i, input op_code_e oc, input int idx, input int a,
                        input int b, input int len, input int delta);
    @(negedge clk);
    prog_we = 1; prog_idx = 6'(i);
    prog_data = '{opcode: oc, idx: 5'(idx), a: SP_AW'(a), b: SP_AW'(b),
                  len: 8'(len), delta: act_t'(delta)};
    @(negedge clk);
    prog_we = 0;
  endtask

  // ----------------------------------------------------- stage checkers
  task automatic check_encode(input ge_cfg_t c, input int xin [8]);
    real bx, tol;
    int v;
    tol = 2.0 * 3.14159265 * (real'(c.scale) / 4096.0) * $pow(2.0, real'(int'(c.adc_shift) - 20))
          + 4.0 / 4096.0;
    for (int m = 0; m < int'(c.enc_dim); m++) begin
      bx = 0.0;
      for (int r = 0; r < int'(c.in_dim); r++)
        bx += (real'(xin[r]) / 4096.0) *
              (real'(dut.u_ge_macro.g[int'(c.row_base) + r][int'(c.col_base) + m]) / 256.0 - 1.0);
      bx *= real'(c.scale) / 4096.0;
      sp_read(int'(c.dst_addr) + m, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - $cos(2.0 * 3.14159265 * bx)) > tol) begin
        failures++;
        $display("encode dst %0d m %0d: cos %f exp %f", c.dst_addr, m, real'(v) / 4096.0,
                 $cos(2.0 * 3.14159265 * bx));
      end
      sp_read(int'(c.dst_addr) + int'(c.enc_dim) + m, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - $sin(2.0 * 3.14159265 * bx)) > tol) begin
        failures++;
        $display("encode dst %0d m %0d: sin %f exp %f", c.dst_addr, m, real'(v) / 4096.0,
                 $sin(2.0 * 3.14159265 * bx));
      end
    end
    if (c.append_raw)
      for (int r = 0; r < int'(c.in_dim); r++) begin
        sp_read(int'(c.dst_addr) + 2 * int'(c.enc_dim) + r, v);
        checks++;
        if (v != xin[r]) failures++;
      end
  endtask

  task automatic check_layer(input layer_desc_t d);
    int xv [32];
    int v;
    real s, sc, w, coef, acc, yr, tol;
    for (int k = 0; k < int'(d.in_dim); k++) sp_read(int'(d.src_addr) + k, xv[k]);
    s  = real'(s_tenths(d.s_code)) / 10.0;
    sc = real'(d.scale) / 4096.0;
    tol = 4.0 * $pow(2.0, real'(int'(d.adc_shift) - 20)) * $pow(1.0 / s, real'(int'(d.nbits) - 1))
          * fabs(sc) + 6.0 / 4096.0;
    if (d.act == ACT_SIGMOID) tol += 0.025;
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
      yr = acc * sc;
      if (yr > 7.999) yr = 7.999;
      if (yr < -8.0) yr = -8.0;
      unique case (d.act)
        ACT_RELU:    if (yr < 0.0) yr = 0.0;
        ACT_SINE:    yr = $sin(yr);
        ACT_SIGMOID: yr = 1.0 / (1.0 + $exp(-yr));
        default: ;
      endcase
      sp_read(int'(d.dst_addr) + j, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - yr) > tol) begin
        failures++;
        $display("layer dst %0d out %0d: %f exp %f (tol %f)", d.dst_addr, j,
                 real'(v) / 4096.0, yr, tol);
      end
    end
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int xin [8];
    int v, cyc;
    real t_acc, c_acc [3], alpha, sg, dl;
    int coords [4][6];
    int sig_hw, rgb_hw [3];
    localparam int DELTA = 400;      // sample spacing, Q3.12 (~0.1)

    for (int i = 0; i < 4; i++) n_act[i] = 0;
    ge_cfg_data = '0; layer_data = '0; prog_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // encoder configurations (GE crossbar rows 0..9, columns 0..7)
    gcfg[0] = '{src_addr: 0, in_dim: 4, enc_dim: 8, row_base: 0, col_base: 0, dst_addr: 16,
                adc_shift: 10, scale: 16'sd8192, append_raw: 1'b0};
    gcfg[1] = '{src_addr: 0, in_dim: 3, enc_dim: 8, row_base: 4, col_base: 0, dst_addr: 60,
                adc_shift: 10, scale: 16'sd8192, append_raw: 1'b1};
    gcfg[2] = '{src_addr: 4, in_dim: 2, enc_dim: 4, row_base: 7, col_base: 0, dst_addr: 90,
                adc_shift: 10, scale: 16'sd4096, append_raw: 1'b0};
    // layers (PE crossbar)
    lyr[0] = '{src_addr: 16, in_dim: 16, dst_addr: 40, out_dim: 10, row_base: 0, col_base: 0,
               outs_per_band: 4, nbits: 8, s_code: 4'b0101, adc_shift: 16, scale: 16'sd4096,
               act: ACT_RELU};
    lyr[1] = '{src_addr: 40, in_dim: 10, dst_addr: 50, out_dim: 3, row_base: 48, col_base: 0,
               outs_per_band: 3, nbits: 8, s_code: 4'b0101, adc_shift: 16, scale: 16'sd1024,
               act: ACT_NONE};
    lyr[2] = '{src_addr: 60, in_dim: 19, dst_addr: 100, out_dim: 12, row_base: 60, col_base: 0,
               outs_per_band: 12, nbits: 10, s_code: 4'b0011, adc_shift: 16, scale: 16'sd4096,
               act: ACT_SINE};
    lyr[3] = '{src_addr: 100, in_dim: 12, dst_addr: 120, out_dim: 1, row_base: 80, col_base: 0,
               outs_per_band: 1, nbits: 12, s_code: 4'b0101, adc_shift: 16, scale: 16'sd8192,
               act: ACT_RELU};
    lyr[4] = '{src_addr: 100, in_dim: 12, dst_addr: 84, out_dim: 6, row_base: 80, col_base: 20,
               outs_per_band: 6, nbits: 6, s_code: 4'b1010, adc_shift: 16, scale: 16'sd4096,
               act: ACT_NONE};
    lyr[5] = '{src_addr: 84, in_dim: 14, dst_addr: 121, out_dim: 3, row_base: 100, col_base: 0,
               outs_per_band: 3, nbits: 8, s_code: 4'b0101, adc_shift: 16, scale: 16'sd4096,
               act: ACT_SIGMOID};

    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      ge_cfg_we = 1; ge_cfg_idx = 2'(i); ge_cfg_data = gcfg[i];
      @(negedge clk);
      ge_cfg_we = 0;
    end
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      layer_we = 1; layer_idx = 5'(i); layer_data = lyr[i];
      @(negedge clk);
      layer_we = 0;
    end
    put_op(0,  OP_ENCODE, 0, 0, 0, 0, 0);
    put_op(1,  OP_LAYER,  0, 0, 0, 0, 0);
    put_op(2,  OP_LAYER,  1, 0, 0, 0, 0);
    put_op(3,  OP_ADD,    0, 0, 50, 3, 0);
    put_op(4,  OP_ENCODE, 1, 0, 0, 0, 0);
    put_op(5,  OP_ENCODE, 2, 0, 0, 0, 0);
    put_op(6,  OP_LAYER,  2, 0, 0, 0, 0);
    put_op(7,  OP_LAYER,  3, 0, 0, 0, 0);
    put_op(8,  OP_LAYER,  4, 0, 0, 0, 0);
    put_op(9,  OP_LAYER,  5, 0, 0, 0, 0);
    put_op(10, OP_RENDER, 0, 120, 121, 0, DELTA);
    put_op(11, OP_END,    0, 0, 0, 0, 0);

    // random Gaussian matrix and HAQ weights
    form_region(0, 10, 0, 8);
    for (int i = 0; i < 6; i++) program_layer(lyr[i]);
    $display("programmed: %0d formed cells, %0d HAQ weights", n_form, n_haq);

    // one ray, four samples along the view direction
    t_acc = 1.0;
    for (int k = 0; k < 3; k++) c_acc[k] = 0.0;
    for (int smp = 0; smp < 4; smp++) begin
      coords[smp][0] = -3000 + smp * 1500;       // x
      coords[smp][1] = 1000 - smp * 400;         // y
      coords[smp][2] = 500 + smp * 700;          // z
      coords[smp][3] = 2048;                     // t = 0.5
      coords[smp][4] = 1200;                     // theta
      coords[smp][5] = -800;                     // phi
      for (int i = 0; i < 6; i++) sp_write(i, coords[smp][i]);
      @(negedge clk);
      start = 1; sample_first = (smp == 0); sample_last = (smp == 3);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      $display("sample %0d: %0d clocks", smp, cyc);

      // stage checks with the hardware's own intermediate values
      for (int i = 0; i < 4; i++) xin[i] = coords[smp][i];
      check_encode(gcfg[0], xin);
      check_layer(lyr[0]);
      check_layer(lyr[1]);
      for (int i = 0; i < 3; i++) begin                 // x' = x + dx
        int dx;
        sp_read(50 + i, dx);
        sp_read(i, v);
        checks++;
        if (v != coords[smp][i] + dx) begin
          failures++;
          $display("add %0d: %0d exp %0d", i, v, coords[smp][i] + dx);
        end
        xin[i] = v;
      end
      check_encode(gcfg[1], xin);
      xin[0] = coords[smp][4]; xin[1] = coords[smp][5];
      check_encode(gcfg[2], xin);
      check_layer(lyr[2]);
      check_layer(lyr[3]);
      check_layer(lyr[4]);
      check_layer(lyr[5]);

      // reference rendering from the hardware's sigma and colour
      sp_read(120, sig_hw);
      for (int k = 0; k < 3; k++) sp_read(121 + k, rgb_hw[k]);
      sg = real'(sig_hw) / 4096.0;
      dl = real'(DELTA) / 4096.0;
      alpha = 1.0 - $exp(-sg * dl);
      for (int k = 0; k < 3; k++) c_acc[k] += t_acc * alpha * real'(rgb_hw[k]) / 4096.0;
      t_acc *= 1.0 - alpha;
      checks++;
      if (smp < 3 && pix_valid) failures++;
    end
    // the pixel was produced at the end of the last sample's program
    checks += 4;
    for (int k = 0; k < 3; k++)
      if (fabs(real'(pix_rgb[k]) / 4096.0 - c_acc[k]) > 0.01) begin
        failures++;
        $display("pixel ch%0d: %f exp %f", k, real'(pix_rgb[k]) / 4096.0, c_acc[k]);
      end
    if (fabs(real'(pix_trans) / 65536.0 - t_acc) > 0.01) begin
      failures++;
      $display("transmittance %f exp %f", real'(pix_trans) / 65536.0, t_acc);
    end
    $display("pixel rgb = %f %f %f, T = %f", real'(pix_rgb[0]) / 4096.0,
             real'(pix_rgb[1]) / 4096.0, real'(pix_rgb[2]) / 4096.0, real'(pix_trans) / 65536.0);

    // every mechanism must have happened
    $display("forming %0d, HAQ %0d, encodes %0d, layers %0d, extra bands %0d, adds %0d",
             n_form, n_haq, n_enc, n_layer, n_multiband, n_add);
    $display("act none %0d relu %0d sigmoid %0d sine %0d, render samples %0d, pixels %0d",
             n_act[0], n_act[1], n_act[2], n_act[3], n_render, n_pix);
    checks += 12;
    if (n_form == 0) failures++;
    if (n_haq == 0) failures++;
    if (n_enc != 12) failures++;
    if (n_layer != 24) failures++;
    if (n_multiband == 0) failures++;
    if (n_add == 0) failures++;
    for (int i = 0; i < 4; i++) if (n_act[i] == 0) failures++;
    if (n_render != 4) failures++;
    if (n_pix != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pix_valid) n_pix++;

endmodule
