// tb_nerf_workload: static and dynamic novel-view-synthesis networks on the
// full-size engine (default parameters), one 64-sample camera ray each.
//
// Canonical (NeRF) network, with the structure the source describes: eight
// low-rank ReLU layers of width 26 and rank 3 (each is a U factor without
// activation followed by a V factor with ReLU), the encoded position joined
// again after the fifth layer, a density output (ReLU) and a feature vector,
// and a colour branch on [feature, gamma(d)]:
//   gamma(x)  encode 3 -> 32 projections + raw        67 values  sp[100..166]
//   layer 1   67 -> 3 -> 26                                       sp[300..]
//   layers 2..5  26 -> 3 -> 26; layer 5 writes sp[74..99], right in front of
//             gamma(x), so layer 6 reads the skip input [h5, gamma(x)] (93)
//   layers 6..8  -> 3 -> 26
//   density   26 -> 1, ReLU                                       sp[640]
//   feature   26 -> 26, none                                      sp[560..585]
//   gamma(d)  encode 2 -> 8 projections                16 values  sp[586..601]
//   colour    [feature, gamma(d)] 42 -> 13, ReLU, then 13 -> 3, sigmoid
// Deformation network (dynamic scenes): gamma(x, t) 4 -> 16 projections,
// four layers 32 -> 26 -> 26 -> 26 (ReLU) -> 3 (no activation) = dx, then
// x += dx (OP_ADD) before the canonical network.
// The widths of the encodings, of the colour branch and of the deformation
// network are not given in the source and are this testbench's choice; all
// layers use 14 bits and s = 1.5. Crossbar placement: the canonical layers
// are stacked from row 0 at column 0 (447 rows, at most 364 columns); the
// deformation layers use columns 370..509 in row bands (rows 0..277).
//
// Each of the 64 samples of a ray is one run of the program; after each run
// every stage is checked in real arithmetic against the cell conductances
// (inputs from the hardware's previous stage; the reference clips at the ADC
// full scale as the converter does). The rendered pixel is checked against
// the quadrature over the 64 samples.
module tb_nerf_workload;
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

  localparam int NL = 24;           // 20 canonical + 4 deformation layers
  localparam int DELTA = 205;       // sample spacing 0.05, Q3.12

  int checks = 0, failures = 0;
  int n_layer_checked = 0, n_pix = 0;

  ge_cfg_t     gcfg [3];
  layer_desc_t lyr  [NL];
  int          row_next;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  nf_top dut (.*);

  always @(posedge clk) if (rst_n && pix_valid) n_pix++;

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

  // descriptor with a weight scale of 1.5/sqrt(in) and an ADC full scale
  // that grows with the fan-in
  function automatic layer_desc_t mk(int src, int nin, int dst, int nout, int rb, int cb,
                                     int opb, act_fn_e f);
    layer_desc_t d;
    d.src_addr = SP_AW'(src);       d.in_dim = DIM_W'(nin);
    d.dst_addr = SP_AW'(dst);       d.out_dim = DIM_W'(nout);
    d.row_base = ROW_W'(rb);        d.col_base = COL_W'(cb);
    d.outs_per_band = DIM_W'(opb);  d.nbits = NB_W'(14);
    d.s_code = 4'b0101;
    d.adc_shift = (nin <= 8) ? 6'd16 : (nin <= 32) ? 6'd17 : 6'd18;
    d.scale = act_t'(int'(1.5 * 4096.0 / $sqrt(real'(nin))));
    d.act = f;
    return d;
  endfunction

  // canonical layer stacked at column 0
  function automatic layer_desc_t stack(int src, int nin, int dst, int nout, act_fn_e f);
    layer_desc_t d;
    d = mk(src, nin, dst, nout, row_next, 0, nout, f);
    row_next += nin;
    return d;
  endfunction

  // pos: non-negative targets only (the density layer, so that the ray
  // collects colour; the networks here have no bias terms)
  task automatic program_layer(input layer_desc_t d, input bit pos);
    for (int j = 0; j < int'(d.out_dim); j++)
      for (int k = 0; k < int'(d.in_dim); k++) begin
        @(negedge clk);
        while (!w_ready) @(negedge clk);
        w_valid = 1;
        w_tar   = pos ? 16'($urandom % 16385) : 16'(int'($urandom % 32769) - 16384);
        w_row   = ROW_W'(cell_row(d, k, j));
        w_col   = COL_W'(cell_col(d, j));
        w_nbits = d.nbits;
        w_scode = d.s_code;
        @(negedge clk);
        w_valid = 0;
        while (!haq_res_valid) @(negedge clk);
      end
  endtask

  task automatic form_region(input int r0, input int nr, input int nc);
    for (int r = r0; r < r0 + nr; r++)
      for (int c = 0; c < nc; c++) begin
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

  task automatic check_layer(input layer_desc_t d);
    int xv [128];
    int v;
    real s, sc, w, coef, acc, cur, fs, amp, yr, tol;
    for (int k = 0; k < int'(d.in_dim); k++) sp_read(int'(d.src_addr) + k, xv[k]);
    s   = real'(s_tenths(d.s_code)) / 10.0;
    sc  = real'(d.scale) / 4096.0;
    amp = $pow(s, real'(int'(d.nbits) - 1));
    fs  = 8191.0 * $pow(2.0, real'(int'(d.adc_shift) - 20));
    tol = 4.0 * $pow(2.0, real'(int'(d.adc_shift) - 20)) / amp * fabs(sc) + 6.0 / 4096.0;
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
      cur = acc * amp / 2.0;
      if (cur > fs) cur = fs;
      if (cur < -fs) cur = -fs;
      yr = act_ref(d.act, 2.0 * cur / amp * sc);
      sp_read(int'(d.dst_addr) + j, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - yr) > tol) begin
        failures++;
        $display("layer dst %0d out %0d: %f exp %f (tol %f)", d.dst_addr, j,
                 real'(v) / 4096.0, yr, tol);
      end
    end
    n_layer_checked++;
  endtask

  task automatic check_encode(input ge_cfg_t c, input int xin [4]);
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
      if (fabs(real'(v) / 4096.0 - $cos(2.0 * 3.14159265 * bx)) > tol) failures++;
      sp_read(int'(c.dst_addr) + int'(c.enc_dim) + m, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - $sin(2.0 * 3.14159265 * bx)) > tol) failures++;
    end
  endtask

  // one ray of 64 samples; dynamic selects the program with the deformation
  task automatic run_ray(input bit dynamic, input int t_val);
    real t_acc, c_acc [3], alpha;
    int xin [4];
    int v, cyc, sig_hw, rgb_hw [3], x0 [3];
    t_acc = 1.0;
    for (int k = 0; k < 3; k++) c_acc[k] = 0.0;
    for (int smp = 0; smp < 64; smp++) begin
      x0[0] = -6000 + smp * 180;
      x0[1] = 3000 - smp * 90;
      x0[2] = -1000 + smp * 40;
      for (int i = 0; i < 3; i++) sp_write(i, x0[i]);
      sp_write(3, t_val);
      sp_write(4, 1500);
      sp_write(5, -2500);
      @(negedge clk);
      start = 1; sample_first = (smp == 0); sample_last = (smp == 63);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (smp == 0) $display("%s ray: %0d clocks per sample", dynamic ? "dynamic" : "static", cyc);

      if (dynamic) begin
        for (int i = 0; i < 3; i++) xin[i] = x0[i];
        xin[3] = t_val;
        check_encode(gcfg[2], xin);
        for (int i = 20; i < 24; i++) check_layer(lyr[i]);
        for (int i = 0; i < 3; i++) begin
          int dx;
          sp_read(830 + i, dx);
          sp_read(i, v);
          checks++;
          if (v != x0[i] + dx) failures++;
          xin[i] = v;
        end
      end else
        for (int i = 0; i < 3; i++) xin[i] = x0[i];
      check_encode(gcfg[0], xin);
      xin[0] = 1500; xin[1] = -2500;
      check_encode(gcfg[1], xin);
      for (int i = 0; i < 20; i++) check_layer(lyr[i]);

      sp_read(640, sig_hw);
      for (int k = 0; k < 3; k++) sp_read(630 + k, rgb_hw[k]);
      alpha = 1.0 - $exp(-(real'(sig_hw) / 4096.0) * (real'(DELTA) / 4096.0));
      for (int k = 0; k < 3; k++) c_acc[k] += t_acc * alpha * real'(rgb_hw[k]) / 4096.0;
      t_acc *= 1.0 - alpha;
    end
    checks += 4;
    for (int k = 0; k < 3; k++)
      if (fabs(real'(pix_rgb[k]) / 4096.0 - c_acc[k]) > 0.02) begin
        failures++;
        $display("pixel ch%0d: %f exp %f", k, real'(pix_rgb[k]) / 4096.0, c_acc[k]);
      end
    if (fabs(real'(pix_trans) / 65536.0 - t_acc) > 0.02) begin
      failures++;
      $display("transmittance %f exp %f", real'(pix_trans) / 65536.0, t_acc);
    end
    $display("%s pixel rgb = %f %f %f, T = %f", dynamic ? "dynamic" : "static",
             real'(pix_rgb[0]) / 4096.0, real'(pix_rgb[1]) / 4096.0,
             real'(pix_rgb[2]) / 4096.0, real'(pix_trans) / 65536.0);
  endtask

  initial begin
    int n, cells;
    ge_cfg_data = '0; layer_data = '0; prog_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    gcfg[0] = '{src_addr: 0, in_dim: 3, enc_dim: 32, row_base: 0, col_base: 0, dst_addr: 100,
                adc_shift: 10, scale: 16'sd4096, append_raw: 1'b1};
    gcfg[1] = '{src_addr: 4, in_dim: 2, enc_dim: 8, row_base: 3, col_base: 0, dst_addr: 586,
                adc_shift: 10, scale: 16'sd4096, append_raw: 1'b0};
    gcfg[2] = '{src_addr: 0, in_dim: 4, enc_dim: 16, row_base: 5, col_base: 0, dst_addr: 700,
                adc_shift: 10, scale: 16'sd4096, append_raw: 1'b0};

    // canonical network: 8 low-rank layers (U, V), density, feature, colour
    row_next = 0;
    n = 0;
    for (int l = 1; l <= 8; l++) begin
      int src, nin, vdst;
      src  = (l == 1) ? 100 : (l == 6) ? 74 : 300 + 30 * (l - 2);
      nin  = (l == 1) ? 67 : (l == 6) ? 93 : 26;
      vdst = (l == 5) ? 74 : 300 + 30 * (l - 1);
      lyr[n++] = stack(src, nin, 200 + 4 * l, 3, ACT_NONE);       // U
      lyr[n++] = stack(200 + 4 * l, 3, vdst, 26, ACT_RELU);       // V
    end
    lyr[n++] = stack(510, 26, 640, 1, ACT_RELU);                  // density
    lyr[n++] = stack(510, 26, 560, 26, ACT_NONE);                 // feature
    lyr[n++] = stack(560, 42, 610, 13, ACT_RELU);                 // colour hidden
    lyr[n++] = stack(610, 13, 630, 3, ACT_SIGMOID);               // colour
    // deformation network in its own column strip
    lyr[n++] = mk(700, 32, 740, 26, 0,   370, 10, ACT_RELU);
    lyr[n++] = mk(740, 26, 770, 26, 96,  370, 10, ACT_RELU);
    lyr[n++] = mk(770, 26, 800, 26, 174, 370, 10, ACT_RELU);
    lyr[n++] = mk(800, 26, 830, 3,  252, 370, 10, ACT_NONE);
    checks++;
    if (row_next > 512) failures++;
    $display("canonical network uses rows 0..%0d", row_next - 1);

    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      ge_cfg_we = 1; ge_cfg_idx = 2'(i); ge_cfg_data = gcfg[i];
      @(negedge clk);
      ge_cfg_we = 0;
    end
    for (int i = 0; i < NL; i++) begin
      @(negedge clk);
      layer_we = 1; layer_idx = 5'(i); layer_data = lyr[i];
      @(negedge clk);
      layer_we = 0;
    end

    form_region(0, 3, 32);
    form_region(3, 2, 8);
    form_region(5, 4, 16);
    cells = 0;
    for (int i = 0; i < NL; i++) begin
      program_layer(lyr[i], i == 16);
      cells += int'(lyr[i].in_dim) * int'(lyr[i].out_dim) * 14;
    end
    $display("programmed %0d cells", cells);

    // static program: encode x, encode d, 20 layers, render
    n = 0;
    put_op(n++, OP_ENCODE, 0, 0, 0, 0, 0);
    put_op(n++, OP_ENCODE, 1, 0, 0, 0, 0);
    for (int i = 0; i < 20; i++) put_op(n++, OP_LAYER, i, 0, 0, 0, 0);
    put_op(n++, OP_RENDER, 0, 640, 630, 0, DELTA);
    put_op(n++, OP_END, 0, 0, 0, 0, 0);
    run_ray(1'b0, 0);

    // dynamic program: deformation, x += dx, then the static program
    n = 0;
    put_op(n++, OP_ENCODE, 2, 0, 0, 0, 0);
    for (int i = 20; i < 24; i++) put_op(n++, OP_LAYER, i, 0, 0, 0, 0);
    put_op(n++, OP_ADD, 0, 0, 830, 3, 0);
    put_op(n++, OP_ENCODE, 0, 0, 0, 0, 0);
    put_op(n++, OP_ENCODE, 1, 0, 0, 0, 0);
    for (int i = 0; i < 20; i++) put_op(n++, OP_LAYER, i, 0, 0, 0, 0);
    put_op(n++, OP_RENDER, 0, 640, 630, 0, DELTA);
    put_op(n++, OP_END, 0, 0, 0, 0, 0);
    run_ray(1'b1, 2048);

    checks += 2;
    if (n_pix != 2) failures++;
    if (n_layer_checked != 64 * 20 + 64 * 24) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
