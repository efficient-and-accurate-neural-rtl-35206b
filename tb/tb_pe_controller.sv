// tb_pe_controller: self-checking test of the MLP engine sequencer, with a
// 64 x 128 crossbar model, the HAQ programmer, VCMAC, ADC, activation unit
// and scratchpad.
// Three layers are written with HAQ and run back to back:
//   L0: 10 -> 12, 8 bits, s = 1.5, 5 outputs per band (3 bands), ReLU
//   L1: 12 ->  6, 6 bits, s = 2.0, one band, no activation, reads L0's output
//   L2:  6 ->  4, 10 bits, s = 1.3, sine
// The reference is computed in real arithmetic from the conductances read
// out of the crossbar model, w = sum_i (2 g_i - 1) (1/s)^i, and
// y = act(scale * sum_k x_k w_kj), fed with the values the hardware produced
// for the previous layer. The tolerance is two ADC steps after digital
// rescaling plus 3 LSB. The layer's cycle count is compared with
// nbits + bands*(in_dim + VMM latency + 5) + out_dim*(act latency + 3) + 2
// (latencies as seen by this testbench: 1 for ReLU/none, 19 for sine).
module tb_pe_controller;
  import nf_pkg::*;

  localparam int NR = 64, NC = 128;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  layer_desc_t desc;
  logic sp_re, sp_we, p_sp_re, p_sp_we;
  logic [SP_AW-1:0] sp_raddr, sp_waddr, p_sp_raddr, p_sp_waddr;
  act_t sp_rdata, sp_wdata, p_sp_wdata;
  logic t_we = 0;
  logic [SP_AW-1:0] t_addr = 0;
  act_t t_wdata = 0;
  logic bl_we, vmm_start, vmm_done, adc_sample, adc_valid;
  logic [ROW_W-1:0] bl_idx, vmm_row_base;
  act_t bl_val;
  logic [DIM_W-1:0] vmm_row_cnt;
  logic [COL_W-1:0] vmm_col_base, sl_sel;
  logic [DIM_W:0] vmm_col_cnt;
  cond_t g_bias, rsp_g;
  cur_t sl [NB_MAX];
  cur_t vc_out;
  logic [NB_W-1:0] vc_nbits;
  scode_t vc_sw;
  logic [5:0] adc_shift;
  adc_code_t adc_code;
  logic act_valid, act_ready, act_out_valid;
  act_t act_x, act_y;
  act_fn_e act_fn;
  logic w_valid = 0, w_ready, res_valid;
  logic signed [15:0] w_tar = 0;
  logic [ROW_W-1:0] w_row = 0;
  logic [COL_W-1:0] w_col = 0;
  logic [NB_W-1:0] w_nbits = 0;
  scode_t w_scode = 0;
  logic signed [17:0] res_w_pro;
  logic [NB_MAX-1:0] res_bits;
  logic cmd_valid, cmd_ready, rsp_valid;
  cell_cmd_e cmd_op;
  logic [ROW_W-1:0] cmd_row;
  logic [COL_W-1:0] cmd_col;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  pe_controller dut (
    .clk, .rst_n, .start, .desc, .busy, .done,
    .sp_re(p_sp_re), .sp_raddr(p_sp_raddr), .sp_rdata,
    .sp_we(p_sp_we), .sp_waddr(p_sp_waddr), .sp_wdata(p_sp_wdata),
    .bl_we, .bl_idx, .bl_val, .vmm_start, .vmm_row_base, .vmm_row_cnt,
    .vmm_col_base, .vmm_col_cnt, .g_bias, .vmm_done, .sl_sel,
    .vc_nbits, .vc_sw, .adc_sample, .adc_shift, .adc_valid, .adc_code,
    .act_valid, .act_ready, .act_x, .act_fn, .act_out_valid, .act_y
  );

  haq_programmer u_haq (.*);

  rram_macro #(.N_ROWS(NR), .N_COLS(NC)) u_mac (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_row, .cmd_col,
    .rsp_valid, .rsp_g, .bl_we, .bl_idx, .bl_val, .vmm_start, .vmm_row_base,
    .vmm_row_cnt, .vmm_col_base, .vmm_col_cnt, .g_bias, .vmm_done,
    .sl_grp_base(sl_sel), .sl_grp_cur(sl)
  );

  vcmac u_vc (.i_in(sl), .nbits(vc_nbits), .c_sw(vc_sw), .i_out(vc_out));

  adc u_adc (.clk, .rst_n, .sample(adc_sample), .cur(vc_out), .shift(adc_shift),
             .valid(adc_valid), .code(adc_code));

  activation_unit u_act (.clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready),
                         .x(act_x), .fn(act_fn), .out_valid(act_out_valid), .y(act_y));

  assign sp_re    = busy ? p_sp_re : 1'b1;
  assign sp_raddr = busy ? p_sp_raddr : t_addr;
  assign sp_we    = busy ? p_sp_we : t_we;
  assign sp_waddr = busy ? p_sp_waddr : t_addr;
  assign sp_wdata = busy ? p_sp_wdata : t_wdata;

  act_sram u_sp (.clk, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
                 .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sp_write(input int a, input int v);
    @(negedge clk);
    t_we = 1; t_addr = SP_AW'(a); t_wdata = act_t'(v);
    @(negedge clk);
    t_we = 0;
  endtask

  task automatic sp_read(input int a, output int v);
    @(negedge clk);
    t_addr = SP_AW'(a);
    @(negedge clk);
    v = int'(sp_rdata);
  endtask

  function automatic int cell_row(layer_desc_t d, int k, int j);
    int opb;
    opb = int'(d.outs_per_band);
    return int'(d.row_base) + (j / opb) * int'(d.in_dim) + k;
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
        while (!res_valid) @(negedge clk);
      end
  endtask

  task automatic run_layer(input layer_desc_t d, input int exp_act_lat);
    int xv [16];
    int v, cyc, bands, exp_cyc;
    real s, sc, w, coef, acc, yr, tol;
    for (int k = 0; k < int'(d.in_dim); k++) sp_read(int'(d.src_addr) + k, xv[k]);
    desc = d;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    bands = (int'(d.out_dim) + int'(d.outs_per_band) - 1) / int'(d.outs_per_band);
    exp_cyc = int'(d.nbits) + bands * (int'(d.in_dim) + 9) + int'(d.out_dim) * (exp_act_lat + 3) + 2;
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("layer cycles %0d, expected about %0d", cyc, exp_cyc);
    end
    s  = real'(s_tenths(d.s_code)) / 10.0;
    sc = real'(d.scale) / 4096.0;
    tol = 2.0 * 2.0 * $pow(2.0, real'(int'(d.adc_shift) - 20)) * $pow(1.0 / s, real'(int'(d.nbits) - 1)) * fabs(sc)
          + 3.0 / 4096.0;
    for (int j = 0; j < int'(d.out_dim); j++) begin
      acc = 0.0;
      for (int k = 0; k < int'(d.in_dim); k++) begin
        w = 0.0;
        coef = 1.0;
        for (int b = 0; b < int'(d.nbits); b++) begin
          w += (2.0 * real'(u_mac.g[cell_row(d, k, j)][cell_col(d, j) + b]) / 256.0 - 1.0) * coef;
          coef /= s;
        end
        acc += real'(xv[k]) / 4096.0 * w;
      end
      yr = acc * sc;
      unique case (d.act)
        ACT_RELU: if (yr < 0.0) yr = 0.0;
        ACT_SINE: yr = $sin(yr);
        default: ;
      endcase
      sp_read(int'(d.dst_addr) + j, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - yr) > tol) begin
        failures++;
        $display("out %0d: %f exp %f (tol %f)", j, real'(v) / 4096.0, yr, tol);
      end
    end
  endtask

  initial begin
    layer_desc_t l0, l1, l2;
    desc = '0;
    l0 = '{src_addr: 0, in_dim: 10, dst_addr: 100, out_dim: 12, row_base: 0,
           col_base: 4, outs_per_band: 5, nbits: 8, s_code: 4'b0101,
           adc_shift: 14, scale: 16'sd4096, act: ACT_RELU};
    l1 = '{src_addr: 100, in_dim: 12, dst_addr: 200, out_dim: 6, row_base: 30,
           col_base: 0, outs_per_band: 8, nbits: 6, s_code: 4'b1010,
           adc_shift: 15, scale: 16'sd6144, act: ACT_NONE};
    l2 = '{src_addr: 200, in_dim: 6, dst_addr: 300, out_dim: 4, row_base: 42,
           col_base: 60, outs_per_band: 6, nbits: 10, s_code: 4'b0011,
           adc_shift: 14, scale: 16'sd4096, act: ACT_SINE};
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_layer(l0);
    program_layer(l1);
    program_layer(l2);
    for (int k = 0; k < 10; k++) sp_write(k, int'($urandom % 8193) - 4096);
    run_layer(l0, 1);
    run_layer(l1, 1);
    run_layer(l2, 19);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
