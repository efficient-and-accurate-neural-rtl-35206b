// tb_ge_controller: self-checking test of the Gaussian encoder sequencer,
// with an 8 x 64 crossbar model, the ADC model, the CORDIC and a scratchpad.
// The testbench forms a random region of the crossbar, writes 3 coordinates
// and runs two encodings (3 -> 64 with raw inputs appended, as in the CT
// network, and 2 -> 20 at another place). From the conductances read out of
// the model it computes Bx = scale * sum_r x_r (g_rc - 1) in real arithmetic
// and checks every cos(2 pi Bx), sin(2 pi Bx) (tolerance: ADC step times
// 2 pi scale, plus 0.003) and the appended raw values.
module tb_ge_controller;
  import nf_pkg::*;

  localparam int NR = 8, NC = 64;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  ge_cfg_t cfg;
  logic sp_re, sp_we, g_sp_re, g_sp_we;
  logic [SP_AW-1:0] sp_raddr, sp_waddr, g_sp_raddr, g_sp_waddr;
  act_t sp_rdata, sp_wdata, g_sp_wdata;
  logic t_we = 0;
  logic [SP_AW-1:0] t_addr = 0;
  act_t t_wdata = 0;
  logic bl_we, vmm_start, vmm_done, adc_sample, adc_valid, c_start, c_done, c_busy;
  logic [ROW_W-1:0] bl_idx, vmm_row_base;
  act_t bl_val, c_cos, c_sin;
  logic [DIM_W-1:0] vmm_row_cnt;
  logic [COL_W-1:0] vmm_col_base, sl_sel;
  logic [DIM_W:0] vmm_col_cnt;
  cond_t g_bias, rsp_g;
  cur_t sl [NB_MAX];
  logic [5:0] adc_shift;
  adc_code_t adc_code;
  logic [15:0] c_phase;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  logic [ROW_W-1:0] cmd_row = 0;
  logic [COL_W-1:0] cmd_col = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  ge_controller dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .sp_re(g_sp_re), .sp_raddr(g_sp_raddr), .sp_rdata,
    .sp_we(g_sp_we), .sp_waddr(g_sp_waddr), .sp_wdata(g_sp_wdata),
    .bl_we, .bl_idx, .bl_val, .vmm_start, .vmm_row_base, .vmm_row_cnt,
    .vmm_col_base, .vmm_col_cnt, .g_bias, .vmm_done, .sl_sel,
    .adc_sample, .adc_shift, .adc_valid, .adc_code,
    .c_start, .c_phase, .c_done, .c_cos, .c_sin
  );

  rram_macro #(.N_ROWS(NR), .N_COLS(NC)) u_mac (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op(CMD_FORM), .cmd_row, .cmd_col,
    .rsp_valid, .rsp_g, .bl_we, .bl_idx, .bl_val, .vmm_start, .vmm_row_base,
    .vmm_row_cnt, .vmm_col_base, .vmm_col_cnt, .g_bias, .vmm_done,
    .sl_grp_base(sl_sel), .sl_grp_cur(sl)
  );

  adc u_adc (.clk, .rst_n, .sample(adc_sample), .cur(sl[0]), .shift(adc_shift),
             .valid(adc_valid), .code(adc_code));

  cordic u_cordic (.clk, .rst_n, .start(c_start), .phase(c_phase), .busy(c_busy),
                   .done(c_done), .cos_o(c_cos), .sin_o(c_sin));

  assign sp_re    = busy ? g_sp_re : 1'b1;
  assign sp_raddr = busy ? g_sp_raddr : t_addr;
  assign sp_we    = busy ? g_sp_we : t_we;
  assign sp_waddr = busy ? g_sp_waddr : t_addr;
  assign sp_wdata = busy ? g_sp_wdata : t_wdata;

  act_sram u_sp (.clk, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
                 .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata));

  initial begin
    repeat (300000) @(posedge clk);
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

  task automatic encode(input int src, input int nin, input int nenc, input int rb,
                        input int cb, input int dst, input int sh, input int scl,
                        input bit raw);
    int xv [8];
    int v;
    real bx, tol;
    for (int r = 0; r < nin; r++) sp_read(src + r, xv[r]);
    cfg = '{src_addr: SP_AW'(src), in_dim: DIM_W'(nin), enc_dim: DIM_W'(nenc),
            row_base: ROW_W'(rb), col_base: COL_W'(cb), dst_addr: SP_AW'(dst),
            adc_shift: 6'(sh), scale: act_t'(scl), append_raw: raw};
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    tol = 2.0 * 3.14159265 * (real'(scl) / 4096.0) * $pow(2.0, real'(sh - 20)) + 0.003;
    for (int m = 0; m < nenc; m++) begin
      bx = 0.0;
      for (int r = 0; r < nin; r++)
        bx += (real'(xv[r]) / 4096.0) * (real'(u_mac.g[rb + r][cb + m]) / 256.0 - 1.0);
      bx *= real'(scl) / 4096.0;
      sp_read(dst + m, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - $cos(2.0 * 3.14159265 * bx)) > tol) begin
        failures++;
        $display("m %0d cos %f exp %f", m, real'(v) / 4096.0, $cos(2.0 * 3.14159265 * bx));
      end
      sp_read(dst + nenc + m, v);
      checks++;
      if (fabs(real'(v) / 4096.0 - $sin(2.0 * 3.14159265 * bx)) > tol) begin
        failures++;
        $display("m %0d sin %f exp %f", m, real'(v) / 4096.0, $sin(2.0 * 3.14159265 * bx));
      end
    end
    if (raw)
      for (int r = 0; r < nin; r++) begin
        sp_read(dst + 2 * nenc + r, v);
        checks++;
        if (v != xv[r]) failures++;
      end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random forming of the whole 8 x 64 region
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        cmd_valid = 1; cmd_row = ROW_W'(r); cmd_col = COL_W'(c);
        @(negedge clk);
        cmd_valid = 0;
        while (!rsp_valid) @(negedge clk);
      end
    // coordinates in [-1, 1]
    sp_write(0, 4096); sp_write(1, -2048); sp_write(2, 1234); sp_write(3, -4000);
    encode(0, 3, 64, 0, 0, 100, 10, 8192, 1'b1);   // 3 -> 64 + raw, sigma scale 2
    sp_write(4, 3000); sp_write(5, 777);
    encode(4, 2, 20, 4, 30, 300, 8, 20480, 1'b0);  // 2 -> 20, scale 5
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
