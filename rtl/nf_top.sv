// nf_top: hybrid analog-digital neural-field engine.
//
// A neural field stores a signal (a CT volume, a 3D scene) as a small MLP
// f(x) evaluated at coordinates x. This top evaluates such an MLP one query
// point at a time:
//   Gaussian Encoder (GE): a crossbar region with randomly formed cells
//       projects x onto a Gaussian matrix B; ADC and CORDIC give
//       [cos(2 pi Bx), sin(2 pi Bx)].                       (rram_macro,
//       adc, cordic, ge_controller)
//   MLP Processing Engine (PE): a second crossbar holds the layer weights,
//       each written bit-serially into several cells by the hardware-aware
//       quantization loop; the VCMAC recombines a weight's cells, the ADC
//       digitises, the digital side rescales and applies the activation.
//                                     (rram_macro, haq_programmer, vcmac, adc,
//                                      pe_controller, activation_unit)
//   Render unit: accumulates density and colour samples along a camera ray.
// All vectors live in one scratchpad (act_sram). A small sequencer runs a
// program of operations written by the host:
//   OP_ENCODE idx   run the GE with encoder configuration idx
//   OP_LAYER  idx   run the PE with layer descriptor idx
//   OP_ADD          sp[a+k] += sp[b+k] for k < len (dynamic scenes: x + dx)
//   OP_RENDER       send sigma = sp[a], rgb = sp[b..b+2], step delta to the
//                   render unit, with the start's first/last flags
//   OP_END          finish, pulse done
// so CT (encode, layers, read the intensity), static NeRF (encode position
// and direction, layers, render) and dynamic NeRF (deformation net, add,
// canonical net, render) are different programs of the same hardware.
//
// The host (the processor of the paper's SoC, outside this design) uses the
// remaining ports: scratchpad access while idle, table writes, weights for
// the HAQ programmer (PE crossbar) and raw cell commands for the GE crossbar
// (forming the random matrix). The GE and PE each have their own crossbar
// instance here; the paper's chip has one 512 x 512 macro and says each block
// "employs a resistive memory in-memory computing macro".
module nf_top
  import nf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // host scratchpad port (honoured while busy is low)
  input  logic               h_sp_we,
  input  logic               h_sp_re,
  input  logic [SP_AW-1:0]   h_sp_addr,
  input  act_t               h_sp_wdata,
  output act_t               h_sp_rdata,
  // configuration tables
  input  logic               ge_cfg_we,
  input  logic [1:0]         ge_cfg_idx,
  input  ge_cfg_t            ge_cfg_data,
  input  logic               layer_we,
  input  logic [4:0]         layer_idx,
  input  layer_desc_t        layer_data,
  input  logic               prog_we,
  input  logic [5:0]         prog_idx,
  input  op_t                prog_data,
  // weight programming (HAQ) into the PE crossbar
  input  logic               w_valid,
  output logic               w_ready,
  input  logic signed [15:0] w_tar,
  input  logic [ROW_W-1:0]   w_row,
  input  logic [COL_W-1:0]   w_col,
  input  logic [NB_W-1:0]    w_nbits,
  input  scode_t             w_scode,
  output logic               haq_res_valid,
  output logic signed [17:0] haq_res_w_pro,
  output logic [NB_MAX-1:0]  haq_res_bits,
  // raw cell commands to the GE crossbar
  input  logic               ge_cmd_valid,
  output logic               ge_cmd_ready,
  input  cell_cmd_e          ge_cmd_op,
  input  logic [ROW_W-1:0]   ge_cmd_row,
  input  logic [COL_W-1:0]   ge_cmd_col,
  output logic               ge_rsp_valid,
  output cond_t              ge_rsp_g,
  // program execution
  input  logic               start,
  input  logic               sample_first,
  input  logic               sample_last,
  output logic               busy,
  output logic               done,
  // rendered pixel
  output logic               pix_valid,
  output act_t               pix_rgb [3],
  output logic [16:0]        pix_trans
);

  // ---------------------------------------------------------------- tables
  ge_cfg_t     ge_tab [N_GE];
  layer_desc_t ly_tab [N_LAYER];
  op_t         prog   [N_OP];

  always_ff @(posedge clk) begin
    if (ge_cfg_we) ge_tab[ge_cfg_idx] <= ge_cfg_data;
    if (layer_we)  ly_tab[layer_idx]  <= layer_data;
    if (prog_we)   prog[prog_idx]     <= prog_data;
  end

  // ------------------------------------------------------------- sequencer
  typedef enum logic [3:0] {
    Q_IDLE, Q_FETCH, Q_GE, Q_PE, Q_ADD_A, Q_ADD_B, Q_ADD_W,
    Q_REN_RD, Q_REN_GO, Q_DONE
  } seq_e;
  seq_e             q;
  logic [5:0]       pc;
  op_t              op;
  logic             first_r, last_r;
  logic [7:0]       k;
  logic [2:0]       rcnt;          // render reads issued
  logic [2:0]       rgot;          // render reads received
  logic             rd_v;
  act_t             a_val;
  act_t             ren_v [4];

  logic             ge_start, ge_busy, ge_done;
  logic             pe_start, pe_busy, pe_done;

  // scratchpad signals of each owner
  logic             sp_re, sp_we;
  logic [SP_AW-1:0] sp_raddr, sp_waddr;
  act_t             sp_rdata, sp_wdata;

  logic             g_sp_re, g_sp_we, p_sp_re, p_sp_we;
  logic [SP_AW-1:0] g_sp_raddr, g_sp_waddr, p_sp_raddr, p_sp_waddr;
  act_t             g_sp_wdata, p_sp_wdata;
  logic             s_sp_re, s_sp_we;
  logic [SP_AW-1:0] s_sp_raddr, s_sp_waddr;
  act_t             s_sp_wdata;

  assign busy       = (q != Q_IDLE);
  assign h_sp_rdata = sp_rdata;
  assign ge_start   = (q == Q_FETCH) && (op.opcode == OP_ENCODE);
  assign pe_start   = (q == Q_FETCH) && (op.opcode == OP_LAYER);
  assign op         = prog[pc];

  always_comb begin
    unique case (q)
      Q_GE: begin
        sp_re = g_sp_re; sp_raddr = g_sp_raddr;
        sp_we = g_sp_we; sp_waddr = g_sp_waddr; sp_wdata = g_sp_wdata;
      end
      Q_PE: begin
        sp_re = p_sp_re; sp_raddr = p_sp_raddr;
        sp_we = p_sp_we; sp_waddr = p_sp_waddr; sp_wdata = p_sp_wdata;
      end
      Q_IDLE: begin
        sp_re = h_sp_re; sp_raddr = h_sp_addr;
        sp_we = h_sp_we; sp_waddr = h_sp_addr; sp_wdata = h_sp_wdata;
      end
      default: begin
        sp_re = s_sp_re; sp_raddr = s_sp_raddr;
        sp_we = s_sp_we; sp_waddr = s_sp_waddr; sp_wdata = s_sp_wdata;
      end
    endcase
  end

  // sequencer's own scratchpad traffic (OP_ADD, OP_RENDER)
  always_comb begin
    s_sp_re    = 1'b0;
    s_sp_raddr = op.a + SP_AW'(k);
    s_sp_we    = 1'b0;
    s_sp_waddr = op.a + SP_AW'(k);
    s_sp_wdata = sat_act(64'(a_val) + 64'(sp_rdata));
    unique case (q)
      Q_ADD_A: s_sp_re = 1'b1;
      Q_ADD_B: begin s_sp_re = 1'b1; s_sp_raddr = op.b + SP_AW'(k); end
      Q_ADD_W: s_sp_we = 1'b1;
      Q_REN_RD: begin
        s_sp_re    = (rcnt < 3'd4);
        s_sp_raddr = (rcnt == 3'd0) ? op.a : op.b + SP_AW'(rcnt - 3'd1);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= Q_IDLE;
      pc      <= '0;
      first_r <= 1'b0;
      last_r  <= 1'b0;
      k       <= '0;
      rcnt    <= '0;
      rgot    <= '0;
      rd_v    <= 1'b0;
      a_val   <= '0;
      done    <= 1'b0;
      for (int i = 0; i < 4; i++) ren_v[i] <= '0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      unique case (q)
        Q_IDLE: if (start) begin
          pc      <= '0;
          first_r <= sample_first;
          last_r  <= sample_last;
          q       <= Q_FETCH;
        end
        Q_FETCH: begin
          k    <= '0;
          rcnt <= '0;
          rgot <= '0;
          unique case (op.opcode)
            OP_ENCODE: q <= Q_GE;
            OP_LAYER:  q <= Q_PE;
            OP_ADD:    q <= (op.len == '0) ? Q_FETCH : Q_ADD_A;
            OP_RENDER: q <= Q_REN_RD;
            default:   q <= Q_DONE;
          endcase
          if (op.opcode == OP_ADD && op.len == '0) pc <= pc + 1'b1;
        end
        Q_GE: if (ge_done) begin pc <= pc + 1'b1; q <= Q_FETCH; end
        Q_PE: if (pe_done) begin pc <= pc + 1'b1; q <= Q_FETCH; end
        Q_ADD_A: q <= Q_ADD_B;
        Q_ADD_B: begin a_val <= sp_rdata; q <= Q_ADD_W; end
        Q_ADD_W: begin
          if (k + 1'b1 >= op.len) begin
            pc <= pc + 1'b1;
            q  <= Q_FETCH;
          end else begin
            k <= k + 1'b1;
            q <= Q_ADD_A;
          end
        end
        Q_REN_RD: begin
          if (s_sp_re) rcnt <= rcnt + 1'b1;
          rd_v <= s_sp_re;
          if (rd_v) begin
            ren_v[rgot[1:0]] <= sp_rdata;
            rgot <= rgot + 1'b1;
            if (rgot == 3'd3) q <= Q_REN_GO;
          end
        end
        Q_REN_GO: begin pc <= pc + 1'b1; q <= Q_FETCH; end
        Q_DONE: begin done <= 1'b1; q <= Q_IDLE; end
        default: q <= Q_IDLE;
      endcase
    end
  end

  act_sram u_sp (
    .clk, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
    .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata)
  );

  // ------------------------------------------------------ Gaussian encoder
  logic             gm_bl_we, gm_vmm_start, gm_vmm_done;
  logic [ROW_W-1:0] gm_bl_idx, gm_row_base;
  act_t             gm_bl_val;
  logic [DIM_W-1:0] gm_row_cnt;
  logic [COL_W-1:0] gm_col_base, gm_sl_sel;
  logic [DIM_W:0]   gm_col_cnt;
  cond_t            gm_g_bias;
  cur_t             gm_sl [NB_MAX];
  logic             ga_sample, ga_valid;
  logic [5:0]       ga_shift;
  adc_code_t        ga_code;
  logic             gc_start, gc_busy, gc_done;
  logic [15:0]      gc_phase;
  act_t             gc_cos, gc_sin;

  rram_macro u_ge_macro (
    .clk, .rst_n,
    .cmd_valid(ge_cmd_valid), .cmd_ready(ge_cmd_ready), .cmd_op(ge_cmd_op),
    .cmd_row(ge_cmd_row), .cmd_col(ge_cmd_col),
    .rsp_valid(ge_rsp_valid), .rsp_g(ge_rsp_g),
    .bl_we(gm_bl_we), .bl_idx(gm_bl_idx), .bl_val(gm_bl_val),
    .vmm_start(gm_vmm_start), .vmm_row_base(gm_row_base), .vmm_row_cnt(gm_row_cnt),
    .vmm_col_base(gm_col_base), .vmm_col_cnt(gm_col_cnt), .g_bias(gm_g_bias),
    .vmm_done(gm_vmm_done), .sl_grp_base(gm_sl_sel), .sl_grp_cur(gm_sl)
  );

  adc u_ge_adc (
    .clk, .rst_n, .sample(ga_sample), .cur(gm_sl[0]), .shift(ga_shift),
    .valid(ga_valid), .code(ga_code)
  );

  cordic u_ge_cordic (
    .clk, .rst_n, .start(gc_start), .phase(gc_phase),
    .busy(gc_busy), .done(gc_done), .cos_o(gc_cos), .sin_o(gc_sin)
  );

  ge_controller u_ge_ctrl (
    .clk, .rst_n, .start(ge_start), .cfg(ge_tab[op.idx[1:0]]),
    .busy(ge_busy), .done(ge_done),
    .sp_re(g_sp_re), .sp_raddr(g_sp_raddr), .sp_rdata(sp_rdata),
    .sp_we(g_sp_we), .sp_waddr(g_sp_waddr), .sp_wdata(g_sp_wdata),
    .bl_we(gm_bl_we), .bl_idx(gm_bl_idx), .bl_val(gm_bl_val),
    .vmm_start(gm_vmm_start), .vmm_row_base(gm_row_base), .vmm_row_cnt(gm_row_cnt),
    .vmm_col_base(gm_col_base), .vmm_col_cnt(gm_col_cnt), .g_bias(gm_g_bias),
    .vmm_done(gm_vmm_done), .sl_sel(gm_sl_sel),
    .adc_sample(ga_sample), .adc_shift(ga_shift), .adc_valid(ga_valid), .adc_code(ga_code),
    .c_start(gc_start), .c_phase(gc_phase), .c_done(gc_done), .c_cos(gc_cos), .c_sin(gc_sin)
  );

  // ------------------------------------------------ MLP processing engine
  logic             pm_cmd_valid, pm_cmd_ready, pm_rsp_valid;
  cell_cmd_e        pm_cmd_op;
  logic [ROW_W-1:0] pm_cmd_row;
  logic [COL_W-1:0] pm_cmd_col;
  cond_t            pm_rsp_g;
  logic             pm_bl_we, pm_vmm_start, pm_vmm_done;
  logic [ROW_W-1:0] pm_bl_idx, pm_row_base;
  act_t             pm_bl_val;
  logic [DIM_W-1:0] pm_row_cnt;
  logic [COL_W-1:0] pm_col_base, pm_sl_sel;
  logic [DIM_W:0]   pm_col_cnt;
  cond_t            pm_g_bias;
  cur_t             pm_sl [NB_MAX];
  logic [NB_W-1:0]  vc_nbits;
  scode_t           vc_sw;
  cur_t             vc_out;
  logic             pa_sample, pa_valid;
  logic [5:0]       pa_shift;
  adc_code_t        pa_code;
  logic             av_valid, av_ready, av_out_valid;
  act_t             av_x, av_y;
  act_fn_e          av_fn;

  haq_programmer u_haq (
    .clk, .rst_n,
    .w_valid, .w_ready, .w_tar, .w_row, .w_col, .w_nbits, .w_scode,
    .cmd_valid(pm_cmd_valid), .cmd_ready(pm_cmd_ready), .cmd_op(pm_cmd_op),
    .cmd_row(pm_cmd_row), .cmd_col(pm_cmd_col),
    .rsp_valid(pm_rsp_valid), .rsp_g(pm_rsp_g),
    .res_valid(haq_res_valid), .res_w_pro(haq_res_w_pro), .res_bits(haq_res_bits)
  );

  rram_macro u_pe_macro (
    .clk, .rst_n,
    .cmd_valid(pm_cmd_valid), .cmd_ready(pm_cmd_ready), .cmd_op(pm_cmd_op),
    .cmd_row(pm_cmd_row), .cmd_col(pm_cmd_col),
    .rsp_valid(pm_rsp_valid), .rsp_g(pm_rsp_g),
    .bl_we(pm_bl_we), .bl_idx(pm_bl_idx), .bl_val(pm_bl_val),
    .vmm_start(pm_vmm_start), .vmm_row_base(pm_row_base), .vmm_row_cnt(pm_row_cnt),
    .vmm_col_base(pm_col_base), .vmm_col_cnt(pm_col_cnt), .g_bias(pm_g_bias),
    .vmm_done(pm_vmm_done), .sl_grp_base(pm_sl_sel), .sl_grp_cur(pm_sl)
  );

  vcmac u_vcmac (
    .i_in(pm_sl), .nbits(vc_nbits), .c_sw(vc_sw), .i_out(vc_out)
  );

  adc u_pe_adc (
    .clk, .rst_n, .sample(pa_sample), .cur(vc_out), .shift(pa_shift),
    .valid(pa_valid), .code(pa_code)
  );

  activation_unit u_act (
    .clk, .rst_n, .in_valid(av_valid), .in_ready(av_ready), .x(av_x), .fn(av_fn),
    .out_valid(av_out_valid), .y(av_y)
  );

  pe_controller u_pe_ctrl (
    .clk, .rst_n, .start(pe_start), .desc(ly_tab[op.idx]),
    .busy(pe_busy), .done(pe_done),
    .sp_re(p_sp_re), .sp_raddr(p_sp_raddr), .sp_rdata(sp_rdata),
    .sp_we(p_sp_we), .sp_waddr(p_sp_waddr), .sp_wdata(p_sp_wdata),
    .bl_we(pm_bl_we), .bl_idx(pm_bl_idx), .bl_val(pm_bl_val),
    .vmm_start(pm_vmm_start), .vmm_row_base(pm_row_base), .vmm_row_cnt(pm_row_cnt),
    .vmm_col_base(pm_col_base), .vmm_col_cnt(pm_col_cnt), .g_bias(pm_g_bias),
    .vmm_done(pm_vmm_done), .sl_sel(pm_sl_sel),
    .vc_nbits(vc_nbits), .vc_sw(vc_sw),
    .adc_sample(pa_sample), .adc_shift(pa_shift), .adc_valid(pa_valid), .adc_code(pa_code),
    .act_valid(av_valid), .act_ready(av_ready), .act_x(av_x), .act_fn(av_fn),
    .act_out_valid(av_out_valid), .act_y(av_y)
  );

  // ------------------------------------------------------------- renderer
  act_t ren_rgb [3];
  assign ren_rgb[0] = ren_v[1];
  assign ren_rgb[1] = ren_v[2];
  assign ren_rgb[2] = ren_v[3];

  render_unit u_render (
    .clk, .rst_n,
    .s_valid(q == Q_REN_GO), .s_first(first_r), .s_last(last_r),
    .sigma(ren_v[0]), .delta(op.delta), .rgb(ren_rgb),
    .pix_valid, .pix_rgb, .trans(pix_trans)
  );

  // A controller is started only from the fetch state and finishes before
  // the sequencer moves on.
  a_ge_excl: assert property (@(posedge clk) disable iff (!rst_n) !(ge_busy && pe_busy));

endmodule
