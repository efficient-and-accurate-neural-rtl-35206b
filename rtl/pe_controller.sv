// pe_controller: sequencer of the MLP Processing Engine (PE) for one layer.
//
// Each weight of a layer was written with hardware-aware quantization into
// nbits adjacent cells of one row (bit[0] first); the VCMAC combines those
// nbits source lines into sum_i I_i * s^(n-1-i). With the universal bias at
// half the LRS conductance, every cell contributes x * b_i / 2 with b_i near
// +-1, so the digital result of a neuron is
//     y = act( 2 * I_vcmac * (1/s)^(n-1) * scale )
// where scale maps the [-1, 1] weights back to the layer's real range.
//
// A layer whose outputs do not fit in one row band (outs_per_band * nbits
// columns) is split into bands stacked downwards: band b holds outputs
// b*outs_per_band .. and uses rows row_base + b*in_dim. For each band the
// controller
//   1. copies the in_dim inputs from the scratchpad (src_addr) to that band's
//      BL drivers and starts one analog vector-matrix multiplication,
//   2. for each output j of the band: points the VCMAC at columns
//      col_base + (j mod outs_per_band)*nbits, samples it with the ADC,
//      rescales the code digitally, applies the activation, and writes the
//      result to dst_addr + j.
// (1/s)^(n-1) is computed once per layer by nbits-1 multiplications.
// Arithmetic: code LSB is 2^(adc_shift-20) of a unit current, inv_pow is
// Q8.24 (kept wide so that 15 truncating multiplications by the Q2.14 1/s
// stay accurate), scale Q3.12, so
// y_Q12 = code * inv_pow * scale >> (43 - adc_shift),
// saturated to 16 bits.
// The recombination and digital (1/s)^(n-1) scaling follow the paper; the
// band mapping, scratchpad, descriptor format and fixed point are this
// design's. Timing: nbits + bands*(in_dim + VMM_LAT + 5) +
// out_dim*(3 + activation latency) + 1 clocks per layer (activation latency 1
// for none/ReLU/sigmoid, ITER + 3 for sine); with the 512 x 512 array one
// band's analog multiply-accumulate covers up to 512 rows x 512 columns.
// g_bias is a constant output (half the set conductance, the universal
// bias of the HAQ weights); bl_val and sp_wdata pass the scratchpad data and
// the activation result straight through, so synthesis reports these bits
// as idle.
module pe_controller
  import nf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_desc_t       desc,
  output logic              busy,
  output logic              done,
  // scratchpad (1-clock read latency)
  output logic              sp_re,
  output logic [SP_AW-1:0]  sp_raddr,
  input  act_t              sp_rdata,
  output logic              sp_we,
  output logic [SP_AW-1:0]  sp_waddr,
  output act_t              sp_wdata,
  // crossbar
  output logic              bl_we,
  output logic [ROW_W-1:0]  bl_idx,
  output act_t              bl_val,
  output logic              vmm_start,
  output logic [ROW_W-1:0]  vmm_row_base,
  output logic [DIM_W-1:0]  vmm_row_cnt,
  output logic [COL_W-1:0]  vmm_col_base,
  output logic [DIM_W:0]    vmm_col_cnt,
  output cond_t             g_bias,
  input  logic              vmm_done,
  output logic [COL_W-1:0]  sl_sel,
  // VCMAC configuration
  output logic [NB_W-1:0]   vc_nbits,
  output scode_t            vc_sw,
  // ADC
  output logic              adc_sample,
  output logic [5:0]        adc_shift,
  input  logic              adc_valid,
  input  adc_code_t         adc_code,
  // activation unit
  output logic              act_valid,
  input  logic              act_ready,
  output act_t              act_x,
  output act_fn_e           act_fn,
  input  logic              act_out_valid,
  input  act_t              act_y
);

  typedef enum logic [3:0] {
    S_IDLE, S_POW, S_BAND, S_LOAD, S_VMM, S_VMM_WAIT, S_SAMPLE, S_ADC_WAIT,
    S_ACT, S_ACT_WAIT, S_DONE
  } state_e;
  state_e state;

  layer_desc_t      d;
  logic [15:0]      inv_s;
  logic [31:0]      inv_pow;
  logic [NB_W-1:0]  p;
  logic [ROW_W-1:0] band_row;
  logic [DIM_W-1:0] band_n;      // outputs in the current band
  logic [DIM_W-1:0] jb;          // output index within band
  logic [DIM_W-1:0] jg;          // global output index
  logic [DIM_W-1:0] k_iss, rd_k;
  logic             rd_v;
  act_t             y_pre;

  logic [47:0]        pow_next;
  logic signed [63:0] y_full;
  logic [DIM_W-1:0]   remain;

  assign pow_next = (48'(inv_pow) * 48'(inv_s)) >> 14;
  assign y_full   = (64'(adc_code) * $signed({32'd0, inv_pow}) * 64'(d.scale))
                    >>> (6'd43 - d.adc_shift);
  assign remain   = d.out_dim - jg;

  assign busy         = (state != S_IDLE);
  assign vmm_row_base = band_row;
  assign vmm_row_cnt  = d.in_dim;
  assign vmm_col_base = d.col_base;
  assign vmm_col_cnt  = (DIM_W+1)'(32'(band_n) * 32'(d.nbits));
  assign g_bias       = cond_t'(G_ONE / 2);
  assign sl_sel       = d.col_base + COL_W'(32'(jb) * 32'(d.nbits));
  assign vc_nbits     = d.nbits;
  assign vc_sw        = d.s_code;
  assign adc_shift    = d.adc_shift;
  assign act_fn       = d.act;
  assign act_x        = y_pre;

  always_comb begin
    sp_re      = (state == S_LOAD) && (k_iss < d.in_dim);
    sp_raddr   = d.src_addr + SP_AW'(k_iss);
    bl_we      = (state == S_LOAD) && rd_v;
    bl_idx     = band_row + ROW_W'(rd_k);
    bl_val     = sp_rdata;
    vmm_start  = (state == S_VMM);
    adc_sample = (state == S_SAMPLE);
    act_valid  = (state == S_ACT);
    sp_we      = (state == S_ACT_WAIT) && act_out_valid;
    sp_waddr   = d.dst_addr + SP_AW'(jg);
    sp_wdata   = act_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      d        <= '0;
      inv_s    <= '0;
      inv_pow  <= '0;
      p        <= '0;
      band_row <= '0;
      band_n   <= '0;
      jb       <= '0;
      jg       <= '0;
      k_iss    <= '0;
      rd_k     <= '0;
      rd_v     <= 1'b0;
      y_pre    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d        <= desc;
          inv_s    <= inv_s_q14(desc.s_code);
          inv_pow  <= 32'd16777216;
          p        <= NB_W'(1);
          band_row <= desc.row_base;
          jg       <= '0;
          state    <= S_POW;
        end
        S_POW: begin
          if (p < d.nbits) begin
            inv_pow <= pow_next[31:0];
            p       <= p + 1'b1;
          end else begin
            state <= (d.out_dim == '0) ? S_DONE : S_BAND;
          end
        end
        S_BAND: begin
          band_n <= (remain < d.outs_per_band || d.outs_per_band == '0) ? remain : d.outs_per_band;
          jb     <= '0;
          k_iss  <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          if (sp_re) begin
            rd_v  <= 1'b1;
            rd_k  <= k_iss;
            k_iss <= k_iss + 1'b1;
          end
          if (!sp_re && !rd_v) state <= S_VMM;
        end
        S_VMM:      state <= S_VMM_WAIT;
        S_VMM_WAIT: if (vmm_done) state <= S_SAMPLE;
        S_SAMPLE:   state <= S_ADC_WAIT;
        S_ADC_WAIT: if (adc_valid) begin
          y_pre <= sat_act(y_full);
          state <= S_ACT;
        end
        S_ACT:      if (act_ready) state <= S_ACT_WAIT;
        S_ACT_WAIT: if (act_out_valid) begin
          jg <= jg + 1'b1;
          if (jg + 1'b1 >= d.out_dim) begin
            state <= S_DONE;
          end else if (jb + 1'b1 >= band_n) begin
            band_row <= band_row + ROW_W'(d.in_dim);
            state    <= S_BAND;
          end else begin
            jb    <= jb + 1'b1;
            state <= S_SAMPLE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
