// ge_controller: sequencer of the Gaussian Encoder (GE).
//
// The encoder maps a low-dimensional input x (coordinates, view angles or
// time) to gamma(x) = [cos(2*pi*Bx), sin(2*pi*Bx)], where each entry of B is
// Gaussian. B is not stored anywhere: it is the conductance matrix of a
// crossbar region whose cells were formed with random conductance. With the
// universal bias set to the mean conductance (1.0), a column current is
// sum_r x_r * (g_rc - 1), a zero-mean Gaussian projection; the configured
// scale sets its standard deviation to the sigma the network was trained with.
//
// For one configuration (ge_cfg_t) the controller
//   1. copies in_dim inputs from the scratchpad (src_addr) onto the BL drivers
//      of rows row_base .. row_base+in_dim-1,
//   2. starts one analog vector-matrix multiplication over enc_dim columns,
//   3. for each column m: samples the SL current with the ADC, forms the
//      phase (code * scale, in turns, wrapped to 16 bits), runs the CORDIC,
//      and writes cos to dst_addr+m and sin to dst_addr+enc_dim+m,
//   4. if append_raw, copies the raw inputs after the encoding (the CT network
//      uses [cos, sin, x], 64 + 64 + 3 = 131 values).
// Phase scaling: SL current has 20 fractional bits; code = I >> adc_shift;
// phase_turns * 2^16 = code * scale >> (16 - adc_shift) (adc_shift <= 16).
// The steps follow the paper's GE description (crossbar, ADCs, CORDIC); the
// ordering, the scratchpad and the one-column-at-a-time ADC are this design's.
// Timing per pass: about 2*in_dim + VMM latency + enc_dim*(ITER + 6) clocks.
// g_bias is a constant output (the encoder always removes the mean
// conductance) and bl_val is the scratchpad read data passed straight to the
// bit-line drivers; synthesis therefore reports these bits as idle.
module ge_controller
  import nf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  ge_cfg_t           cfg,
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
  // ADC
  output logic              adc_sample,
  output logic [5:0]        adc_shift,
  input  logic              adc_valid,
  input  adc_code_t         adc_code,
  // CORDIC
  output logic              c_start,
  output logic [15:0]       c_phase,
  input  logic              c_done,
  input  act_t              c_cos,
  input  act_t              c_sin
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_VMM, S_VMM_WAIT, S_SAMPLE, S_ADC_WAIT, S_CORDIC,
    S_WR_COS, S_WR_SIN, S_RAW, S_DONE
  } state_e;
  state_e state;

  ge_cfg_t          c;
  logic [DIM_W-1:0] k_iss;     // read issue index (load / raw copy)
  logic             rd_v;      // read data valid this cycle
  logic [DIM_W-1:0] rd_k;      // index of that data
  logic [DIM_W-1:0] m;
  act_t             cos_r, sin_r;

  logic signed [29:0] ph_full;
  assign ph_full = (30'(adc_code) * 30'(c.scale)) >>> (6'd16 - c.adc_shift);

  assign busy         = (state != S_IDLE);
  assign vmm_row_base = c.row_base;
  assign vmm_row_cnt  = c.in_dim;
  assign vmm_col_base = c.col_base;
  assign vmm_col_cnt  = {1'b0, c.enc_dim};
  assign g_bias       = cond_t'(G_ONE);
  assign sl_sel       = c.col_base + COL_W'(m);
  assign adc_shift    = c.adc_shift;

  always_comb begin
    sp_re      = 1'b0;
    sp_raddr   = c.src_addr + SP_AW'(k_iss);
    sp_we      = 1'b0;
    sp_waddr   = '0;
    sp_wdata   = '0;
    bl_we      = 1'b0;
    bl_idx     = c.row_base + ROW_W'(rd_k);
    bl_val     = sp_rdata;
    vmm_start  = 1'b0;
    adc_sample = 1'b0;
    c_start    = 1'b0;
    c_phase    = ph_full[15:0];
    unique case (state)
      S_LOAD: begin
        sp_re = (k_iss < c.in_dim);
        bl_we = rd_v;
      end
      S_VMM:    vmm_start  = 1'b1;
      S_SAMPLE: adc_sample = 1'b1;
      S_ADC_WAIT: c_start  = adc_valid;
      S_WR_COS: begin
        sp_we    = 1'b1;
        sp_waddr = c.dst_addr + SP_AW'(m);
        sp_wdata = cos_r;
      end
      S_WR_SIN: begin
        sp_we    = 1'b1;
        sp_waddr = c.dst_addr + SP_AW'(c.enc_dim) + SP_AW'(m);
        sp_wdata = sin_r;
      end
      S_RAW: begin
        sp_re    = (k_iss < c.in_dim);
        sp_we    = rd_v;
        sp_waddr = c.dst_addr + SP_AW'(c.enc_dim) + SP_AW'(c.enc_dim) + SP_AW'(rd_k);
        sp_wdata = sp_rdata;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      k_iss <= '0;
      rd_v  <= 1'b0;
      rd_k  <= '0;
      m     <= '0;
      cos_r <= '0;
      sin_r <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          k_iss <= '0;
          m     <= '0;
          state <= S_LOAD;
        end
        S_LOAD, S_RAW: begin
          if (sp_re) begin
            rd_v  <= 1'b1;
            rd_k  <= k_iss;
            k_iss <= k_iss + 1'b1;
          end
          if (!sp_re && !rd_v)
            state <= (state == S_LOAD) ? S_VMM : S_DONE;
        end
        S_VMM:      state <= S_VMM_WAIT;
        S_VMM_WAIT: if (vmm_done) state <= (c.enc_dim == '0) ? S_DONE : S_SAMPLE;
        S_SAMPLE:   state <= S_ADC_WAIT;
        S_ADC_WAIT: if (adc_valid) state <= S_CORDIC;
        S_CORDIC: if (c_done) begin
          cos_r <= c_cos;
          sin_r <= c_sin;
          state <= S_WR_COS;
        end
        S_WR_COS: state <= S_WR_SIN;
        S_WR_SIN: begin
          if (m + 1'b1 >= c.enc_dim) begin
            k_iss <= '0;
            state <= c.append_raw ? S_RAW : S_DONE;
          end else begin
            m     <= m + 1'b1;
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
