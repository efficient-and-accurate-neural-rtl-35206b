// rram_macro: BEHAVIOURAL MODEL (not synthesizable logic) of the 512 x 512
// one-transistor-one-resistor resistive memory crossbar together with its
// WL/BL and SL drivers.
//
// The real part is an analog array: each cell is a TaOx resistive switch whose
// conductance, after a set pulse, scatters around 29.22 uS with a standard
// deviation of 5.46 uS (device-to-device write noise). Inputs are voltages on
// the bit lines; each source line collects the current sum_r V_r * G_rc.
// This model keeps every conductance normalised to the mean low-resistance
// state (1.0 = 256), so a set draws N(1.0, 0.187^2), a reset gives a
// high-resistance state near 0, and a forming pulse (used to create the
// Gaussian encoder's random matrix) draws the same Gaussian. The Gaussian is
// the sum of twelve uniform draws.
//
// Interface
//   cell command port : cmd_valid/cmd_ready, cmd_op (form/set/reset/read),
//                       cmd_row/cmd_col. rsp_valid pulses PROG_LAT (program)
//                       or READ_LAT (read) cycles later; rsp_g holds the
//                       cell's conductance read after the operation.
//   bit-line drivers  : bl_we writes the input value bl_val of row bl_idx.
//   vector-matrix mult: vmm_start computes, for columns in
//                       [vmm_col_base, +vmm_col_cnt), the current
//                       sum over rows in [vmm_row_base, +vmm_row_cnt) of
//                       bl * (g - g_bias). vmm_done pulses VMM_LAT cycles
//                       later. The universal bias g_bias is how the paper
//                       turns a unipolar conductance into a bipolar value
//                       (around +-1 for HAQ bits, zero-mean for the encoder).
//   source-line read  : sl_grp_cur[k] is the current of column sl_grp_base+k,
//                       NB_MAX adjacent columns at once, as the VCMAC sees them.
// Read noise is not modelled: the paper reports it far smaller than write
// noise. The board's 64-way input limit is not modelled: all rows of a window
// are driven together.
module rram_macro
  import nf_pkg::*;
#(
  parameter int unsigned N_ROWS   = ROWS,
  parameter int unsigned N_COLS   = COLS,
  parameter int unsigned PROG_LAT = 4,
  parameter int unsigned READ_LAT = 2,
  parameter int unsigned VMM_LAT  = 4,
  parameter int unsigned LRS_SD   = 479  // sigma of LRS, 1e-4 of mean x 256: 5.463/29.22*256 = 47.9
) (
  input  logic              clk,
  input  logic              rst_n,
  // cell command port
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cell_cmd_e         cmd_op,
  input  logic [ROW_W-1:0]  cmd_row,
  input  logic [COL_W-1:0]  cmd_col,
  output logic              rsp_valid,
  output cond_t             rsp_g,
  // bit-line input drivers
  input  logic              bl_we,
  input  logic [ROW_W-1:0]  bl_idx,
  input  act_t              bl_val,
  // analog vector-matrix multiplication
  input  logic              vmm_start,
  input  logic [ROW_W-1:0]  vmm_row_base,
  input  logic [DIM_W-1:0]  vmm_row_cnt,
  input  logic [COL_W-1:0]  vmm_col_base,
  input  logic [DIM_W:0]    vmm_col_cnt,
  input  cond_t             g_bias,
  output logic              vmm_done,
  // source-line currents
  input  logic [COL_W-1:0]  sl_grp_base,
  output cur_t              sl_grp_cur [NB_MAX]
);

  cond_t g   [N_ROWS][N_COLS];
  act_t  bl  [N_ROWS];
  cur_t  sl  [N_COLS];

  logic        busy;
  int unsigned cnt;
  logic        is_vmm;
  logic        pend_rsp;
  logic [ROW_W-1:0] r_row;
  logic [COL_W-1:0] r_col;

  // Normal draw scaled by LRS_SD/10000 * 256 around G_ONE, clipped to range.
  function automatic cond_t draw_lrs();
    int s;
    int v;
    s = 0;
    for (int k = 0; k < 12; k++) s += int'($urandom % 1000);
    s -= 6000;                                   // N(0,1) in units of 1e-3
    v = int'(G_ONE) + (s * int'(LRS_SD)) / 10000;
    if (v < 0)    v = 0;
    if (v > 1023) v = 1023;
    return cond_t'(v);
  endfunction

  initial begin
    for (int r = 0; r < int'(N_ROWS); r++) begin
      bl[r] = '0;
      for (int c = 0; c < int'(N_COLS); c++) g[r][c] = '0;
    end
    for (int c = 0; c < int'(N_COLS); c++) sl[c] = '0;
  end

  assign cmd_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      is_vmm    <= 1'b0;
      pend_rsp  <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_g     <= '0;
      vmm_done  <= 1'b0;
      r_row     <= '0;
      r_col     <= '0;
    end else begin
      rsp_valid <= 1'b0;
      vmm_done  <= 1'b0;
      if (bl_we && 32'(bl_idx) < N_ROWS) bl[bl_idx] <= bl_val;
      if (!busy && cmd_valid) begin
        if (32'(cmd_row) < N_ROWS && 32'(cmd_col) < N_COLS) begin
          unique case (cmd_op)
            CMD_FORM:  g[cmd_row][cmd_col] <= draw_lrs();
            CMD_SET:   g[cmd_row][cmd_col] <= draw_lrs();
            CMD_RESET: g[cmd_row][cmd_col] <= cond_t'($urandom % 4);
            default: ;
          endcase
        end
        busy     <= 1'b1;
        is_vmm   <= 1'b0;
        pend_rsp <= 1'b1;
        r_row    <= cmd_row;
        r_col    <= cmd_col;
        cnt      <= (cmd_op == CMD_READ) ? READ_LAT : PROG_LAT;
      end else if (!busy && vmm_start) begin
        for (int c = int'(vmm_col_base); c < int'(vmm_col_base) + int'(vmm_col_cnt); c++) begin
          if (c < int'(N_COLS)) begin
            cur_t acc;
            acc = '0;
            for (int r = int'(vmm_row_base); r < int'(vmm_row_base) + int'(vmm_row_cnt); r++) begin
              if (r < int'(N_ROWS))
                acc += cur_t'(bl[r]) * (cur_t'(g[r][c]) - cur_t'(g_bias));
            end
            sl[c] <= acc;
          end
        end
        busy     <= 1'b1;
        is_vmm   <= 1'b1;
        pend_rsp <= 1'b0;
        cnt      <= VMM_LAT;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy <= 1'b0;
          if (is_vmm) vmm_done <= 1'b1;
          else if (pend_rsp) begin
            rsp_valid <= 1'b1;
            rsp_g     <= (32'(r_row) < N_ROWS && 32'(r_col) < N_COLS) ? g[r_row][r_col] : '0;
          end
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NB_MAX); k++) begin
      if (int'(sl_grp_base) + k < int'(N_COLS)) sl_grp_cur[k] = sl[int'(sl_grp_base) + k];
      else                                      sl_grp_cur[k] = '0;
    end
  end

endmodule
