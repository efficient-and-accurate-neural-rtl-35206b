// tb_rram_macro: self-checking test of the crossbar model (32 x 32 instance).
//   1. sets and reads back 1024 cells: the mean must be 1.0 +- 0.03 and the
//      spread 0.187 +- 0.03 of the LRS mean (29.22 uS, 5.46 uS in the paper);
//      reset cells must read below 4/256;
//   2. response latencies of program (PROG_LAT) and read (READ_LAT) commands;
//   3. a vector-matrix multiplication over a sub-window against
//      sum_r bl_r * (g_rc - g_bias) from the read-back conductances, through
//      the grouped source-line outputs, and the VMM_LAT latency.
module tb_rram_macro;
  import nf_pkg::*;

  localparam int NR = 32, NC = 32;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  cell_cmd_e cmd_op = CMD_READ;
  logic [ROW_W-1:0] cmd_row = 0;
  logic [COL_W-1:0] cmd_col = 0;
  cond_t rsp_g;
  logic bl_we = 0;
  logic [ROW_W-1:0] bl_idx = 0;
  act_t bl_val = 0;
  logic vmm_start = 0, vmm_done;
  logic [ROW_W-1:0] vmm_row_base = 0;
  logic [DIM_W-1:0] vmm_row_cnt = 0;
  logic [COL_W-1:0] vmm_col_base = 0;
  logic [DIM_W:0]   vmm_col_cnt = 0;
  cond_t g_bias = 0;
  logic [COL_W-1:0] sl_grp_base = 0;
  cur_t sl_grp_cur [NB_MAX];
  int checks = 0, failures = 0;
  int gsh [NR][NC];
  int blv [NR];

  always #5 clk = ~clk;

  rram_macro #(.N_ROWS(NR), .N_COLS(NC), .PROG_LAT(4), .READ_LAT(2), .VMM_LAT(4)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(input cell_cmd_e op, input int r, input int c, output int g, output int lat);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_row = ROW_W'(r); cmd_col = COL_W'(c);
    @(negedge clk);
    cmd_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    g = int'(rsp_g);
  endtask

  initial begin
    int g, lat;
    real sum, sq, mean, sd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    sum = 0; sq = 0;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        cmd(((r + c) % 3 == 0) ? CMD_RESET : CMD_SET, r, c, g, lat);
        checks++;
        if (lat != 5) failures++;  // response 4 clocks after the accepting edge
        cmd(CMD_READ, r, c, g, lat);
        checks++;
        if (lat != 3) failures++;
        gsh[r][c] = g;
        if ((r + c) % 3 == 0) begin
          checks++;
          if (g >= 4) failures++;
        end else begin
          sum += real'(g) / 256.0;
          sq  += (real'(g) / 256.0) ** 2;
        end
      end
    mean = sum / 682.0;
    sd = $sqrt(sq / 682.0 - mean * mean);
    $display("LRS mean %f sd %f", mean, sd);
    checks += 2;
    if (mean < 0.97 || mean > 1.03) failures++;
    if (sd < 0.157 || sd > 0.217) failures++;
    // vector-matrix multiplication on rows 3..27, columns 5..24
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      bl_we = 1; bl_idx = ROW_W'(r);
      blv[r] = int'($urandom % 8192) - 4096;
      bl_val = act_t'(blv[r]);
    end
    @(negedge clk);
    bl_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      g_bias = (pass == 0) ? cond_t'(128) : cond_t'(256);
      vmm_row_base = 3; vmm_row_cnt = 25; vmm_col_base = 5; vmm_col_cnt = 20;
      vmm_start = 1;
      @(negedge clk);
      vmm_start = 0;
      lat = 1;
      while (!vmm_done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 5) failures++;  // response 4 clocks after the accepting edge
      for (int base = 5; base < 25; base += int'(NB_MAX)) begin
        sl_grp_base = COL_W'(base);
        #1;
        for (int k = 0; k < int'(NB_MAX) && base + k < 25; k++) begin
          longint e;
          e = 0;
          for (int r = 3; r < 28; r++) e += longint'(blv[r]) * longint'(gsh[r][base + k] - int'(g_bias));
          checks++;
          if (longint'(sl_grp_cur[k]) != e) begin
            failures++;
            $display("col %0d: %0d exp %0d", base + k, sl_grp_cur[k], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
