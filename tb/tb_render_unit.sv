// tb_render_unit: self-checking test of the volume-rendering accumulator.
// Renders 60 random rays of 1..64 samples (one sample per clock), then 20
// rays of 64 thin samples (sigma up to 0.5, tighter tolerance 0.004), and
// compares each pixel colour and the final transmittance with a real-valued
// evaluation of C = sum T_i (1 - exp(-sigma_i delta_i)) c_i. Also checks
// that pix_valid comes exactly one clock after the last sample and that an
// all-empty ray (sigma = 0) renders black with full transmittance.
module tb_render_unit;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_first = 0, s_last = 0;
  act_t sigma = 0, delta = 0;
  act_t rgb [3];
  logic pix_valid;
  act_t pix_rgb [3];
  logic [16:0] trans;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  render_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ray(input int n, input bit empty, input bit thin);
    real t, c [3], a, sr, dr;
    t = 1.0;
    c[0] = 0.0; c[1] = 0.0; c[2] = 0.0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      s_valid = 1;
      s_first = (i == 0);
      s_last  = (i == n - 1);
      sigma   = empty ? 16'sd0 : act_t'($urandom % (thin ? 2048 : 32768)); // 0 .. 0.5 / 8
      delta   = act_t'(64 + $urandom % 256);                  // ~0.016 .. 0.08
      for (int k = 0; k < 3; k++) rgb[k] = act_t'($urandom % 4097);
      sr = real'(sigma) / 4096.0;
      dr = real'(delta) / 4096.0;
      a  = 1.0 - $exp(-sr * dr);
      for (int k = 0; k < 3; k++) c[k] += t * a * real'(rgb[k]) / 4096.0;
      t  = t * (1.0 - a);
    end
    @(negedge clk);
    s_valid = 0;
    s_last  = 0;
    checks++;
    if (!pix_valid) begin
      failures++;
      $display("pix_valid missing one clock after last sample");
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (fabs(real'(pix_rgb[k]) / 4096.0 - c[k]) > (thin ? 0.004 : 0.01)) begin
        failures++;
        $display("n=%0d ch%0d: got %f exp %f", n, k, real'(pix_rgb[k]) / 4096.0, c[k]);
      end
    end
    checks++;
    if (fabs(real'(trans) / 65536.0 - t) > (thin ? 0.004 : 0.01)) begin
      failures++;
      $display("n=%0d trans got %f exp %f", n, real'(trans) / 65536.0, t);
    end
    if (empty) begin
      checks++;
      if (pix_rgb[0] != 0 || trans != 17'h10000) failures++;
    end
  endtask

  initial begin
    for (int k = 0; k < 3; k++) rgb[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ray(8, 1'b1, 1'b0);
    ray(1, 1'b0, 1'b0);
    for (int r = 0; r < 60; r++) ray(1 + int'($urandom % 64), 1'b0, 1'b0);
    // many thin samples: small per-sample errors must not add up
    for (int r = 0; r < 20; r++) ray(64, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
