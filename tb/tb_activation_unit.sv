// tb_activation_unit: self-checking test of the activation unit.
// For each function, random Q3.12 inputs are compared with a real-valued
// reference: identity and ReLU exactly, sigmoid within 0.025, sine within
// 6 LSB. The latency (1 clock, or ITER+3 clocks for sine) is checked too.
module tb_activation_unit;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  act_t x = 0, y;
  act_fn_e fn = ACT_NONE;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  activation_unit #(.ITER(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input act_fn_e f, input act_t v);
    real xr, ref_v, tol;
    int lat, exp_lat;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    x = v; fn = f; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    xr = real'(v) / 4096.0;
    unique case (f)
      ACT_NONE:    begin ref_v = xr;                     tol = 0.0;   exp_lat = 1;  end
      ACT_RELU:    begin ref_v = (xr < 0.0) ? 0.0 : xr;  tol = 0.0;   exp_lat = 1;  end
      ACT_SIGMOID: begin ref_v = 1.0 / (1.0 + $exp(-xr)); tol = 0.025; exp_lat = 1; end
      default:     begin ref_v = $sin(xr);               tol = 6.0/4096.0; exp_lat = 19; end
    endcase
    checks += 2;
    if (fabs(real'(y) / 4096.0 - ref_v) > tol + 1e-9) begin
      failures++;
      $display("fn %0d x %f: y %f exp %f", f, xr, real'(y) / 4096.0, ref_v);
    end
    if (lat != exp_lat) begin
      failures++;
      $display("fn %0d latency %0d exp %0d", f, lat, exp_lat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      run(act_fn_e'(f), 16'sd0);
      run(act_fn_e'(f), 16'sd4096);
      run(act_fn_e'(f), -16'sd4096);
      run(act_fn_e'(f), 16'sd32767);
      run(act_fn_e'(f), -16'sd32768);
      for (int i = 0; i < 100; i++) run(act_fn_e'(f), act_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
