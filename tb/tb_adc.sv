// tb_adc: self-checking test of the ADC model.
// Random currents and shifts are compared with floor(I / 2^shift) saturated
// to the signed 14-bit range; valid must follow sample by one clock and the
// code must hold while sample is low.
module tb_adc;
  import nf_pkg::*;

  logic clk = 0, rst_n = 0, sample = 0, valid;
  cur_t cur = 0;
  logic [5:0] shift = 0;
  adc_code_t code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  adc dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    adc_code_t held;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      cur = cur_t'({$urandom, $urandom}) >>> ($urandom % 40);
      shift = 6'($urandom % 24);
      sample = 1;
      e = longint'(cur) >>> shift;
      if (e > 8191) e = 8191;
      if (e < -8192) e = -8192;
      @(negedge clk);
      sample = 0;
      checks += 2;
      if (!valid) failures++;
      if (longint'(code) != e) begin
        failures++;
        $display("cur %0d shift %0d: code %0d exp %0d", cur, shift, code, e);
      end
      held = code;
      cur = ~cur;
      @(negedge clk);
      checks += 2;
      if (valid) failures++;
      if (code != held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
