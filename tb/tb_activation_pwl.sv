// tb_activation_pwl: loads chord coefficients of sigmoid into one unit and tanh into
// another, sweeps the input range (and beyond, to test clamping), and checks each
// output against the reference evaluation, and that it stays within 0.03 of the true
// function. Latency must be one cycle.
module tb_activation_pwl;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, lut_we = 0, lut_ab = 0, in_valid = 0;
  logic [3:0] lut_seg = '0;
  logic [15:0] lut_data = '0;
  logic signed [15:0] x = '0, ys, yt;
  logic vs, vt;
  logic we_s, we_t;
  int checks = 0, failures = 0;

  assign we_s = lut_we && !lut_ab_func;
  assign we_t = lut_we && lut_ab_func;
  logic lut_ab_func = 0;

  activation_pwl u_s (.clk, .rst_n, .lut_we(we_s), .lut_seg, .lut_ab, .lut_data, .in_valid, .x, .out_valid(vs), .y(ys));
  activation_pwl u_t (.clk, .rst_n, .lut_we(we_t), .lut_seg, .lut_ab, .lut_data, .in_valid, .x, .out_valid(vt), .y(yt));
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int s = 0; s < SEGS; s++)
        for (int ab = 0; ab < 2; ab++) begin
          @(negedge clk);
          lut_we = 1; lut_ab_func = f[0]; lut_seg = 4'(s); lut_ab = ab[0];
          lut_data = 16'(ab ? coef_b(f[0], s) : coef_a(f[0], s));
        end
    @(negedge clk);
    lut_we = 0;
    for (int xi = -3000; xi <= 3000; xi += 7) begin
      real xr;
      @(negedge clk);
      x = 16'(xi);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      xr = real'(xi) / 256.0;
      checks += 3;
      if (!vs || !vt) begin failures++; $display("FAIL latency"); end
      if (int'(ys) != rpwl(0, xi) || int'(yt) != rpwl(1, xi)) begin
        failures++;
        $display("FAIL x=%0d sig %0d/%0d tanh %0d/%0d", xi, ys, rpwl(0, xi), yt, rpwl(1, xi));
      end
      if ((real'(ys) / 256.0 - fsig(xr)) > 0.03 || (fsig(xr) - real'(ys) / 256.0) > 0.03 ||
          (real'(yt) / 256.0 - ftanh(xr)) > 0.03 || (ftanh(xr) - real'(yt) / 256.0) > 0.03) begin
        failures++;
        $display("FAIL accuracy x=%f sig %f tanh %f", xr, real'(ys) / 256.0, real'(yt) / 256.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
