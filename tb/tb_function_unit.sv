// tb_function_unit: streams the four gate pre-activations of 120 rows (first back to
// back, then with random gaps) into a Function unit whose cell memory and Buffer
// feedback register are modelled here. Each h_t and each written c_t is compared with
// the reference c = sig(f)c' + sig(i)tanh(g), h = sig(o)tanh(c) built from the same
// piecewise-linear functions; back to back, rows must complete one per 4 cycles.
module tb_function_unit;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0, lut_func = 0, lut_ab = 0;
  logic [3:0] lut_seg = '0;
  logic [15:0] lut_data = '0;
  logic in_valid = 0;
  brds_pkg::gate_e in_gate;
  logic [3:0] in_row = '0, c_raddr, c_waddr;
  logic [7:0] in_idx = '0, h_idx;
  logic signed [15:0] in_pre = '0;
  logic [15:0] c_rdata, c_wdata, fb_out_data, fb_in_data, h_data;
  logic c_we, fb_out_valid, fb_in_valid, h_valid;
  logic [15:0] cmem [16];
  int checks = 0, failures = 0, cyc = 0, last_h_cyc = -1, b2b_ok = 0;
  int exp_h[$], exp_idx[$];
  int exp_c [16];
  bit b2b = 1;

  function_unit #(.RW(4), .CW(8)) dut (.clk, .rst_n, .lut_we, .lut_func, .lut_seg, .lut_ab, .lut_data,
    .in_valid, .in_gate, .in_row, .in_idx, .in_pre, .c_raddr, .c_rdata, .c_we, .c_waddr, .c_wdata,
    .fb_out_valid, .fb_out_data, .fb_in_valid, .fb_in_data, .h_valid, .h_idx, .h_data);
  always #5 clk = ~clk;

  // cell memory and Buffer feedback register
  always_ff @(posedge clk) begin
    c_rdata <= cmem[c_raddr];
    if (c_we) cmem[c_waddr] <= c_wdata;
    fb_in_valid <= rst_n && fb_out_valid;
    fb_in_data  <= fb_out_data;
    cyc <= cyc + 1;
  end

  always @(negedge clk) if (rst_n) begin
    if (c_we) begin
      checks++;
      if (s16(c_wdata) != exp_c[c_waddr]) begin failures++; $display("FAIL c row %0d got %0d exp %0d", c_waddr, s16(c_wdata), exp_c[c_waddr]); end
    end
    if (h_valid) begin
      checks++;
      if (exp_h.size() == 0) begin failures++; $display("FAIL extra h"); end
      else begin
        int e, ei;
        e = exp_h.pop_front(); ei = exp_idx.pop_front();
        if (s16(h_data) != e || int'(h_idx) != ei) begin
          failures++; $display("FAIL h idx %0d/%0d got %0d exp %0d", h_idx, ei, s16(h_data), e);
        end
      end
      if (b2b && last_h_cyc >= 0 && cyc - last_h_cyc == 4) b2b_ok++;
      last_h_cyc = cyc;
    end
  end

  initial begin
    in_gate = brds_pkg::G_F;
    for (int k = 0; k < 16; k++) begin cmem[k] = 16'(int'($urandom_range(0, 1000)) - 500); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int s = 0; s < SEGS; s++)
        for (int ab = 0; ab < 2; ab++) begin
          @(negedge clk);
          lut_we = 1; lut_func = f[0]; lut_seg = 4'(s); lut_ab = ab[0];
          lut_data = 16'(ab ? coef_b(f[0], s) : coef_a(f[0], s));
        end
    @(negedge clk);
    lut_we = 0;
    for (int r = 0; r < 120; r++) begin
      int row, pre [4], fa, ia, ga, oa, c, cp;
      row = r % 16;
      if (r == 60) begin
        b2b = 0;
        @(negedge clk); in_valid = 0;
        repeat (12) @(negedge clk);   // let the back-to-back rows drain
      end
      for (int g = 0; g < 4; g++) pre[g] = int'($urandom_range(0, 3000)) - 1500;
      cp = s16(cmem[row]);
      fa = rpwl(0, pre[0]); ia = rpwl(0, pre[1]); ga = rpwl(1, pre[2]); oa = rpwl(0, pre[3]);
      c = radd(rmul(fa, cp), rmul(ia, ga));
      exp_c[row] = c;
      exp_h.push_back(rmul(oa, rpwl(1, c)));
      exp_idx.push_back(r);
      for (int g = 0; g < 4; g++) begin
        if (!b2b) while ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_gate = brds_pkg::gate_e'(g); in_row = 4'(row); in_idx = 8'(r); in_pre = 16'(pre[g]);
      end
      if (r % 16 == 15) begin
        // rows reuse cell addresses: wait for this pass to finish before its c is read again
        @(negedge clk); in_valid = 0;
        repeat (8) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks += 2;
    if (exp_h.size() != 0) begin failures++; $display("FAIL %0d rows missing", exp_h.size()); end
    if (b2b_ok < 40) begin failures++; $display("FAIL back-to-back rate, %0d", b2b_ok); end
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
