// tb_gate_unit: a Gate with 3 input-weight lanes, 5 recurrent-weight lanes, Large MA
// of 5 and Small MA of 3. Rows of 2 chunks are streamed back to back or with gaps, with
// the MA select in both settings; each pre-activation is compared with a reference
// built from the same products, tree order, accumulation and bias add, and must leave
// exactly 4 cycles after the row's last chunk. Some rows use large values so that the
// saturating (recovery) path is exercised.
module tb_gate_unit;
  import tb_ref_pkg::*;
  localparam int RX = 3, RH = 5, RL = 5, RS = 3, NCH = 2;
  logic clk = 0, rst_n = 0, sel = 0, in_valid = 0, first = 0, last = 0;
  logic [15:0] tag = '0, out_tag;
  logic [RX-1:0][15:0] wx, xv;
  logic [RH-1:0][15:0] wh, hv;
  logic signed [15:0] bias = '0, out_pre;
  logic out_valid;
  int checks = 0, failures = 0, cyc = 0, sat_rows = 0;
  int exp_q[$], tag_q[$], due_q[$];

  gate_unit #(.RX(RX), .RH(RH), .RL(RL), .RS(RS)) dut (.clk, .rst_n, .sel_x_large(sel), .in_valid, .first,
    .last, .tag, .wx, .xv, .wh, .hv, .bias, .out_valid, .out_tag, .out_pre);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      int e, tg, due;
      e = exp_q.pop_front(); tg = tag_q.pop_front(); due = due_q.pop_front();
      if (int'(out_pre) != e) begin failures++; $display("FAIL pre %0d exp %0d", out_pre, e); end
      if (int'(out_tag) != tg) begin failures++; $display("FAIL tag"); end
      if (cyc != due) begin failures++; $display("FAIL latency cyc %0d due %0d", cyc, due); end
    end
  end

  initial begin
    wx = '0; xv = '0; wh = '0; hv = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int acc, b;
      bit big;
      big = (r % 10 == 3);
      b = int'($urandom_range(0, 400)) - 200;
      for (int k = 0; k < NCH; k++) begin
        int p[];
        int lx [RX], lxv [RX], lh [RH], lhv [RH], t;
        bit nsel;
        nsel = (r >= 100);
        p = new[RL + RS];
        for (int j = 0; j < RX; j++) begin
          lx[j]  = big ? 30000 : int'($urandom_range(0, 256)) - 128;
          lxv[j] = big ? 30000 : int'($urandom_range(0, 512)) - 256;
        end
        for (int j = 0; j < RH; j++) begin
          lh[j]  = (nsel && j >= RS) ? 0 : (big ? 30000 : int'($urandom_range(0, 256)) - 128);
          lhv[j] = big ? 30000 : int'($urandom_range(0, 512)) - 256;
        end
        for (int j = 0; j < RL + RS; j++) p[j] = 0;
        if (!nsel) begin
          for (int j = 0; j < RH; j++) p[j] = rmul(lh[j], lhv[j]);
          for (int j = 0; j < RX; j++) p[RL+j] = rmul(lx[j], lxv[j]);
        end else begin
          for (int j = 0; j < RX; j++) p[j] = rmul(lx[j], lxv[j]);
          for (int j = 0; j < RS; j++) p[RL+j] = rmul(lh[j], lhv[j]);
        end
        t = rtree(p, RL + RS);
        acc = (k == 0) ? t : radd(acc, t);
        while ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; sel = nsel; first = (k == 0); last = (k == NCH - 1); tag = 16'(r); bias = 16'(b);
        for (int j = 0; j < RX; j++) begin wx[j] = 16'(lx[j]); xv[j] = 16'(lxv[j]); end
        for (int j = 0; j < RH; j++) begin wh[j] = 16'(lh[j]); hv[j] = 16'(lhv[j]); end
        if (k == NCH - 1) begin
          exp_q.push_back(radd(acc, b));
          tag_q.push_back(r);
          due_q.push_back(cyc + 4);
          if (big) sat_rows++;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || sat_rows == 0) begin failures++; $display("FAIL missing outputs"); end
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
