// tb_lstm_controller: H = 8, Q = 2, NCH = 2. After start the controller must issue the
// 16 row-group/gate/chunk commands on consecutive cycles in order, then wait for all
// 8 h commits (fed here with gaps, some during the issue phase), pulse done once and
// flip h_rbank. Two time steps are run.
module tb_lstm_controller;
  localparam int H = 8, Q = 2, NCH = 2, HQ = H / Q;
  logic clk = 0, rst_n = 0, start = 0, hc_valid = 0;
  logic busy, done, h_rbank, iv, ifirst, ilast;
  logic [4:0] iwrow;
  logic [3:0] ibrow;
  brds_pkg::gate_e igate;
  logic [1:0] irg;
  int checks = 0, failures = 0, n_issue, n_done;

  lstm_controller #(.H(H), .Q(Q), .NCH(NCH)) dut (.clk, .rst_n, .start, .busy, .done, .h_rbank, .hc_valid,
    .issue_valid(iv), .issue_wrow(iwrow), .issue_brow(ibrow), .issue_first(ifirst), .issue_last(ilast),
    .issue_gate(igate), .issue_rg(irg));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 2; step++) begin
      logic bank0;
      int commits;
      bank0 = h_rbank;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      commits = 0;
      n_issue = 0;
      for (int rg = 0; rg < HQ; rg++)
        for (int g = 0; g < 4; g++)
          for (int k = 0; k < NCH; k++) begin
            chk(iv && busy, "issue valid");
            chk(int'(iwrow) == (rg * 4 + g) * NCH + k, "weight row");
            chk(int'(ibrow) == rg * 4 + g, "bias row");
            chk(ifirst == (k == 0) && ilast == (k == NCH - 1), "first/last");
            chk(int'(igate) == g && int'(irg) == rg, "gate/rg");
            n_issue++;
            hc_valid = (rg >= 2 && k == 0 && g < 2);   // some commits overlap the issue phase
            commits += hc_valid;
            @(negedge clk);
            hc_valid = 0;
          end
      chk(!iv, "issue stops");
      while (commits < H) begin
        chk(!done, "no early done");
        repeat ($urandom_range(0, 3)) @(negedge clk);
        hc_valid = 1;
        commits++;
        @(negedge clk);
        hc_valid = 0;
      end
      chk(done, "done pulse");
      chk(h_rbank != bank0, "bank flipped");
      @(negedge clk);
      chk(!done && !busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
