// tb_ma_selector: both select settings with random operands; every output lane is
// compared with the lane it should carry, or zero where the set is narrower.
module tb_ma_selector;
  localparam int RX = 3, RH = 6, RL = 6, RS = 3;
  logic sel;
  logic [RX-1:0][15:0] wx, xv;
  logic [RH-1:0][15:0] wh, hv;
  logic [RL-1:0][15:0] lw, lv;
  logic [RS-1:0][15:0] sw, sv;
  int checks = 0, failures = 0;

  ma_selector #(.RX(RX), .RH(RH), .RL(RL), .RS(RS)) dut (
    .sel_x_large(sel), .wx, .xv, .wh, .hv, .large_w(lw), .large_v(lv), .small_w(sw), .small_v(sv));

  task automatic chk(input logic [15:0] got, input logic [15:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL got %h exp %h", got, exp); end
  endtask

  initial begin
    for (int t = 0; t < 100; t++) begin
      sel = t[0];
      for (int j = 0; j < RX; j++) begin wx[j] = 16'($urandom); xv[j] = 16'($urandom); end
      for (int j = 0; j < RH; j++) begin wh[j] = 16'($urandom); hv[j] = 16'($urandom); end
      #1;
      for (int j = 0; j < RL; j++) begin
        chk(lw[j], sel ? (j < RX ? wx[j] : 16'h0) : wh[j]);
        chk(lv[j], sel ? (j < RX ? xv[j] : 16'h0) : hv[j]);
      end
      for (int j = 0; j < RS; j++) begin
        chk(sw[j], sel ? wh[j] : wx[j]);
        chk(sv[j], sel ? hv[j] : xv[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
