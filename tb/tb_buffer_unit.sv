// tb_buffer_unit: a random stream of tagged gate values must come out of a 3-stage
// Buffer exactly 3 cycles later, and the feedback value exactly 1 cycle later.
module tb_buffer_unit;
  localparam int D = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid, fb_in_valid = 0, fb_out_valid;
  logic [7:0] in_tag = '0, out_tag;
  logic [15:0] in_data = '0, out_data, fb_in_data = '0, fb_out_data;
  logic [24:0] hist [$];
  logic [16:0] fhist [$];
  int checks = 0, failures = 0;

  buffer_unit #(.N(16), .TW(8), .DELAY(D)) dut (.clk, .rst_n, .in_valid, .in_tag, .in_data,
    .out_valid, .out_tag, .out_data, .fb_in_valid, .fb_in_data, .fb_out_valid, .fb_out_data);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      // compare with what was applied D cycles (resp. 1 cycle) ago
      if (hist.size() == D) begin
        logic [24:0] e;
        e = hist.pop_front();
        checks++;
        if ({out_valid, out_tag, out_data} !== e) begin failures++; $display("FAIL fwd t=%0d", t); end
      end
      if (fhist.size() == 1) begin
        logic [16:0] f;
        f = fhist.pop_front();
        checks++;
        if ({fb_out_valid, fb_out_data} !== f) begin failures++; $display("FAIL fb t=%0d", t); end
      end
      in_valid = 1'($urandom); in_tag = 8'($urandom); in_data = 16'($urandom);
      fb_in_valid = 1'($urandom); fb_in_data = 16'($urandom);
      hist.push_back({in_valid, in_tag, in_data});
      fhist.push_back({fb_in_valid, fb_in_data});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
