// tb_lane_ram: fills a 6-lane, 32-row memory lane by lane with random words, then
// reads every row back (one-cycle latency) and rewrites single lanes, checking that
// the other lanes keep their contents.
module tb_lane_ram;
  localparam int L = 6, D = 32;
  logic clk = 0, we = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [2:0] wlane = '0;
  logic [15:0] wdata = '0;
  logic [L-1:0][15:0] rdata;
  logic [15:0] model [D][L];
  int checks = 0, failures = 0;

  lane_ram #(.LANES(L), .W(16), .DEPTH(D)) dut (.clk, .we, .waddr, .wlane, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  task automatic wr(input int r, input int l, input logic [15:0] v);
    @(negedge clk);
    we = 1; waddr = 5'(r); wlane = 3'(l); wdata = v;
    model[r][l] = v;
    @(negedge clk);
    we = 0;
  endtask

  task automatic rd_check(input int r);
    @(negedge clk);
    raddr = 5'(r);
    @(negedge clk);
    for (int l = 0; l < L; l++) begin
      checks++;
      if (rdata[l] !== model[r][l]) begin failures++; $display("FAIL r%0d l%0d", r, l); end
    end
  endtask

  initial begin
    for (int r = 0; r < D; r++) for (int l = 0; l < L; l++) wr(r, l, 16'($urandom));
    for (int r = 0; r < D; r++) rd_check(r);
    repeat (50) begin
      int r;
      r = int'($urandom_range(0, D - 1));
      wr(r, int'($urandom_range(0, L - 1)), 16'($urandom));
      rd_check(r);
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
