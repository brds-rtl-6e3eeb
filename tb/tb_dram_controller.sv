// tb_dram_controller: against the DRAM model (latency 3, random stalls), LOADs of a
// 3-lane weight memory, of 1-lane words and of the 2-lane activation table must write
// every DRAM word, in order, to the right row and lane; a STORE of 10 h elements from
// a modelled h memory (one-cycle read) must land at the right DRAM words.
module tb_dram_controller;
  import brds_pkg::*;
  localparam int RX = 3, RH = 5;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [31:0] dram_addr;
  logic [15:0] dram_wdata, dram_rdata;
  logic ld_en, st_rd_en;
  mem_id_e ld_mem;
  logic [31:0] ld_row;
  logic [7:0] ld_lane;
  logic [15:0] ld_data, st_rd_addr, st_rd_data;
  logic [15:0] hmem [64];
  int checks = 0, failures = 0;
  int exp_row[$], exp_lane[$], exp_data[$];

  dram_controller #(.RX(RX), .RH(RH)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .ld_en, .ld_mem, .ld_row, .ld_lane, .ld_data, .st_rd_en, .st_rd_addr, .st_rd_data);
  dram_model #(.DEPTH(1024)) u_dram (.clk, .req(dram_req), .we(dram_we), .addr(dram_addr),
    .wdata(dram_wdata), .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata));
  always #5 clk = ~clk;
  always_ff @(posedge clk) st_rd_data <= hmem[st_rd_addr[5:0]];

  always @(negedge clk) if (ld_en) begin
    checks++;
    if (exp_data.size() == 0) begin failures++; $display("FAIL extra write"); end
    else begin
      int r, l, d;
      r = exp_row.pop_front(); l = exp_lane.pop_front(); d = exp_data.pop_front();
      if (int'(ld_row) != r || int'(ld_lane) != l || int'(ld_data) != d) begin
        failures++;
        $display("FAIL ld row %0d/%0d lane %0d/%0d data %h/%h", ld_row, r, ld_lane, l, ld_data, d);
      end
    end
  end

  task automatic issue(input op_e op, input mem_id_e m, input int da, input int r0, input int nr);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, mem: m, dram_addr: 32'(da), row0: 32'(r0), nrows: 32'(nr)};
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  task automatic load(input mem_id_e m, input int lanes, input int da, input int r0, input int nr);
    for (int r = 0; r < nr; r++)
      for (int l = 0; l < lanes; l++) begin
        exp_row.push_back(r0 + r); exp_lane.push_back(l); exp_data.push_back(int'(u_dram.mem[da + r*lanes + l]));
      end
    issue(OP_LOAD, m, da, r0, nr);
    checks++;
    if (exp_data.size() != 0) begin failures++; $display("FAIL %0d words not written", exp_data.size()); end
  endtask

  initial begin
    cmd = '0;
    for (int k = 0; k < 1024; k++) u_dram.mem[k] = 16'($urandom);
    for (int k = 0; k < 64; k++) hmem[k] = 16'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(MEM_WX, RX, 100, 4, 7);
    load(MEM_ADH, RH, 200, 0, 3);
    load(MEM_B, 1, 300, 10, 9);
    load(MEM_LUT, 2, 400, 0, 32);
    issue(OP_STORE, MEM_H, 700, 20, 10);
    for (int k = 0; k < 10; k++) begin
      checks++;
      if (u_dram.mem[700 + k] !== hmem[20 + k]) begin failures++; $display("FAIL store %0d", k); end
    end
    checks++;
    if (u_dram.stalls == 0) begin failures++; $display("FAIL no DRAM stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
