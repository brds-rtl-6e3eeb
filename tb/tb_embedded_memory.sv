// tb_embedded_memory: Q = 2 lanes, X = 10, H = 8, 3 input and 4 recurrent lanes, 2
// chunks. Loads every array through the load port with random words and checks that
// each lane reads its own rows (global row = local*Q + lane), that the replicated M_X
// and M_H answer random gathers on every port, that h_t elements delivered by both
// lanes in the same cycle are committed one per cycle into the other M_H bank, that
// the cell port reads before it writes, and that the STORE read port works.
module tb_embedded_memory;
  import brds_pkg::*;
  localparam int Q = 2, X = 10, H = 8, RX = 3, RH = 4, NCH = 2;
  localparam int HQ = H / Q, WROWS = HQ * 4 * NCH, BROWS = HQ * 4;
  logic clk = 0, rst_n = 0;
  logic ld_en = 0;
  mem_id_e ld_mem = MEM_WX;
  logic [31:0] ld_row = '0;
  logic [7:0] ld_lane = '0;
  logic [15:0] ld_data = '0;
  logic [Q-1:0][4:0] w_raddr = '0;
  logic [Q-1:0][RX-1:0][15:0] wx_row, adx_row, x_rdata;
  logic [Q-1:0][RH-1:0][15:0] wh_row, adh_row, h_rdata;
  logic [Q-1:0][3:0] b_raddr = '0;
  logic [Q-1:0][15:0] b_rdata, c_rdata, c_wdata = '0, hw_data = '0;
  logic [Q-1:0][RX-1:0][15:0] x_raddr = '0;
  logic [Q-1:0][RH-1:0][15:0] h_raddr = '0;
  logic h_rbank = 0;
  logic [Q-1:0][1:0] c_raddr = '0, c_waddr = '0;
  logic [Q-1:0] c_we = '0, hw_en = '0;
  logic [Q-1:0][15:0] hw_idx = '0;
  logic hc_valid, st_rd_en = 0;
  logic [15:0] hc_idx, hc_data, st_rd_addr = '0, st_rd_data;
  int checks = 0, failures = 0;
  logic [15:0] mwx [Q*WROWS][RX], mwh [Q*WROWS][RH], mb [Q*BROWS], mc [H], mx [X], mh [2][H];

  embedded_memory #(.Q(Q), .X(X), .H(H), .RX(RX), .RH(RH), .NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic ld(input mem_id_e m, input int r, input int l, input logic [15:0] d);
    @(negedge clk);
    ld_en = 1; ld_mem = m; ld_row = 32'(r); ld_lane = 8'(l); ld_data = d;
    @(negedge clk);
    ld_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < Q * WROWS; r++) begin
      for (int l = 0; l < RX; l++) begin mwx[r][l] = 16'($urandom); ld(MEM_WX, r, l, mwx[r][l]); end
      for (int l = 0; l < RH; l++) begin mwh[r][l] = 16'($urandom); ld(MEM_WH, r, l, mwh[r][l]); end
    end
    for (int r = 0; r < Q * BROWS; r++) begin mb[r] = 16'($urandom); ld(MEM_B, r, 0, mb[r]); end
    for (int r = 0; r < H; r++) begin mc[r] = 16'($urandom); ld(MEM_C, r, 0, mc[r]); end
    for (int r = 0; r < X; r++) begin mx[r] = 16'($urandom); ld(MEM_X, r, 0, mx[r]); end
    for (int r = 0; r < H; r++) begin mh[0][r] = 16'($urandom); ld(MEM_H, r, 0, mh[0][r]); end
    // weight rows and biases per lane
    for (int r = 0; r < WROWS; r++) begin
      @(negedge clk);
      for (int q = 0; q < Q; q++) begin w_raddr[q] = 5'(r); b_raddr[q] = 4'(r % BROWS); c_raddr[q] = 2'(r % HQ); end
      @(negedge clk);
      for (int q = 0; q < Q; q++) begin
        for (int l = 0; l < RX; l++) chk(wx_row[q][l] == mwx[r*Q+q][l], "M_WX");
        for (int l = 0; l < RH; l++) chk(wh_row[q][l] == mwh[r*Q+q][l], "M_WH");
        chk(b_rdata[q] == mb[(r % BROWS)*Q+q], "M_B");
        chk(c_rdata[q] == mc[(r % HQ)*Q+q], "M_C");
      end
    end
    // gathers from the replicated vectors
    repeat (50) begin
      int xa [Q][RX], ha [Q][RH];
      @(negedge clk);
      for (int q = 0; q < Q; q++) begin
        for (int l = 0; l < RX; l++) begin xa[q][l] = int'($urandom_range(0, X-1)); x_raddr[q][l] = 16'(xa[q][l]); end
        for (int l = 0; l < RH; l++) begin ha[q][l] = int'($urandom_range(0, H-1)); h_raddr[q][l] = 16'(ha[q][l]); end
      end
      @(negedge clk);
      for (int q = 0; q < Q; q++) begin
        for (int l = 0; l < RX; l++) chk(x_rdata[q][l] == mx[xa[q][l]], "M_X gather");
        for (int l = 0; l < RH; l++) chk(h_rdata[q][l] == mh[0][ha[q][l]], "M_H gather");
      end
    end
    // h_t from both lanes in the same cycle: serialised, lane 0 first, into bank 1
    for (int rg = 0; rg < HQ; rg++) begin
      @(negedge clk);
      for (int q = 0; q < Q; q++) begin
        hw_en[q] = 1; hw_idx[q] = 16'(rg*Q+q); hw_data[q] = 16'($urandom); mh[1][rg*Q+q] = hw_data[q];
      end
      #1;
      chk(!hc_valid, "collector idle");
      @(negedge clk);
      hw_en = '0;
      chk(hc_valid && int'(hc_idx) == rg*Q && hc_data == mh[1][rg*Q], "commit lane 0");
      @(negedge clk);
      chk(hc_valid && int'(hc_idx) == rg*Q+1 && hc_data == mh[1][rg*Q+1], "commit lane 1");
      @(negedge clk);
      chk(!hc_valid, "collector empty");
    end
    // bank 0 unchanged, bank 1 now holds h_t
    @(negedge clk);
    h_rbank = 1;
    for (int j = 0; j < H; j++) begin
      @(negedge clk);
      st_rd_en = 1; st_rd_addr = 16'(j);
      for (int q = 0; q < Q; q++) for (int l = 0; l < RH; l++) h_raddr[q][l] = 16'(j);
      @(negedge clk);
      st_rd_en = 0;
      chk(st_rd_data == mh[1][j], "store read of new bank");
      chk(h_rdata[1][2] == mh[1][j], "lane 1 reads new bank");
    end
    // cell port: read returns the old value in the cycle it is replaced
    @(negedge clk);
    c_raddr[0] = 2'd1; c_we[0] = 1; c_waddr[0] = 2'd1; c_wdata[0] = 16'h1234;
    @(negedge clk);
    c_we = '0;
    chk(c_rdata[0] == mc[1*Q+0], "cell read before write");
    @(negedge clk);
    chk(c_rdata[0] == 16'h1234, "cell written");
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
