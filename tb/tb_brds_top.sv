// tb_brds_top: end-to-end test of the accelerator at a small size (X = 16, H = 12,
// Q = 2 lanes, 4 input and 4 recurrent weight lanes per Gate, 2 chunks per row, so
// X_SP = H_SP = 8). The testbench prunes random LSTM weights row-balanced, lays the
// nonzeros, their relative indices, biases, x, h_0, c_0 and the activation tables out
// in the DRAM model, LOADs them, runs three time steps (the second with the other MA
// select setting and a new x) and compares every h_t element with a reference step
// computed here, STOREs h_t back and checks the DRAM. It counts the mechanisms of the
// design and fails if one never happened: DRAM stalls, multi-chunk accumulation,
// recovery (saturation), both MA select settings, more than one h_t element waiting
// for M_H, and the M_H bank swap between steps.
module tb_brds_top;
  import brds_pkg::*;
  import tb_ref_pkg::*;
  localparam int X = 16, H = 12, Q = 2, RX = 4, RH = 4, NCH = 2;
  localparam int XSP = RX * NCH, HSP = RH * NCH, HQ = H / Q;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, sel_x_large = 0, busy, done;
  cmd_t cmd;
  logic dram_req, dram_we, dram_gnt, dram_rvalid, h_wr_valid;
  logic [31:0] dram_addr;
  logic [15:0] dram_wdata, dram_rdata, h_wr_idx, h_wr_data;

  brds_top #(.X(X), .H(H), .Q(Q), .RX(RX), .RH(RH), .RL(RH), .RS(RX), .NCH(NCH)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .sel_x_large, .busy, .done,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .h_wr_valid, .h_wr_idx, .h_wr_data);
  dram_model #(.DEPTH(8192)) u_dram (.clk, .req(dram_req), .we(dram_we), .addr(dram_addr),
    .wdata(dram_wdata), .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata));
  always #5 clk = ~clk;

  // model of the layer
  int wxv [H][4][XSP], wxc [H][4][XSP], whv [H][4][HSP], whc [H][4][HSP], bias [H][4];
  int xvec [X], hprev [H], cprev [H], href [H];
  int checks = 0, failures = 0;
  int n_sat = 0, n_multi = 0, n_sel[2] = '{0, 0}, n_swap = 0, n_chunks = 0;
  int dptr = 0;
  int got_h [H];
  bit got [H];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // choose n distinct sorted columns out of m
  task automatic pick(input int n, input int m, output int cols []);
    int k;
    cols = new[n];
    k = 0;
    for (int c = 0; c < m && k < n; c++)
      if (int'($urandom_range(0, m - 1 - c)) < n - k) begin cols[k] = c; k++; end
  endtask

  task automatic make_layer();
    for (int i = 0; i < H; i++)
      for (int g = 0; g < 4; g++) begin
        int cx [], ch [];
        pick(XSP, X, cx);
        pick(HSP, H, ch);
        for (int k = 0; k < XSP; k++) begin wxc[i][g][k] = cx[k]; wxv[i][g][k] = int'($urandom_range(0, 128)) - 64; end
        for (int k = 0; k < HSP; k++) begin whc[i][g][k] = ch[k]; whv[i][g][k] = int'($urandom_range(0, 128)) - 64; end
        bias[i][g] = int'($urandom_range(0, 200)) - 100;
      end
    bias[3][0] = 32767;   // forces the bias adder to saturate
    bias[5][3] = -32768;
  endtask

  // ---- DRAM image ----
  function automatic int put(input int v);
    u_dram.mem[dptr] = 16'(v);
    dptr++;
    return dptr - 1;
  endfunction

  task automatic load(input mem_id_e m, input int da, input int nrows);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: OP_LOAD, mem: m, dram_addr: 32'(da), row0: 0, nrows: 32'(nrows)};
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  task automatic load_weights();
    int a_wx, a_adx, a_wh, a_adh, a_b, a_lut;
    // global row of weight memories: (((i/Q)*4+g)*NCH+k)*Q + i%Q
    a_wx = dptr;
    for (int r = 0; r < H * 4 * NCH; r++) begin
      int q, loc, i, g, k;
      q = r % Q; loc = r / Q; k = loc % NCH; g = (loc / NCH) % 4; i = (loc / NCH / 4) * Q + q;
      for (int l = 0; l < RX; l++) void'(put(wxv[i][g][k*RX+l]));
    end
    a_adx = dptr;
    for (int r = 0; r < H * 4 * NCH; r++) begin
      int q, loc, i, g, k;
      q = r % Q; loc = r / Q; k = loc % NCH; g = (loc / NCH) % 4; i = (loc / NCH / 4) * Q + q;
      for (int l = 0; l < RX; l++) begin
        int j;
        j = k*RX + l;
        void'(put(wxc[i][g][j] - (j == 0 ? -1 : wxc[i][g][j-1]) - 1));
      end
    end
    a_wh = dptr;
    for (int r = 0; r < H * 4 * NCH; r++) begin
      int q, loc, i, g, k;
      q = r % Q; loc = r / Q; k = loc % NCH; g = (loc / NCH) % 4; i = (loc / NCH / 4) * Q + q;
      for (int l = 0; l < RH; l++) void'(put(whv[i][g][k*RH+l]));
    end
    a_adh = dptr;
    for (int r = 0; r < H * 4 * NCH; r++) begin
      int q, loc, i, g, k;
      q = r % Q; loc = r / Q; k = loc % NCH; g = (loc / NCH) % 4; i = (loc / NCH / 4) * Q + q;
      for (int l = 0; l < RH; l++) begin
        int j;
        j = k*RH + l;
        void'(put(whc[i][g][j] - (j == 0 ? -1 : whc[i][g][j-1]) - 1));
      end
    end
    a_b = dptr;
    for (int r = 0; r < H * 4; r++) begin
      int q, loc;
      q = r % Q; loc = r / Q;
      void'(put(bias[(loc / 4) * Q + q][loc % 4]));
    end
    a_lut = dptr;
    for (int f = 0; f < 2; f++)
      for (int s = 0; s < SEGS; s++) begin void'(put(coef_a(f[0], s))); void'(put(coef_b(f[0], s))); end
    load(MEM_WX, a_wx, H * 4 * NCH);
    load(MEM_ADX, a_adx, H * 4 * NCH);
    load(MEM_WH, a_wh, H * 4 * NCH);
    load(MEM_ADH, a_adh, H * 4 * NCH);
    load(MEM_B, a_b, H * 4);
    load(MEM_LUT, a_lut, 2 * SEGS);
  endtask

  task automatic load_vec(input mem_id_e m, input int v [], input int n);
    int a;
    a = dptr;
    for (int j = 0; j < n; j++) void'(put(v[j]));
    load(m, a, n);
  endtask

  // ---- reference step ----
  task automatic ref_step(input bit sel);
    int cnew [H];
    for (int i = 0; i < H; i++) begin
      int act [4];
      for (int g = 0; g < 4; g++) begin
        int acc, pre;
        longint raw;
        for (int k = 0; k < NCH; k++) begin
          int p [];
          int px [RX], ph [RH];
          p = new[RH + RX];
          for (int l = 0; l < RX; l++) px[l] = rmul(wxv[i][g][k*RX+l], xvec[wxc[i][g][k*RX+l]]);
          for (int l = 0; l < RH; l++) ph[l] = rmul(whv[i][g][k*RH+l], hprev[whc[i][g][k*RH+l]]);
          for (int l = 0; l < RH; l++) p[l] = sel ? px[l] : ph[l];
          for (int l = 0; l < RX; l++) p[RH+l] = sel ? ph[l] : px[l];
          acc = (k == 0) ? rtree(p, RH + RX) : radd(acc, rtree(p, RH + RX));
          if (k > 0) n_chunks++;
        end
        raw = longint'(acc) + bias[i][g];
        pre = radd(acc, bias[i][g]);
        if (raw != pre) n_sat++;
        act[g] = rpwl(g == 2, pre);
      end
      cnew[i] = radd(rmul(act[0], cprev[i]), rmul(act[1], act[2]));
      href[i] = rmul(act[3], rpwl(1, cnew[i]));
    end
    for (int i = 0; i < H; i++) cprev[i] = cnew[i];
  endtask

  task automatic run_step(input bit sel);
    int t0, cycles;
    bit bank0;
    sel_x_large = sel;
    n_sel[sel]++;
    ref_step(sel);
    for (int i = 0; i < H; i++) got[i] = 0;
    bank0 = dut.h_rbank;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: OP_RUN, mem: MEM_X, dram_addr: 0, row0: 0, nrows: 0};
    t0 = $time;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    cycles = int'(($time - t0) / 10);
    // issue takes H/Q*4*NCH cycles; the pipeline adds a fixed latency
    chk(cycles >= HQ * 4 * NCH && cycles <= HQ * 4 * NCH + 20, $sformatf("step took %0d cycles", cycles));
    $display("step: %0d cycles for %0d issue cycles", cycles, HQ * 4 * NCH);
    for (int i = 0; i < H; i++) begin
      chk(got[i], $sformatf("h[%0d] produced", i));
      chk(got_h[i] == href[i], $sformatf("h[%0d] = %0d expected %0d", i, got_h[i], href[i]));
    end
    if (dut.h_rbank != bank0) n_swap++;
    for (int i = 0; i < H; i++) hprev[i] = href[i];
  endtask

  int n_multi_wait = 0;
  always @(negedge clk) begin
    if (h_wr_valid) begin
      got[h_wr_idx] = 1;
      got_h[h_wr_idx] = s16(h_wr_data);
    end
    if ($countones(dut.u_mem.pend_v) > 1) n_multi_wait++;
  end

  initial begin
    int v [];
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_layer();
    load_weights();
    v = new[X];
    for (int j = 0; j < X; j++) begin xvec[j] = int'($urandom_range(0, 512)) - 256; v[j] = xvec[j]; end
    load_vec(MEM_X, v, X);
    v = new[H];
    for (int j = 0; j < H; j++) begin hprev[j] = int'($urandom_range(0, 256)) - 128; v[j] = hprev[j]; end
    load_vec(MEM_H, v, H);
    for (int j = 0; j < H; j++) begin cprev[j] = int'($urandom_range(0, 512)) - 256; v[j] = cprev[j]; end
    load_vec(MEM_C, v, H);
    run_step(0);
    v = new[X];
    for (int j = 0; j < X; j++) begin xvec[j] = int'($urandom_range(0, 512)) - 256; v[j] = xvec[j]; end
    load_vec(MEM_X, v, X);
    run_step(1);
    run_step(0);
    // STORE h_t
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: OP_STORE, mem: MEM_H, dram_addr: 32'(7000), row0: 0, nrows: 32'(H)};
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < H; i++) chk(s16(u_dram.mem[7000 + i]) == href[i], $sformatf("stored h[%0d]", i));
    // every mechanism must have happened
    chk(u_dram.stalls > 0, "DRAM stall");
    chk(n_chunks > 0, "multi-chunk accumulation");
    chk(n_sat > 0, "recovery (saturation)");
    chk(n_sel[0] > 0 && n_sel[1] > 0, "both MA select settings");
    chk(n_multi_wait > 0, "h_t elements waiting for M_H");
    chk(n_swap == 3, "M_H bank swap");
    $display("mechanisms: stalls=%0d chunks=%0d sat=%0d sel0=%0d sel1=%0d hwait=%0d swaps=%0d",
             u_dram.stalls, n_chunks, n_sat, n_sel[0], n_sel[1], n_multi_wait, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
