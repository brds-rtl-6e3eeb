// embedded_memory: every on-chip memory array of the accelerator, banked over Q lanes.
//
// Lane q (one Gate/Buffer/Function chain) owns the matrix rows i with i mod Q = q and
// has its own bank of each per-row memory:
//   M_WX, M_AdX  lane_ram, RX lanes: nonzero input weights and their relative indices
//   M_WH, M_AdH  lane_ram, RH lanes: nonzero recurrent weights and relative indices
//   M_B          word_ram: biases, 4 words per matrix row (f, i, g, o)
//   M_C          word_ram: cell state, fetched before it is overwritten
// A weight memory row holds one chunk of one gate row; local row ((i/Q)*4+gate)*NCH+k.
// The operand vectors are replicated per lane: M_X as ceil(RX/2) dual-read copies,
// M_H as ceil(RH/2) copies, each of 2H words in two banks. The bank h_rbank holds
// h_{t-1} and is read; h_t is written to the other bank, so a time step never reads
// a value it has already replaced. The Q Function units may finish a row in the same
// cycle; their h_t elements are parked in one slot per lane and written into all copies
// one per cycle, lowest lane first (hc_* reports each write).
//
// Load path: one element per cycle from the DRAM controller. The global row of a
// per-row memory is local*Q + lane; M_X and M_H rows are vector indices (M_H loads go
// to bank h_rbank). STORE reads h through read port 0 of lane 0 (st_rd_*, one cycle).
// All reads are synchronous with one cycle latency.
// rst_n is the asynchronous reset of the registers and also disables the assertions;
// a linter may count that second use as a synchronous one, which it is not in the circuit.
// The load port's lane index (8 bits) and row (32 bits) are wider than any memory
// here; only the low bits that address a memory are used.
module embedded_memory
  import brds_pkg::*;
#(
  parameter int unsigned N   = N_DEF,
  parameter int unsigned Q   = 4,
  parameter int unsigned X   = 153,
  parameter int unsigned H   = 1024,
  parameter int unsigned RX  = 20,
  parameter int unsigned RH  = 64,
  parameter int unsigned NCH = 1,
  parameter int unsigned CW  = 16,
  localparam int unsigned HQ    = H / Q,
  localparam int unsigned WROWS = HQ * 4 * NCH,
  localparam int unsigned BROWS = HQ * 4,
  localparam int unsigned WRA   = $clog2(WROWS),
  localparam int unsigned BRA   = $clog2(BROWS),
  localparam int unsigned CRA   = (HQ > 1) ? $clog2(HQ) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // load path
  input  logic                           ld_en,
  input  mem_id_e                        ld_mem,
  input  logic [31:0]                    ld_row,
  input  logic [7:0]                     ld_lane,
  input  logic [N-1:0]                   ld_data,
  // sparse weight rows and biases
  input  logic [Q-1:0][WRA-1:0]          w_raddr,
  output logic [Q-1:0][RX-1:0][N-1:0]    wx_row,
  output logic [Q-1:0][RX-1:0][N-1:0]    adx_row,
  output logic [Q-1:0][RH-1:0][N-1:0]    wh_row,
  output logic [Q-1:0][RH-1:0][N-1:0]    adh_row,
  input  logic [Q-1:0][BRA-1:0]          b_raddr,
  output logic [Q-1:0][N-1:0]            b_rdata,
  // operand gathers
  input  logic [Q-1:0][RX-1:0][CW-1:0]   x_raddr,
  output logic [Q-1:0][RX-1:0][N-1:0]    x_rdata,
  input  logic [Q-1:0][RH-1:0][CW-1:0]   h_raddr,
  output logic [Q-1:0][RH-1:0][N-1:0]    h_rdata,
  input  logic                           h_rbank,
  // cell state
  input  logic [Q-1:0][CRA-1:0]          c_raddr,
  output logic [Q-1:0][N-1:0]            c_rdata,
  input  logic [Q-1:0]                   c_we,
  input  logic [Q-1:0][CRA-1:0]          c_waddr,
  input  logic [Q-1:0][N-1:0]            c_wdata,
  // h_t from the Function units
  input  logic [Q-1:0]                   hw_en,
  input  logic [Q-1:0][CW-1:0]           hw_idx,
  input  logic [Q-1:0][N-1:0]            hw_data,
  output logic                           hc_valid,
  output logic [CW-1:0]                  hc_idx,
  output logic [N-1:0]                   hc_data,
  // STORE read
  input  logic                           st_rd_en,
  input  logic [CW-1:0]                  st_rd_addr,
  output logic [N-1:0]                   st_rd_data
);
  localparam int unsigned CXC = (RX + 1) / 2;
  localparam int unsigned CHC = (RH + 1) / 2;

  // ---- load decode ----
  logic [31:0] ld_bank, ld_local;
  assign ld_bank  = ld_row % Q;
  assign ld_local = ld_row / Q;

  // ---- h_t write collector ----
  logic [Q-1:0]          pend_v;
  logic [Q-1:0][CW-1:0]  pend_idx;
  logic [Q-1:0][N-1:0]   pend_data;
  logic                  drain;
  logic [$clog2(Q+1)-1:0] drain_sel;

  always_comb begin
    drain     = 1'b0;
    drain_sel = '0;
    for (int q = Q - 1; q >= 0; q--)
      if (pend_v[q]) begin
        drain     = 1'b1;
        drain_sel = ($clog2(Q+1))'(q);
      end
    if (ld_en && ld_mem == MEM_H) drain = 1'b0;  // a load owns the write port
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_v    <= '0;
      pend_idx  <= '0;
      pend_data <= '0;
    end else begin
      for (int q = 0; q < Q; q++) begin
        if (hw_en[q]) begin
          pend_v[q]    <= 1'b1;
          pend_idx[q]  <= hw_idx[q];
          pend_data[q] <= hw_data[q];
        end else if (drain && 32'(drain_sel) == q) begin
          pend_v[q] <= 1'b0;
        end
      end
    end
  end

  assign hc_valid = drain;
  assign hc_idx   = pend_idx[drain_sel];
  assign hc_data  = pend_data[drain_sel];

  // One slot per lane: a lane may not deliver a new element before its last one left.
  for (genvar q = 0; q < Q; q++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     hw_en[q] |-> (!pend_v[q] || (drain && 32'(drain_sel) == q)));
  end

  // ---- M_H write port, shared by the load path and the collector ----
  logic            mh_we;
  logic [CW:0]     mh_waddr;
  logic [N-1:0]    mh_wdata;
  always_comb begin
    if (ld_en && ld_mem == MEM_H) begin
      mh_we    = 1'b1;
      mh_waddr = (CW+1)'(h_rbank ? H : 0) + (CW+1)'(ld_row);
      mh_wdata = ld_data;
    end else begin
      mh_we    = drain;
      mh_waddr = (CW+1)'(h_rbank ? 0 : H) + (CW+1)'(pend_idx[drain_sel]);
      mh_wdata = pend_data[drain_sel];
    end
  end

  // ---- per-lane banks ----
  for (genvar q = 0; q < Q; q++) begin : g_lane
    logic ld_here;
    assign ld_here = ld_en && (ld_bank == q);

    lane_ram #(.LANES(RX), .W(N), .DEPTH(WROWS)) u_mwx (
      .clk, .we(ld_here && ld_mem == MEM_WX), .waddr(WRA'(ld_local)),
      .wlane(($clog2(RX+1))'(ld_lane)), .wdata(ld_data), .raddr(w_raddr[q]), .rdata(wx_row[q]));
    lane_ram #(.LANES(RX), .W(N), .DEPTH(WROWS)) u_madx (
      .clk, .we(ld_here && ld_mem == MEM_ADX), .waddr(WRA'(ld_local)),
      .wlane(($clog2(RX+1))'(ld_lane)), .wdata(ld_data), .raddr(w_raddr[q]), .rdata(adx_row[q]));
    lane_ram #(.LANES(RH), .W(N), .DEPTH(WROWS)) u_mwh (
      .clk, .we(ld_here && ld_mem == MEM_WH), .waddr(WRA'(ld_local)),
      .wlane(($clog2(RH+1))'(ld_lane)), .wdata(ld_data), .raddr(w_raddr[q]), .rdata(wh_row[q]));
    lane_ram #(.LANES(RH), .W(N), .DEPTH(WROWS)) u_madh (
      .clk, .we(ld_here && ld_mem == MEM_ADH), .waddr(WRA'(ld_local)),
      .wlane(($clog2(RH+1))'(ld_lane)), .wdata(ld_data), .raddr(w_raddr[q]), .rdata(adh_row[q]));

    word_ram #(.W(N), .DEPTH(BROWS)) u_mb (
      .clk, .we(ld_here && ld_mem == MEM_B), .waddr(BRA'(ld_local)), .wdata(ld_data),
      .raddr(b_raddr[q]), .rdata(b_rdata[q]));

    // M_C: the Function unit writes, the load path may initialise c_{t-1}.
    logic            mc_we;
    logic [CRA-1:0]  mc_waddr;
    logic [N-1:0]    mc_wdata;
    always_comb begin
      if (ld_here && ld_mem == MEM_C) begin
        mc_we = 1'b1;  mc_waddr = CRA'(ld_local);  mc_wdata = ld_data;
      end else begin
        mc_we = c_we[q];  mc_waddr = c_waddr[q];  mc_wdata = c_wdata[q];
      end
    end
    word_ram #(.W(N), .DEPTH(HQ)) u_mc (
      .clk, .we(mc_we), .waddr(mc_waddr), .wdata(mc_wdata), .raddr(c_raddr[q]), .rdata(c_rdata[q]));

    // M_X copies
    logic [2*CXC-1:0][CW-1:0] xa;
    logic [2*CXC-1:0][N-1:0]  xd;
    always_comb begin
      xa = '0;
      for (int j = 0; j < RX; j++) xa[j] = x_raddr[q][j];
    end
    replicated_ram #(.COPIES(CXC), .DEPTH(X), .W(N), .AW(CW)) u_mx (
      .clk, .we(ld_en && ld_mem == MEM_X), .waddr(CW'(ld_row)), .wdata(ld_data),
      .raddr(xa), .rdata(xd));
    always_comb for (int j = 0; j < RX; j++) x_rdata[q][j] = xd[j];

    // M_H copies, two banks of H words
    logic [2*CHC-1:0][CW:0]   ha;
    logic [2*CHC-1:0][N-1:0]  hd;
    always_comb begin
      ha = '0;
      for (int j = 0; j < RH; j++) ha[j] = (CW+1)'(h_rbank ? H : 0) + (CW+1)'(h_raddr[q][j]);
      if (q == 0 && st_rd_en) ha[0] = (CW+1)'(h_rbank ? H : 0) + (CW+1)'(st_rd_addr);
    end
    replicated_ram #(.COPIES(CHC), .DEPTH(2 * H), .W(N), .AW(CW + 1)) u_mh (
      .clk, .we(mh_we), .waddr(mh_waddr), .wdata(mh_wdata), .raddr(ha), .rdata(hd));
    always_comb for (int j = 0; j < RH; j++) h_rdata[q][j] = hd[j];
  end

  assign st_rd_data = h_rdata[0][0];
endmodule
