// brds_top: the BRDS sparse LSTM accelerator.
//
// One LSTM layer step h_t, c_t = LSTM(x_t, h_{t-1}, c_{t-1}) with row-balanced sparse
// weights: every row of the four input matrices W_*x keeps the same number of nonzeros
// X_SP, every row of the recurrent matrices W_*h keeps H_SP. Q lanes run in lockstep;
// lane q computes rows i = rg*Q + q. In each lane, per cycle, one chunk of one gate row
// goes through this pipeline:
//   c0  controller issues the local weight row and bias row
//   c1  M_WX/M_AdX/M_WH/M_AdH rows and the bias arrive; the address decoders turn the
//       relative indices into column numbers, which address the replicated M_X and M_H
//   c2  the gathered x and h operands, the weights and the bias enter the Gate module
//   c6  the gate pre-activation leaves the Gate, passes the Buffer (BUF_DELAY cycles)
//       and enters the Function module, which builds c_t and h_t from the four gates
// h_t elements are written into every copy of M_H (other bank than h_{t-1}).
// The host drives a valid/ready command port: LOAD and STORE go to the DRAM controller
// (the DRAM itself is outside, on the dram_* bus), RUN starts one time step and `done`
// pulses when all of h_t is in M_H. h_wr_* shows each h_t element as it is committed.
// sel_x_large chooses which weight set uses the Large Mult Array (must be static while
// running). Defaults are the TIMIT configuration: n = 16, X = 153, H = 1024, Q = 4,
// 20 input-weight and 64 recurrent-weight lanes per Gate (X_SP = 20, H_SP = 64).
// rst_n is the asynchronous reset of the registers and also disables the assertions;
// a linter may count that second use as a synchronous one, which it is not in the circuit.
module brds_top
  import brds_pkg::*;
#(
  parameter int unsigned N         = N_DEF,
  parameter int unsigned FRAC      = FRAC_DEF,
  parameter int unsigned X         = 153,
  parameter int unsigned H         = 1024,
  parameter int unsigned Q         = 4,
  parameter int unsigned RX        = 20,
  parameter int unsigned RH        = 64,
  parameter int unsigned RL        = 64,
  parameter int unsigned RS        = 20,
  parameter int unsigned NCH       = 1,
  parameter int unsigned SEG       = 16,
  parameter int unsigned BUF_DELAY = 2,
  parameter int unsigned CW        = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  input  logic          sel_x_large,
  output logic          busy,
  output logic          done,
  // off-chip DRAM
  output logic          dram_req,
  output logic          dram_we,
  output logic [31:0]   dram_addr,
  output logic [N-1:0]  dram_wdata,
  input  logic          dram_gnt,
  input  logic          dram_rvalid,
  input  logic [N-1:0]  dram_rdata,
  // committed h_t elements
  output logic          h_wr_valid,
  output logic [CW-1:0] h_wr_idx,
  output logic [N-1:0]  h_wr_data
);
  localparam int unsigned HQ  = H / Q;
  localparam int unsigned WRA = $clog2(HQ * 4 * NCH);
  localparam int unsigned BRA = $clog2(HQ * 4);
  localparam int unsigned RW  = (HQ > 1) ? $clog2(HQ) : 1;
  localparam int unsigned TW  = RW + 2;

  // ---- command routing ----
  logic ctrl_busy, dc_busy, dc_ready, run_start;
  assign run_start = cmd_valid && cmd.op == OP_RUN && !ctrl_busy && !dc_busy;
  assign cmd_ready = (cmd.op == OP_RUN) ? (!ctrl_busy && !dc_busy) : (dc_ready && !ctrl_busy);
  assign busy      = ctrl_busy || dc_busy;

  // ---- DRAM controller ----
  logic          ld_en, st_rd_en;
  mem_id_e       ld_mem;
  logic [31:0]   ld_row;
  logic [7:0]    ld_lane;
  logic [N-1:0]  ld_data, st_rd_data;
  logic [CW-1:0] st_rd_addr;

  dram_controller #(.N(N), .RX(RX), .RH(RH), .CW(CW)) u_dc (
    .clk, .rst_n, .cmd_valid(cmd_valid && !ctrl_busy), .cmd_ready(dc_ready), .cmd, .busy(dc_busy),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .ld_en, .ld_mem, .ld_row, .ld_lane, .ld_data, .st_rd_en, .st_rd_addr, .st_rd_data);

  // ---- LSTM controller ----
  logic           h_rbank, hc_valid;
  logic           iv, ifirst, ilast;
  logic [WRA-1:0] iwrow;
  logic [BRA-1:0] ibrow;
  gate_e          igate;
  logic [RW-1:0]  irg;

  lstm_controller #(.H(H), .Q(Q), .NCH(NCH)) u_ctrl (
    .clk, .rst_n, .start(run_start), .busy(ctrl_busy), .done, .h_rbank, .hc_valid,
    .issue_valid(iv), .issue_wrow(iwrow), .issue_brow(ibrow), .issue_first(ifirst),
    .issue_last(ilast), .issue_gate(igate), .issue_rg(irg));

  // ---- embedded memory ----
  logic [Q-1:0][WRA-1:0]         w_raddr;
  logic [Q-1:0][RX-1:0][N-1:0]   wx_row, adx_row, x_rdata;
  logic [Q-1:0][RH-1:0][N-1:0]   wh_row, adh_row, h_rdata;
  logic [Q-1:0][BRA-1:0]         b_raddr;
  logic [Q-1:0][N-1:0]           b_rdata, c_rdata, c_wdata, hw_data;
  logic [Q-1:0][RX-1:0][CW-1:0]  x_raddr;
  logic [Q-1:0][RH-1:0][CW-1:0]  h_raddr;
  logic [Q-1:0][RW-1:0]          c_raddr, c_waddr;
  logic [Q-1:0]                  c_we, hw_en;
  logic [Q-1:0][CW-1:0]          hw_idx;

  embedded_memory #(.N(N), .Q(Q), .X(X), .H(H), .RX(RX), .RH(RH), .NCH(NCH), .CW(CW)) u_mem (
    .clk, .rst_n, .ld_en, .ld_mem, .ld_row, .ld_lane, .ld_data,
    .w_raddr, .wx_row, .adx_row, .wh_row, .adh_row, .b_raddr, .b_rdata,
    .x_raddr, .x_rdata, .h_raddr, .h_rdata, .h_rbank,
    .c_raddr, .c_rdata, .c_we, .c_waddr, .c_wdata,
    .hw_en, .hw_idx, .hw_data,
    .hc_valid, .hc_idx(h_wr_idx), .hc_data(h_wr_data),
    .st_rd_en, .st_rd_addr, .st_rd_data);
  assign h_wr_valid = hc_valid;

  // ---- stage c1 / c2 control registers (shared by all lanes) ----
  logic          v1, first1, last1, v2, first2, last2;
  gate_e         gate1, gate2;
  logic [RW-1:0] rg1, rg2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, first1, last1, v2, first2, last2} <= '0;
      gate1 <= G_F;  gate2 <= G_F;  rg1 <= '0;  rg2 <= '0;
    end else begin
      v1 <= iv;  first1 <= ifirst;  last1 <= ilast;  gate1 <= igate;  rg1 <= irg;
      v2 <= v1;  first2 <= first1;  last2 <= last1;  gate2 <= gate1;  rg2 <= rg1;
    end
  end

  // LUT writes: row = func*SEG + seg, lane 0 = a, lane 1 = b
  logic lut_we;
  assign lut_we = ld_en && ld_mem == MEM_LUT;

  // ---- lanes ----
  for (genvar q = 0; q < Q; q++) begin : g_lane
    assign w_raddr[q] = iwrow;
    assign b_raddr[q] = ibrow;

    address_decoder #(.LANES(RX), .AW(N), .CW(CW)) u_adx (
      .clk, .rst_n, .in_valid(v1), .first(first1), .rel(adx_row[q]), .col(x_raddr[q]));
    address_decoder #(.LANES(RH), .AW(N), .CW(CW)) u_adh (
      .clk, .rst_n, .in_valid(v1), .first(first1), .rel(adh_row[q]), .col(h_raddr[q]));

    logic [RX-1:0][N-1:0] wx2;
    logic [RH-1:0][N-1:0] wh2;
    logic [N-1:0]         b2;
    always_ff @(posedge clk) begin
      wx2 <= wx_row[q];
      wh2 <= wh_row[q];
      b2  <= b_rdata[q];
    end

    logic                 g_valid;
    logic [TW-1:0]        g_tag;
    logic signed [N-1:0]  g_pre;
    gate_unit #(.N(N), .FRAC(FRAC), .RX(RX), .RH(RH), .RL(RL), .RS(RS), .TW(TW)) u_gate (
      .clk, .rst_n, .sel_x_large, .in_valid(v2), .first(first2), .last(last2),
      .tag({rg2, gate2}), .wx(wx2), .xv(x_rdata[q]), .wh(wh2), .hv(h_rdata[q]), .bias(b2),
      .out_valid(g_valid), .out_tag(g_tag), .out_pre(g_pre));

    logic          b_valid, fbo_valid, fbi_valid;
    logic [TW-1:0] b_tag;
    logic [N-1:0]  b_data, fbo_data, fbi_data;
    buffer_unit #(.N(N), .TW(TW), .DELAY(BUF_DELAY)) u_buf (
      .clk, .rst_n, .in_valid(g_valid), .in_tag(g_tag), .in_data(g_pre),
      .out_valid(b_valid), .out_tag(b_tag), .out_data(b_data),
      .fb_in_valid(fbo_valid), .fb_in_data(fbo_data),
      .fb_out_valid(fbi_valid), .fb_out_data(fbi_data));

    logic [RW-1:0] b_row;
    assign b_row = b_tag[TW-1:2];

    function_unit #(.N(N), .FRAC(FRAC), .SEG(SEG), .RW(RW), .CW(CW)) u_fn (
      .clk, .rst_n,
      .lut_we, .lut_func(1'((ld_row / SEG) & 1)), .lut_seg(($clog2(SEG))'(ld_row % SEG)),
      .lut_ab(ld_lane[0]), .lut_data(ld_data),
      .in_valid(b_valid), .in_gate(gate_e'(b_tag[1:0])), .in_row(b_row),
      .in_idx(CW'(32'(b_row) * Q + q)), .in_pre(b_data),
      .c_raddr(c_raddr[q]), .c_rdata(c_rdata[q]), .c_we(c_we[q]), .c_waddr(c_waddr[q]),
      .c_wdata(c_wdata[q]),
      .fb_out_valid(fbo_valid), .fb_out_data(fbo_data),
      .fb_in_valid(fbi_valid), .fb_in_data(fbi_data),
      .h_valid(hw_en[q]), .h_idx(hw_idx[q]), .h_data(hw_data[q]));
  end
endmodule
