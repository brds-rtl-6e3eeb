// function_unit: the Function module of one lane, the pointwise part of an LSTM step.
//
// It receives the four gate pre-activations of a matrix row i in the order f, i, g, o
// (at most one per cycle, gaps allowed) and produces
//     c_t = sig(f) * c_{t-1} + sig(i) * tanh(g)      h_t = sig(o) * tanh(c_t)
// It has a sigmoid and a tanh activation unit (piecewise linear, one cycle each), one
// multiplier and one accumulator. The multiplier is shared by three products, issued
// when their operands arrive: f*c_{t-1} when i is activated, i*g when g is activated
// (added to the accumulator, giving c_t), and o*tanh(c_t) once both factors exist.
// c_t is written back to the cell memory at once and leaves through fb_out_* for the
// Buffer, which returns it one cycle later on fb_in_* to the tanh unit. c_{t-1} is
// fetched from the cell memory (c_raddr, one cycle) when f arrives. h_t leaves on
// h_* together with the row's global index, registered. With gates arriving
// back-to-back the multiplier is never asked for two products in one cycle, and the
// fed-back c_t never meets a g at the tanh unit; assertions guard both.
// rst_n is the asynchronous reset of the registers and also disables the assertions;
// a linter may count that second use as a synchronous one, which it is not in the circuit.
// The sigmoid unit's out_valid is not read: the schedule keeps its own registered copy
// of the gate valid, which has the same one-cycle timing.
module function_unit
  import brds_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned FRAC = FRAC_DEF,
  parameter int unsigned SEG  = 16,
  parameter int unsigned RW   = 8,    // local row (cell memory address) width
  parameter int unsigned CW   = 16    // global row index width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // activation LUT load: lut_func 0 = sigmoid, 1 = tanh
  input  logic                    lut_we,
  input  logic                    lut_func,
  input  logic [$clog2(SEG)-1:0]  lut_seg,
  input  logic                    lut_ab,
  input  logic [N-1:0]            lut_data,
  // gate stream from the Buffer
  input  logic                    in_valid,
  input  gate_e                   in_gate,
  input  logic [RW-1:0]           in_row,
  input  logic [CW-1:0]           in_idx,
  input  logic signed [N-1:0]     in_pre,
  // cell memory
  output logic [RW-1:0]           c_raddr,
  input  logic [N-1:0]            c_rdata,
  output logic                    c_we,
  output logic [RW-1:0]           c_waddr,
  output logic [N-1:0]            c_wdata,
  // c_t feedback through the Buffer
  output logic                    fb_out_valid,
  output logic [N-1:0]            fb_out_data,
  input  logic                    fb_in_valid,
  input  logic [N-1:0]            fb_in_data,
  // result
  output logic                    h_valid,
  output logic [CW-1:0]           h_idx,
  output logic [N-1:0]            h_data
);
  // ---- activation units ----
  logic                sig_v, tanh_v;
  logic signed [N-1:0] sig_y, tanh_y;

  activation_pwl #(.N(N), .FRAC(FRAC), .SEG(SEG)) u_sig (
    .clk, .rst_n, .lut_we(lut_we && !lut_func), .lut_seg, .lut_ab, .lut_data,
    .in_valid(in_valid && in_gate != G_G), .x(in_pre), .out_valid(sig_v), .y(sig_y));

  activation_pwl #(.N(N), .FRAC(FRAC), .SEG(SEG)) u_tanh (
    .clk, .rst_n, .lut_we(lut_we && lut_func), .lut_seg, .lut_ab, .lut_data,
    .in_valid(fb_in_valid || (in_valid && in_gate == G_G)),
    .x(fb_in_valid ? signed'(fb_in_data) : in_pre), .out_valid(tanh_v), .y(tanh_y));

  assign c_raddr = in_row;

  // ---- tags aligned with the activation outputs ----
  logic          a_valid, a_fb;
  gate_e         a_gate;
  logic [RW-1:0] a_row;
  logic [CW-1:0] a_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;  a_fb <= 1'b0;  a_gate <= G_F;  a_row <= '0;  a_idx <= '0;
    end else begin
      a_valid <= in_valid;
      a_fb    <= fb_in_valid;
      a_gate  <= in_gate;
      a_row   <= in_row;
      a_idx   <= in_idx;
    end
  end

  logic signed [N-1:0] act;
  assign act = (a_gate == G_G) ? tanh_y : sig_y;

  // ---- state of the row in flight ----
  logic signed [N-1:0] f_reg, i_reg, o_reg, tc_reg, cprev, acc;
  logic [RW-1:0]       crow;
  logic [CW-1:0]       oidx;
  logic                o_have, tc_have;

  logic ev_f, ev_i, ev_g, ev_o, ev_tc, fire;
  logic signed [N-1:0] c_next, o_val, tc_val;

  always_comb begin
    ev_f   = a_valid && a_gate == G_F;
    ev_i   = a_valid && a_gate == G_I;
    ev_g   = a_valid && a_gate == G_G;
    ev_o   = a_valid && a_gate == G_O;
    ev_tc  = a_fb && tanh_v;
    o_val  = o_have  ? o_reg  : act;
    tc_val = tc_have ? tc_reg : tanh_y;
    fire   = (o_have || ev_o) && (tc_have || ev_tc);
    c_next = N'(fx_add(32'(acc), fx_mul(32'(i_reg), 32'(act), N, FRAC), N));
  end

  assign c_we         = ev_g;
  assign c_waddr      = crow;
  assign c_wdata      = c_next;
  assign fb_out_valid = ev_g;
  assign fb_out_data  = c_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {f_reg, i_reg, o_reg, tc_reg, cprev, acc} <= '0;
      crow <= '0;  oidx <= '0;  o_have <= 1'b0;  tc_have <= 1'b0;
      h_valid <= 1'b0;  h_idx <= '0;  h_data <= '0;
    end else begin
      if (ev_f) begin
        f_reg <= act;
        cprev <= signed'(c_rdata);
        crow  <= a_row;
      end
      if (ev_i) begin
        acc   <= N'(fx_mul(32'(f_reg), 32'(cprev), N, FRAC));   // f * c_{t-1}
        i_reg <= act;
      end
      if (ev_g) acc <= c_next;                                   // + i * g
      if (ev_o) begin
        o_reg <= act;
        oidx  <= a_idx;
      end
      if (ev_tc) tc_reg <= tanh_y;
      o_have  <= fire ? 1'b0 : (o_have  || ev_o);
      tc_have <= fire ? 1'b0 : (tc_have || ev_tc);
      h_valid <= fire;
      if (fire) begin
        h_data <= N'(fx_mul(32'(o_val), 32'(tc_val), N, FRAC));  // o * tanh(c_t)
        h_idx  <= o_have ? oidx : a_idx;
      end
    end
  end

  // The single multiplier serves one product per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({ev_i, ev_g, fire}));
  // The fed-back cell state never collides with a g gate at the tanh unit.
  assert property (@(posedge clk) disable iff (!rst_n) !(fb_in_valid && in_valid && in_gate == G_G));
endmodule
