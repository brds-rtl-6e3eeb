// brds_pkg: types, constants and arithmetic helpers shared by the BRDS LSTM accelerator.
//
// Data are n-bit two's complement fixed-point numbers with FRAC fraction bits (the
// 16-bit width is the evaluated configuration; the 8 fraction bits are this design's
// choice). Every add and multiply result is truncated back to n bits; the "recovery"
// step that follows each of them is modelled here as saturation to the n-bit range.
// Multiplies drop FRAC low bits with an arithmetic shift (round toward minus infinity).
package brds_pkg;

  localparam int unsigned N_DEF    = 16;  // datapath width n
  localparam int unsigned FRAC_DEF = 8;   // fraction bits (own choice)

  // Gates of one LSTM row, in the order their weight rows are stored.
  typedef enum logic [1:0] {G_F = 2'd0, G_I = 2'd1, G_G = 2'd2, G_O = 2'd3} gate_e;

  // On-chip memory arrays addressed by the load path.
  typedef enum logic [3:0] {
    MEM_WX  = 4'd0,  // nonzero input weights        (R_x lanes per row)
    MEM_ADX = 4'd1,  // their relative row indices    (R_x lanes per row)
    MEM_WH  = 4'd2,  // nonzero recurrent weights     (R_h lanes per row)
    MEM_ADH = 4'd3,  // their relative row indices    (R_h lanes per row)
    MEM_B   = 4'd4,  // biases, row ((i/Q)*4+gate)*Q + i%Q
    MEM_X   = 4'd5,  // input vector x_t
    MEM_H   = 4'd6,  // output vector h_{t-1}
    MEM_C   = 4'd7,  // cell state c_{t-1}
    MEM_LUT = 4'd8   // activation coefficients: row = func*SEG+seg, lane 0 = a, lane 1 = b
  } mem_id_e;

  typedef enum logic [1:0] {OP_LOAD = 2'd0, OP_STORE = 2'd1, OP_RUN = 2'd2} op_e;

  // Host instruction. LOAD copies nrows rows (all lanes of each) of memory `mem`,
  // starting at global row row0, from consecutive DRAM words starting at dram_addr.
  // STORE copies h elements row0 .. row0+nrows-1 to DRAM. RUN computes one time step.
  typedef struct packed {
    op_e         op;
    mem_id_e     mem;
    logic [31:0] dram_addr;
    logic [31:0] row0;
    logic [31:0] nrows;
  } cmd_t;

  // Saturate a wide signed value to n bits (the recovery unit).
  function automatic logic signed [31:0] sat(input logic signed [63:0] v, input int unsigned n);
    logic signed [63:0] mx, mn;
    mx = (64'sd1 <<< (n - 1)) - 64'sd1;
    mn = -(64'sd1 <<< (n - 1));
    if (v > mx) return 32'(mx);
    if (v < mn) return 32'(mn);
    return 32'(v);
  endfunction

  // Fixed-point product truncated to n bits, with recovery.
  function automatic logic signed [31:0] fx_mul(input logic signed [31:0] a, input logic signed [31:0] b,
                                                input int unsigned n, input int unsigned frac);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat(p >>> frac, n);
  endfunction

  // n-bit add with recovery.
  function automatic logic signed [31:0] fx_add(input logic signed [31:0] a, input logic signed [31:0] b,
                                                input int unsigned n);
    return sat(64'(a) + 64'(b), n);
  endfunction

endpackage
