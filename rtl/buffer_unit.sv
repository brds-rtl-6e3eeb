// buffer_unit: the Buffer between the Gate and Function modules of one lane.
//
// Forward path: a shift register of DELAY stages carries each gate pre-activation and
// its tag from the Gate to the Function module, decoupling the two pipelines so that
// the Function work of one row overlaps the Gate work of the next rows. DELAY = 0
// passes them straight through. Feedback path: one register returns the new cell state
// c_t produced by the Function module to the Function module's own tanh unit, one
// cycle later.
module buffer_unit
  import brds_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned TW    = 16,
  parameter int unsigned DELAY = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [TW-1:0]       in_tag,
  input  logic [N-1:0]        in_data,
  output logic                out_valid,
  output logic [TW-1:0]       out_tag,
  output logic [N-1:0]        out_data,
  input  logic                fb_in_valid,
  input  logic [N-1:0]        fb_in_data,
  output logic                fb_out_valid,
  output logic [N-1:0]        fb_out_data
);
  if (DELAY == 0) begin : g_pass
    assign out_valid = in_valid;
    assign out_tag   = in_tag;
    assign out_data  = in_data;
  end else begin : g_delay
    logic [DELAY-1:0]         v;
    logic [TW-1:0]            t [DELAY];
    logic [N-1:0]             d [DELAY];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v <= '0;
        for (int s = 0; s < DELAY; s++) begin t[s] <= '0; d[s] <= '0; end
      end else begin
        v[0] <= in_valid;  t[0] <= in_tag;  d[0] <= in_data;
        for (int s = 1; s < DELAY; s++) begin
          v[s] <= v[s-1];  t[s] <= t[s-1];  d[s] <= d[s-1];
        end
      end
    end
    assign out_valid = v[DELAY-1];
    assign out_tag   = t[DELAY-1];
    assign out_data  = d[DELAY-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_out_valid <= 1'b0;
      fb_out_data  <= '0;
    end else begin
      fb_out_valid <= fb_in_valid;
      fb_out_data  <= fb_in_data;
    end
  end
endmodule
