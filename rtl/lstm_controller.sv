// lstm_controller: sequences one LSTM time step over the Q lanes.
//
// After `start` it issues one command per cycle, walking the row groups rg = 0 ..
// H/Q-1 (lane q works on matrix row rg*Q+q), within a group the gates f, i, g, o, and
// within a gate the NCH chunks of the sparse row. A command carries the local weight
// row ((rg*4+gate)*NCH + chunk), the bias row (rg*4+gate), first/last-chunk flags, the
// gate and rg. All lanes take the same command in lockstep. The controller then waits
// until all H elements of h_t have been committed to the output memory (hc_valid
// pulses), raises `done` for one cycle and flips h_rbank, so the h_t just written
// becomes h_{t-1} of the next step. Issue takes H/Q*4*NCH cycles; busy is high from
// start to done.
module lstm_controller
  import brds_pkg::*;
#(
  parameter int unsigned H   = 1024,
  parameter int unsigned Q   = 4,
  parameter int unsigned NCH = 1,
  localparam int unsigned HQ  = H / Q,
  localparam int unsigned WRA = $clog2(HQ * 4 * NCH),
  localparam int unsigned BRA = $clog2(HQ * 4),
  localparam int unsigned RW  = (HQ > 1) ? $clog2(HQ) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            h_rbank,
  input  logic            hc_valid,
  output logic            issue_valid,
  output logic [WRA-1:0]  issue_wrow,
  output logic [BRA-1:0]  issue_brow,
  output logic            issue_first,
  output logic            issue_last,
  output gate_e           issue_gate,
  output logic [RW-1:0]   issue_rg
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;
  state_e       st;
  logic [31:0]  rg, kk, commits;
  logic [1:0]   g;

  assign busy        = (st != S_IDLE);
  assign issue_valid = (st == S_ISSUE);
  assign issue_gate  = gate_e'(g);
  assign issue_rg    = RW'(rg);
  assign issue_brow  = BRA'(rg * 4 + 32'(g));
  assign issue_wrow  = WRA'((rg * 4 + 32'(g)) * NCH + kk);
  assign issue_first = (kk == 0);
  assign issue_last  = (kk == NCH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;  rg <= '0;  kk <= '0;  g <= '0;  commits <= '0;
      done <= 1'b0;  h_rbank <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st != S_IDLE && hc_valid) commits <= commits + 1;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_ISSUE;  rg <= '0;  kk <= '0;  g <= '0;  commits <= '0;
        end
        S_ISSUE: begin
          if (kk != NCH - 1) kk <= kk + 1;
          else begin
            kk <= '0;
            g  <= g + 2'd1;
            if (g == 2'd3) begin
              if (rg == HQ - 1) st <= S_DRAIN;
              else rg <= rg + 1;
            end
          end
        end
        S_DRAIN: if (commits + 32'(hc_valid) == H) begin
          st      <= S_IDLE;
          done    <= 1'b1;
          h_rbank <= ~h_rbank;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
