// replicated_ram: COPIES identical memories that together give 2*COPIES reads per cycle.
//
// The input vector (M_X) and the output vector (M_H) must supply one operand to every
// multiplier lane in every cycle, each lane at a different column. They are therefore
// duplicated: each copy is a dual-read-port memory, so R lanes need R/2 copies. All
// copies share one write port, so a write lands in every copy at once and they stay
// identical. Read port k is served by copy k/2. Reads are synchronous (one cycle);
// an address past DEPTH reads as zero.
module replicated_ram #(
  parameter int unsigned COPIES = 10,
  parameter int unsigned DEPTH  = 153,
  parameter int unsigned W      = 16,
  parameter int unsigned AW     = 16
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [AW-1:0]                 waddr,
  input  logic [W-1:0]                  wdata,
  input  logic [2*COPIES-1:0][AW-1:0]   raddr,
  output logic [2*COPIES-1:0][W-1:0]    rdata
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  for (genvar k = 0; k < COPIES; k++) begin : g_copy
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && 32'(waddr) < DEPTH) mem[IW'(waddr)] <= wdata;
      rdata[2*k]   <= (32'(raddr[2*k])   < DEPTH) ? mem[IW'(raddr[2*k])]   : '0;
      rdata[2*k+1] <= (32'(raddr[2*k+1]) < DEPTH) ? mem[IW'(raddr[2*k+1])] : '0;
    end
  end
endmodule
