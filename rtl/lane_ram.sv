// lane_ram: a wide on-chip memory whose rows hold LANES words of W bits.
//
// Used for the sparse weight memories (M_WX, M_WH: the nonzero weights of one chunk of
// a matrix row) and for their relative-index memories (M_AdX, M_AdH). The load path
// writes one lane of one row per cycle (we, waddr, wlane); the datapath reads a whole
// row per cycle. Reads are synchronous: rdata shows row raddr one cycle after it is
// presented, as a block RAM does. An address past DEPTH reads as zero.
module lane_ram #(
  parameter int unsigned LANES = 20,
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(DEPTH)-1:0]      waddr,
  input  logic [$clog2(LANES+1)-1:0]    wlane,
  input  logic [W-1:0]                  wdata,
  input  logic [$clog2(DEPTH)-1:0]      raddr,
  output logic [LANES-1:0][W-1:0]       rdata
);
  logic [LANES-1:0][W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH && 32'(wlane) < LANES) mem[waddr][wlane] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
