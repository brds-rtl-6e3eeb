// word_ram: a W-bit memory with one synchronous read port and one write port.
//
// Holds the biases (M_B, row i*4+gate) and the cell states (M_C). rdata shows word
// raddr one cycle after it is presented. A read and a write of the same word in one
// cycle return the old word, which is what the cell memory needs: c_{t-1} is fetched
// before c_t replaces it. An address past DEPTH reads as zero.
module word_ram #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [W-1:0]              wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic [W-1:0]              rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
