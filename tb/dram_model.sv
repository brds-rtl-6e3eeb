// dram_model: behavioural model of the off-chip DRAM for the testbenches.
//
// A word array of DEPTH words. A request is granted in the cycle it is made unless the
// model stalls (randomly, when STALL is set); a granted read returns its word LAT
// cycles later on rvalid/rdata, in order; a granted write updates the array.
// Testbenches fill and inspect `mem` directly.
module dram_model #(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LAT   = 3,
  parameter bit          STALL = 1'b1
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [31:0]   addr,
  input  logic [N-1:0]  wdata,
  output logic          gnt,
  output logic          rvalid,
  output logic [N-1:0]  rdata
);
  logic [N-1:0] mem [DEPTH];
  logic [LAT-1:0]         pv = '0;
  logic [N-1:0]           pd [LAT];
  int stalls = 0;
  bit stall_now = 0;

  assign gnt    = req && !stall_now;
  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];

  always @(posedge clk) begin
    if (req && !stall_now && we && addr < DEPTH) mem[addr] <= wdata;
    pv[0] <= req && !stall_now && !we;
    pd[0] <= (addr < DEPTH) ? mem[addr] : '0;
    for (int k = 1; k < LAT; k++) begin
      pv[k] <= pv[k-1];
      pd[k] <= pd[k-1];
    end
    if (req && stall_now) stalls++;
    stall_now <= STALL && ($urandom_range(0, 4) == 0);
  end
endmodule
