// dram_controller: moves data between the off-chip DRAM and the on-chip memories.
//
// LOAD: reads nrows*lanes consecutive DRAM words from dram_addr (lanes = RX for M_WX
// and M_AdX, RH for M_WH and M_AdH, 2 for the activation LUT, 1 otherwise) and writes
// each into the embedded memory on the ld_* port, lane by lane and row by row from
// row0; only stored (nonzero) elements travel. Reads are issued whenever the DRAM
// grants them (dram_req/dram_gnt) and their data return in order on dram_rvalid, so a
// LOAD streams one word per cycle when the DRAM keeps up. STORE: for each h element
// row0 .. row0+nrows-1, reads it from M_H (st_rd_*, one cycle) and writes it to
// dram_addr onwards, one request held until granted. cmd_ready is high when idle.
// rst_n is the asynchronous reset of the registers and also disables the assertions;
// a linter may count that second use as a synchronous one, which it is not in the circuit.
// The registered command keeps its opcode field, which is not read after dispatch.
module dram_controller
  import brds_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned RX = 20,
  parameter int unsigned RH = 64,
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  output logic          busy,
  // DRAM bus
  output logic          dram_req,
  output logic          dram_we,
  output logic [31:0]   dram_addr,
  output logic [N-1:0]  dram_wdata,
  input  logic          dram_gnt,
  input  logic          dram_rvalid,
  input  logic [N-1:0]  dram_rdata,
  // element writes into the embedded memory
  output logic          ld_en,
  output mem_id_e       ld_mem,
  output logic [31:0]   ld_row,
  output logic [7:0]    ld_lane,
  output logic [N-1:0]  ld_data,
  // h reads for STORE
  output logic          st_rd_en,
  output logic [CW-1:0] st_rd_addr,
  input  logic [N-1:0]  st_rd_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_CAP, S_ST_WR} state_e;
  state_e       st;
  cmd_t         c;
  logic [31:0]  total, issued, got, row, lane, j;
  logic [N-1:0] wbuf;

  function automatic logic [31:0] lanes_of(input mem_id_e m);
    case (m)
      MEM_WX, MEM_ADX: return RX;
      MEM_WH, MEM_ADH: return RH;
      MEM_LUT:         return 2;
      default:         return 1;
    endcase
  endfunction

  assign cmd_ready = (st == S_IDLE);
  assign busy      = (st != S_IDLE);

  always_comb begin
    dram_req   = 1'b0;
    dram_we    = 1'b0;
    dram_addr  = '0;
    dram_wdata = wbuf;
    if (st == S_LOAD && issued < total) begin
      dram_req  = 1'b1;
      dram_addr = c.dram_addr + issued;
    end else if (st == S_ST_WR) begin
      dram_req  = 1'b1;
      dram_we   = 1'b1;
      dram_addr = c.dram_addr + j;
    end
  end

  assign ld_en      = (st == S_LOAD) && dram_rvalid;
  assign ld_mem     = c.mem;
  assign ld_row     = row;
  assign ld_lane    = 8'(lane);
  assign ld_data    = dram_rdata;
  assign st_rd_en   = (st == S_ST_RD);
  assign st_rd_addr = CW'(c.row0 + j);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;  c <= '0;  total <= '0;  issued <= '0;  got <= '0;
      row <= '0;  lane <= '0;  j <= '0;  wbuf <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid && cmd.op != OP_RUN) begin
          c      <= cmd;
          total  <= cmd.nrows * lanes_of(cmd.mem);
          issued <= '0;
          got    <= '0;
          row    <= cmd.row0;
          lane   <= '0;
          j      <= '0;
          if (cmd.nrows != 0) st <= (cmd.op == OP_LOAD) ? S_LOAD : S_ST_RD;
        end
        S_LOAD: begin
          if (dram_req && dram_gnt) issued <= issued + 1;
          if (dram_rvalid) begin
            got <= got + 1;
            if (lane == lanes_of(c.mem) - 1) begin
              lane <= '0;
              row  <= row + 1;
            end else lane <= lane + 1;
            if (got + 1 == total) st <= S_IDLE;
          end
        end
        S_ST_RD:  st <= S_ST_CAP;
        S_ST_CAP: begin
          wbuf <= st_rd_data;
          st   <= S_ST_WR;
        end
        S_ST_WR: if (dram_gnt) begin
          if (j + 1 == c.nrows) st <= S_IDLE;
          else st <= S_ST_RD;
          j <= j + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // A read response only comes for a request that was granted.
  assert property (@(posedge clk) disable iff (!rst_n) dram_rvalid |-> (st == S_LOAD && got < issued));
endmodule
