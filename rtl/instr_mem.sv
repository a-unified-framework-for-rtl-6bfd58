// instr_mem -- instruction memory, one bank per instruction-decode tile.
//
// The program ("parallel assembly": one instruction stream per ID tile,
// advancing in lock step) is written here by the program loader before the
// array starts.  All banks are read at the same PC each cycle, which keeps
// the streams synchronised.  The paper draws one instruction memory and
// speaks of memories coupled to each PE; both views are covered by one
// module with N_BANK banks.  Depth (default 256) and the synchronous read
// standing in for the SRAM macro are this design's choices.
//
// Timing: rdata is registered.  With en low it holds (array stalled); with
// clear high it returns all-zero words, i.e. no-operations (array idle).
module instr_mem
  import rblk_pkg::*;
#(
  parameter int unsigned N_BANK = 8,
  parameter int unsigned DEPTH  = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // write port (program loader)
  input  logic                       we,
  input  logic [$clog2(N_BANK)-1:0]  wbank,
  input  logic [$clog2(DEPTH)-1:0]   waddr,
  input  logic [INSTR_W-1:0]         wdata,
  // read port (all banks at the shared PC)
  input  logic                       en,
  input  logic                       clear,
  input  logic [$clog2(DEPTH)-1:0]   raddr,
  output logic [INSTR_W-1:0]         rdata [N_BANK]
);

  logic [INSTR_W-1:0] mem [N_BANK][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_BANK); i++) rdata[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < int'(N_BANK); i++) rdata[i] <= '0;
    end else if (en) begin
      for (int i = 0; i < int'(N_BANK); i++) rdata[i] <= mem[i][raddr];
    end
  end

endmodule
