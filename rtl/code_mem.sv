// code_mem: multi-port instruction memory shared by all cores of the processor.
//
// Every core has its own asynchronous read port, so any number of hired cores fetch in the
// same cycle without arbitration (the architecture relies on multi-port memories to serve
// many processors). One synchronous write port loads the program. DEPTH words of 32 bits.
// The memory is not reset: whatever is fetched must have been loaded first.
// Port count per core, asynchronous reads and the load port are choices of this design.
module code_mem
  import empa_pkg::*;
#(
  parameter int unsigned NPORTS = 60,
  parameter int unsigned DEPTH  = 256
) (
  input  logic                 clk,
  input  logic                 we,
  input  pc_t                  waddr,
  input  word_t                wdata,
  input  pc_t   [NPORTS-1:0]   raddr,
  output word_t [NPORTS-1:0]   rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < int'(NPORTS); p++) rdata[p] = mem[raddr[p]];
  end

endmodule
