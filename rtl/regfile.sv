// regfile: register file of one core (NREGS x XLEN, from empa_pkg).
//
// Two write paths. The processing element writes one register per cycle (we/waddr/wdata).
// The inter-core block writes any subset of registers at once (bulk_mask/bulk_values): it
// loads the operands a parent passed at hiring and clones latched child results on request.
// When both hit the same register in one cycle the bulk write wins. All registers are read
// combinationally (regs). Reset clears every register. Size and write priority are this
// design's choices.
module regfile
  import empa_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  word_t   wdata,
  input  rmask_t  bulk_mask,
  input  regvec_t bulk_values,
  output regvec_t regs
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= '0;
    end else begin
      for (int r = 0; r < int'(NREGS); r++) begin
        if (bulk_mask[r])                                  regs[r] <= bulk_values[r];
        else if (we && (waddr == ($clog2(NREGS))'(r)))     regs[r] <= wdata;
      end
    end
  end

endmodule
