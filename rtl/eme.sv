// eme: EMPA morphing element of one core.
//
// When the processing element raises 'meta', the morphing element copies the
// meta-instruction into its morphing register (req), writes it into the processor's Meta
// FIFO with a one-cycle 'push' (no handshake: the FIFO has a slot reserved per core) and
// waits. While waiting it mirrors the processor's 'Wait' signal on 'waiting' (the request
// cannot be served yet: no free core, children still running, critical section busy). When
// the processor acknowledges completion ('ack') it pulses meta_done, which clears 'meta' in
// the processing element. 'stop' (core returned to the pool) abandons any request.
// Timing: push one cycle after meta rises; meta_done in the cycle ack arrives.
// The Meta / Wait protocol follows the architecture; the single-pulse push is this design's.
module eme
  import empa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  meta,
  input  word_t meta_instr,
  input  logic  wait_i,
  input  logic  ack,
  input  logic  stop,
  output logic  push,
  output meta_t req,
  output logic  waiting,
  output logic  meta_done
);

  logic issued;

  assign meta_done = issued && ack;
  assign waiting   = issued && wait_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued <= 1'b0;
      push   <= 1'b0;
      req    <= '0;
    end else begin
      push <= 1'b0;
      if (stop) begin
        issued <= 1'b0;
      end else if (!issued && meta) begin
        issued <= 1'b1;
        push   <= 1'b1;
        req    <= decode_meta(meta_instr);
      end else if (issued && ack) begin
        issued <= 1'b0;
      end
    end
  end

  // the processor acknowledges only a request this core has issued
  a_ack_only_when_issued: assert property (@(posedge clk) disable iff (!rst_n) ack |-> issued || stop);

endmodule
