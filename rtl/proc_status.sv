// proc_status: the processor's core pool ("Proc Status").
//
// Keeps for every core one of Avail (sleeping in the pool), Allocated (hired, running a
// QT) or Preallocated (reserved for a given owner core); the external 'denied' input marks
// cores that must not be hired (fabrication fault, overheating) and they report Denied
// while not in use. For a requester it proposes a core combinationally:
//   1. a core preallocated to the requester (when use_prealloc is set),
//   2. else a free, non-denied core in the requester's own cluster,
//   3. else the lowest-numbered free, non-denied core.
// take / reserve commit the proposal at the clock edge (Allocated / Preallocated to the
// requester); free returns a core to the pool together with every core preallocated to it.
// free_count counts the cores that could be hired now (for resource tests). any_free /
// owned tell the processor whether a request could be served now.
// States and the Denied rule follow the architecture; the proposal order (prefer
// topological proximity, then lowest ID) is this design's.
module proc_status
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 60,
  parameter int unsigned NROWS  = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCORES-1:0] denied,
  input  core_id_t          requester,
  input  logic              use_prealloc,
  output logic              grant_valid,
  output core_id_t          grant_id,
  output logic              grant_local,
  input  logic              take,
  input  logic              reserve,
  input  logic              free,
  input  core_id_t          free_id,
  output logic              any_free,
  output logic [CORE_ID_W:0] free_count,    // free, non-denied cores
  output logic [NCORES-1:0] owned_by_any,   // per core: some core is preallocated to it
  output logic [1:0]        state [NCORES]  // 0 Avail, 1 Allocated, 2 Preallocated, 3 Denied
);

  localparam logic [1:0] S_AVAIL = 2'd0, S_ALLOC = 2'd1, S_PREAL = 2'd2, S_DENIED = 2'd3;

  logic [1:0] st    [NCORES];
  core_id_t   owner [NCORES];
  logic [CLUSTER_W-1:0] cluster [NCORES];

  // cluster of each physical core, from its grid position
  for (genvar c = 0; c < int'(NCORES); c++) begin : g_cl
    localparam int X = c / int'(NROWS);
    localparam int Y = 2 * (c % int'(NROWS)) + (X % 2);
    core_addr_t a, unused_d;
    coord_t     ux, uy;
    logic       uh, ue;
    assign unused_d = '0;
    hex_addr #(.NCOLS((NCORES + NROWS - 1) / NROWS), .NROWS(NROWS)) u_a (
      .enc_proc('0), .enc_x(coord_t'(X)), .enc_y(coord_t'(Y)), .enc_addr(a), .enc_is_head(uh),
      .dec_addr(unused_d), .dec_x(ux), .dec_y(uy), .dec_exists(ue));
    assign cluster[c] = a.cluster;
  end

  always_comb begin
    logic found_p, found_l, found_a;
    core_id_t id_p, id_l, id_a;
    found_p = 1'b0; found_l = 1'b0; found_a = 1'b0;
    id_p = '0; id_l = '0; id_a = '0;
    any_free     = 1'b0;
    free_count   = '0;
    owned_by_any = '0;
    for (int c = int'(NCORES) - 1; c >= 0; c--) begin
      state[c] = (st[c] == S_AVAIL && denied[c]) ? S_DENIED : st[c];
      if (st[c] == S_PREAL) owned_by_any[owner[c]] = 1'b1;
      if (st[c] == S_PREAL && owner[c] == requester) begin
        found_p = 1'b1; id_p = core_id_t'(c);
      end
      if (st[c] == S_AVAIL && !denied[c]) begin
        any_free = 1'b1;
        free_count = free_count + 1'b1;
        found_a = 1'b1; id_a = core_id_t'(c);
        if (cluster[c] == cluster[requester]) begin
          found_l = 1'b1; id_l = core_id_t'(c);
        end
      end
    end
    grant_local = 1'b0;
    if (use_prealloc && found_p) begin
      grant_valid = 1'b1; grant_id = id_p;
    end else if (found_l) begin
      grant_valid = 1'b1; grant_id = id_l; grant_local = 1'b1;
    end else begin
      grant_valid = found_a; grant_id = id_a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(NCORES); c++) begin
        st[c]    <= S_AVAIL;
        owner[c] <= '0;
      end
    end else begin
      if (free) begin
        st[free_id] <= S_AVAIL;
        for (int c = 0; c < int'(NCORES); c++)
          if (st[c] == S_PREAL && owner[c] == free_id) st[c] <= S_AVAIL;
      end
      if (take && grant_valid) st[grant_id] <= S_ALLOC;
      if (reserve && grant_valid) begin
        st[grant_id]    <= S_PREAL;
        owner[grant_id] <= requester;
      end
    end
  end

  a_take_xor_reserve: assert property (@(posedge clk) disable iff (!rst_n) !(take && reserve));

endmodule
