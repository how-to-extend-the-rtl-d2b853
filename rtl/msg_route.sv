// msg_route: routing decision of a core's communicating element for one message.
//
// Given the core's own address and a destination address, it decides how the message
// leaves the core, following the locality rules of the clustered hexagonal grid:
//   RT_SELF     destination is this core
//   RT_NEIGHBOR destination shares a boundary (r = 1): sent directly, next_dir = its direction
//   RT_PROXY    destination at r = 2: relayed by a common neighbour, next_dir = the proxy
//   RT_CLUSTER  further away in the same processor: up to this core's cluster head, which
//               alone has the inter-cluster bus (next_dir = direction of the head, 0 if the
//               core is the head itself)
//   RT_PROC     other processor: through the cluster head to the inter-processor bus
//   RT_INVALID  destination is not a physical core (phantom or outside the grid)
// hops estimates the number of transfers: 1 per core-to-core step, 1 per bus crossing.
// Purely combinational. The classes follow the architecture's "direct communication for
// r <= 2, through the cluster head otherwise" rule; the hop costs, the choice of the
// lowest-numbered usable proxy and the bus hop counts are this design's assumptions.
module msg_route
  import empa_pkg::*;
#(
  parameter int unsigned NCOLS = 10,
  parameter int unsigned NROWS = 6
) (
  input  core_addr_t  src_addr,
  input  core_addr_t  dst_addr,
  output logic [2:0]  route,      // route_e value
  output logic [2:0]  next_dir,
  output logic [3:0]  hops
);

  localparam logic [2:0] RT_SELF = 3'd0, RT_NEIGHBOR = 3'd1, RT_PROXY = 3'd2,
                         RT_CLUSTER = 3'd3, RT_PROC = 3'd4, RT_INVALID = 3'd5;

  coord_t sx, sy, dx, dy;
  logic   s_exists, d_exists;
  core_addr_t unused_enc;
  logic       unused_head;

  hex_addr #(.NCOLS(NCOLS), .NROWS(NROWS)) u_src (
    .enc_proc('0), .enc_x('0), .enc_y('0), .enc_addr(unused_enc), .enc_is_head(unused_head),
    .dec_addr(src_addr), .dec_x(sx), .dec_y(sy), .dec_exists(s_exists));

  core_addr_t unused_enc2;
  logic       unused_head2;
  hex_addr #(.NCOLS(NCOLS), .NROWS(NROWS)) u_dst (
    .enc_proc('0), .enc_x('0), .enc_y('0), .enc_addr(unused_enc2), .enc_is_head(unused_head2),
    .dec_addr(dst_addr), .dec_x(dx), .dec_y(dy), .dec_exists(d_exists));

  function automatic logic in_grid(input int x, input int y);
    return (x >= 0) && (x < int'(NCOLS)) && (y >= 0) && (((y - (x & 1)) / 2) < int'(NROWS));
  endfunction

  always_comb begin
    int ddx, ddy, hd, own_up;
    logic found;
    ddx  = int'(dx) - int'(sx);
    ddy  = int'(dy) - int'(sy);
    hd = hex_dist(coord_t'(ddx), coord_t'(ddy));
    // direction from this core to its own cluster head (opposite of its neighbor code)
    own_up = (src_addr.proxy == 3'd0 && src_addr.neigh != 3'd0) ? (7 - int'(src_addr.neigh)) : 0;
    route    = RT_INVALID;
    next_dir = 3'd0;
    hops     = 4'd0;
    found    = 1'b0;
    if (!d_exists || !s_exists) begin
      route = RT_INVALID;
    end else if (dst_addr.proc != src_addr.proc) begin
      route    = RT_PROC;
      next_dir = 3'(own_up);
      hops     = 4'((own_up != 0) ? 2 : 1);
    end else if (hd == 0) begin
      route = RT_SELF;
    end else if (hd == 1) begin
      route    = RT_NEIGHBOR;
      next_dir = 3'(((2 * ddx - ddy) % 7 + 7) % 7);
      hops     = 4'd1;
    end else begin
      if (hd == 2) begin
        for (int d = 6; d >= 1; d--) begin
          if (hex_dist(coord_t'(ddx - int'(dir_dx(3'(d)))), coord_t'(ddy - int'(dir_dy(3'(d))))) == 1 &&
              in_grid(int'(sx) + int'(dir_dx(3'(d))), int'(sy) + int'(dir_dy(3'(d))))) begin
            next_dir = 3'(d);
            found    = 1'b1;
          end
        end
      end
      if (found) begin
        route = RT_PROXY;
        hops  = 4'd2;
      end else begin
        // up to own head, inter-cluster bus, down to the destination unless it is a head
        route    = RT_CLUSTER;
        next_dir = 3'(own_up);
        hops     = 4'(((own_up != 0) ? 1 : 0) + 1 +
                      ((dst_addr.proxy != 3'd0) ? 2 : (dst_addr.neigh != 3'd0) ? 1 : 0));
      end
    end
  end

endmodule
