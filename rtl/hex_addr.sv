// hex_addr: translation between a core's logical position in the hexagonal core grid and
// its hierarchical address {processor, cluster, proxy, neighbor}.
//
// Cores are laid out in columns, every other column shifted by half a cell, so that each
// core touches up to six others and the grid is logically hexagonal. A cluster ("flower") is
// a head core and its six r=1 neighbours. With positions (x, y), y of the parity of x, the
// heads are the points where (2x - y) mod 7 == 0, and that residue is, for every other core,
// the direction code (1..6) in which it lies from its head. This reproduces the head
// positions (0,0) (2,4) (5,3) (4,8) (1,9) (7,7) (8,2) (9,11) of the reference layout.
//
// Encode (combinational): (x, y) -> address with proxy = 0, neighbor = direction from head,
// cluster = lattice coordinates (i, j) of the head, head = i*(2,4) + j*(3,-1).
// Decode (combinational): address -> (x, y) = head + offset(proxy) + offset(neighbor), so a
// non-zero proxy names an r=2 "corresponding member" reached through an ordinary member.
// dec_exists tells whether the decoded position is a physical core of the NCOLS x NROWS
// grid (clusters cut by the grid edge have "phantom" members that do not exist).
// Field widths (6/6/3/3) follow the reference address layout; the split of the cluster
// field into two signed 3-bit coordinates and the direction numbering are this design's.
module hex_addr
  import empa_pkg::*;
#(
  parameter int unsigned NCOLS = 10,
  parameter int unsigned NROWS = 6
) (
  // encode
  input  logic [PROC_W-1:0] enc_proc,
  input  coord_t            enc_x,
  input  coord_t            enc_y,
  output core_addr_t        enc_addr,
  output logic              enc_is_head,
  // decode
  input  core_addr_t        dec_addr,
  output coord_t            dec_x,
  output coord_t            dec_y,
  output logic              dec_exists
);

  always_comb begin : encode
    int m, hx, hy, ci, cj;
    m = (2 * int'(enc_x) - int'(enc_y)) % 7;
    if (m < 0) m = m + 7;
    hx = int'(enc_x) - int'(dir_dx(3'(m)));
    hy = int'(enc_y) - int'(dir_dy(3'(m)));
    ci = (hx + 3 * hy) / 14;
    cj = 4 * ci - hy;
    enc_addr.proc    = enc_proc;
    enc_addr.cluster = {3'(ci), 3'(cj)};
    enc_addr.proxy   = '0;
    enc_addr.neigh   = 3'(m);
    enc_is_head      = (m == 0);
  end

  always_comb begin : decode
    int ci, cj, x, y, row;
    ci = int'($signed(dec_addr.cluster[5:3]));
    cj = int'($signed(dec_addr.cluster[2:0]));
    x  = 2 * ci + 3 * cj + int'(dir_dx(dec_addr.proxy)) + int'(dir_dx(dec_addr.neigh));
    y  = 4 * ci - cj     + int'(dir_dy(dec_addr.proxy)) + int'(dir_dy(dec_addr.neigh));
    dec_x = coord_t'(x);
    dec_y = coord_t'(y);
    row   = (y - (x & 1)) / 2;
    dec_exists = (x >= 0) && (x < int'(NCOLS)) && (y >= 0) && (row < int'(NROWS))
                 && (dec_addr.proxy != 3'd7) && (dec_addr.neigh != 3'd7);
  end

endmodule
