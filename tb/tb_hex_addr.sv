// tb_hex_addr: checks the grid-position <-> address translation on the 10 x 6 core grid.
// Reference data are the cluster-head positions of the reference layout, listed here:
// (0,0) (2,4) (5,3) (4,8) (1,9) (7,7) (8,2) (9,11). For every core the testbench finds by
// brute force the listed head at hexagonal distance <= 1 and checks: is_head, that the
// address decodes back to the core's position, that the address with neigh = 0 decodes to
// that head, and that the neighbor code points from the head to the core. Phantom members
// (head (0,0), direction to (-1,1)) must decode as not existing; proxy addressing must
// land two steps away.
module tb_hex_addr;
  import empa_pkg::*;

  logic [PROC_W-1:0] enc_proc;
  coord_t enc_x, enc_y, dec_x, dec_y;
  core_addr_t enc_addr, dec_addr;
  logic enc_is_head, dec_exists;
  int checks = 0, failures = 0;

  hex_addr dut (.*);

  localparam int NH = 8;
  int hx [NH] = '{0, 2, 5, 4, 1, 7, 8, 9};
  int hy [NH] = '{0, 4, 3, 8, 9, 7, 2, 11};
  int ox [7]  = '{0, 1, 0, 1, -1, 0, -1};
  int oy [7]  = '{0, 1, -2, -1, 1, 2, -1};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enc_proc = 6'b011000;
    dec_addr = '0;
    for (int x = 0; x < 10; x++) begin
      for (int r = 0; r < 6; r++) begin
        int y, head, dir;
        y = 2 * r + (x % 2);
        head = -1; dir = -1;
        for (int h = 0; h < NH; h++)
          for (int d = 0; d < 7; d++)
            if (hx[h] + ox[d] == x && hy[h] + oy[d] == y) begin head = h; dir = d; end
        enc_x = coord_t'(x); enc_y = coord_t'(y);
        #1;
        if (head >= 0) begin
          check(enc_is_head == (dir == 0), $sformatf("is_head at (%0d,%0d)", x, y));
          check(int'(enc_addr.neigh) == dir, $sformatf("neighbor code at (%0d,%0d)", x, y));
          check(enc_addr.proc == 6'b011000 && enc_addr.proxy == 3'd0, "proc / proxy fields");
          dec_addr = enc_addr; dec_addr.neigh = '0;
          #1;
          check(int'(dec_x) == hx[head] && int'(dec_y) == hy[head], $sformatf("head of (%0d,%0d)", x, y));
        end
        dec_addr = enc_addr;
        #1;
        check(int'(dec_x) == x && int'(dec_y) == y && dec_exists, $sformatf("round trip (%0d,%0d)", x, y));
      end
    end
    // phantom member of the head at (0,0): direction 4 points to (-1,1)
    enc_x = 0; enc_y = 0; #1;
    dec_addr = enc_addr; dec_addr.neigh = 3'd4; #1;
    check(int'(dec_x) == -1 && int'(dec_y) == 1 && !dec_exists, "phantom member (-1,1)");
    // corresponding member via proxy: head (5,3), proxy 1 -> (6,4), neighbor 1 -> (7,5)
    enc_x = 5; enc_y = 3; #1;
    dec_addr = enc_addr; dec_addr.proxy = 3'd1; dec_addr.neigh = 3'd1; #1;
    check(int'(dec_x) == 7 && int'(dec_y) == 5 && dec_exists, "proxy addressing (7,5)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
