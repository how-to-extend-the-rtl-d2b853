// tb_msg_route: checks the routing decision for every ordered pair of cores of the 10 x 6
// grid. The expected class comes from a brute-force neighbourhood search in the testbench
// (explicit list of the six neighbour offsets, r = 1 and r = 2 rings restricted to physical
// cores), independent of the distance formula in the design. For r = 1 the next hop must
// land on the destination, for r = 2 on a physical core adjacent to it; farther pairs must
// go toward the sender's cluster head. A different processor field gives RT_PROC, a
// phantom destination RT_INVALID.
module tb_msg_route;
  import empa_pkg::*;

  core_addr_t src_addr, dst_addr;
  logic [2:0] route, next_dir;
  logic [3:0] hops;
  int checks = 0, failures = 0;

  msg_route dut (.*);

  // addresses from an independent encoder instance
  coord_t ex, ey, ux, uy; core_addr_t ea, ud; logic eh, ue;
  hex_addr u_enc (.enc_proc(6'd3), .enc_x(ex), .enc_y(ey), .enc_addr(ea), .enc_is_head(eh),
                  .dec_addr(ud), .dec_x(ux), .dec_y(uy), .dec_exists(ue));
  assign ud = '0;

  int ox [7] = '{0, 1, 0, 1, -1, 0, -1};
  int oy [7] = '{0, 1, -2, -1, 1, 2, -1};

  function automatic bit phys(int x, int y);
    return x >= 0 && x < 10 && y >= 0 && ((y - (x % 2)) / 2) < 6 && ((y - x) % 2 == 0);
  endfunction
  function automatic bit adj(int x1, int y1, int x2, int y2);
    for (int d = 1; d < 7; d++) if (x1 + ox[d] == x2 && y1 + oy[d] == y2) return 1;
    return 0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_addr_t a [60];
    int cx [60], cy [60];
    int n_cls [6];
    n_cls = '{default: 0};
    for (int c = 0; c < 60; c++) begin
      cx[c] = c / 6; cy[c] = 2 * (c % 6) + (cx[c] % 2);
      ex = coord_t'(cx[c]); ey = coord_t'(cy[c]); #1;
      a[c] = ea;
    end
    for (int s = 0; s < 60; s++) begin
      for (int d = 0; d < 60; d++) begin
        int exp_cls;
        bit r2;
        r2 = 0;
        for (int k = 1; k < 7; k++)
          if (phys(cx[s] + ox[k], cy[s] + oy[k]) && adj(cx[s] + ox[k], cy[s] + oy[k], cx[d], cy[d])) r2 = 1;
        if (s == d) exp_cls = 0;
        else if (adj(cx[s], cy[s], cx[d], cy[d])) exp_cls = 1;
        else if (r2) exp_cls = 2;
        else exp_cls = 3;
        src_addr = a[s]; dst_addr = a[d]; #1;
        n_cls[route]++;
        check(int'(route) == exp_cls, $sformatf("class %0d->%0d: %0d, expected %0d", s, d, route, exp_cls));
        if (exp_cls == 1)
          check(cx[s] + ox[next_dir] == cx[d] && cy[s] + oy[next_dir] == cy[d] && hops == 1, "direct hop");
        if (exp_cls == 2)
          check(next_dir != 0 && phys(cx[s] + ox[next_dir], cy[s] + oy[next_dir]) &&
                adj(cx[s] + ox[next_dir], cy[s] + oy[next_dir], cx[d], cy[d]) && hops == 2, "proxy hop");
        if (exp_cls == 3)
          check((a[s].neigh == 0 && next_dir == 0) || (int'(next_dir) == 7 - int'(a[s].neigh)), "toward own head");
      end
    end
    src_addr = a[10]; dst_addr = a[20]; dst_addr.proc = 6'd4; #1;
    check(route == 3'd4, "other processor");
    dst_addr = a[0]; dst_addr.neigh = 3'd4; #1;
    check(route == 3'd5, "phantom destination");
    $display("classes: self=%0d neighbor=%0d proxy=%0d cluster=%0d", n_cls[0], n_cls[1], n_cls[2], n_cls[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
