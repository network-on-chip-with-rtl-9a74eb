// tb_xy_route -- exhaustive check of the XY routing controller.
//
// Instantiates the routing controller for each of the four routers of a 2x2
// mesh and applies every destination address with valid high and low. The
// expected port is worked out from coordinate differences: move along X while
// the columns differ, then along Y, then deliver on the addressed port.
module tb_xy_route;
  import rtsnoc_pkg::*;

  int checks = 0, failures = 0;
  addr_t dst;
  logic  valid;
  logic [NP-1:0] req [4];

  for (genvar r = 0; r < 4; r++) begin : g_r
    xy_route #(.X_POS(r % 2), .Y_POS(r / 2)) dut (.dst(dst), .valid(valid), .req(req[r]));
  end

  function automatic logic [NP-1:0] expected(int rx, int ry, addr_t d, logic v);
    int dx = int'(d.x) - rx;
    int dy = int'(d.y) - ry;
    int p;
    if (!v) return '0;
    if (dx > 0)      p = 2;          // east
    else if (dx < 0) p = 6;          // west
    else if (dy > 0) p = 0;          // north
    else if (dy < 0) p = 4;          // south
    else             p = int'(d.port);
    return NP'(1) << p;
  endfunction

  initial begin
    for (int v = 0; v < 2; v++) begin
      for (int a = 0; a < 32; a++) begin
        dst = addr_t'(a);
        valid = v[0];
        #1;
        for (int r = 0; r < 4; r++) begin
          checks++;
          if (req[r] !== expected(r % 2, r / 2, dst, valid)) begin
            failures++;
            $display("FAIL router %0d dst %b valid %0d: req %b expected %b",
                     r, a[4:0], v, req[r], expected(r % 2, r / 2, dst, valid));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
