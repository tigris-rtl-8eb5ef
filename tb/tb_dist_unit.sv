// tb_dist_unit: checks the squared-distance unit against a reference computed
// with 68-bit signed arithmetic, on random and extreme coordinates.
module tb_dist_unit;
  import tigris_pkg::*;
  point_t a, b;
  dist_t  d;
  int checks = 0, failures = 0;

  dist_unit dut (.a, .b, .dsq(d));

  function automatic dist_t ref_d(point_t p, point_t q);
    logic signed [DIST_W-1:0] dx, dy, dz;
    dx = DIST_W'(p.x) - DIST_W'(q.x);
    dy = DIST_W'(p.y) - DIST_W'(q.y);
    dz = DIST_W'(p.z) - DIST_W'(q.z);
    return dist_t'(dx * dx + dy * dy + dz * dz);
  endfunction

  task automatic one(point_t p, point_t q);
    a = p; b = q;
    #1;
    checks++;
    if (d !== ref_d(p, q)) begin
      failures++;
      $display("FAIL: %0d %0d %0d / %0d %0d %0d -> %0d, expected %0d", p.x, p.y, p.z, q.x, q.y, q.z, d, ref_d(p, q));
    end
  endtask

  initial begin
    one('{x: 3, y: 4, z: 0}, '{x: 0, y: 0, z: 0});
    one('{x: -1, y: -1, z: -1}, '{x: 1, y: 1, z: 1});
    one('{x: 32'sh7fffffff, y: 32'sh7fffffff, z: 32'sh7fffffff},
        '{x: 32'sh80000000, y: 32'sh80000000, z: 32'sh80000000});
    for (int i = 0; i < 2000; i++) begin
      point_t p, q;
      p = '{x: $urandom, y: $urandom, z: $urandom};
      q = '{x: $urandom, y: $urandom, z: $urandom};
      if (i % 2 == 0) begin
        p.x = coord_t'($signed(p.x) >>> 12); p.y = coord_t'($signed(p.y) >>> 12); p.z = coord_t'($signed(p.z) >>> 12);
      end
      one(p, q);
    end
    checks++;
    if (ref_d('{x: 3, y: 4, z: 12}, '{x: 0, y: 0, z: 0}) != 169) failures++;
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
