// tb_dor_route: exhaustive check of dimension-ordered torus routing on the
// default 4x2x1 torus and on a 5x3x4 torus, against a reference that counts
// hops both ways round each ring.
module tb_dor_route;
  import apenet_pkg::*;
  coord_t me, dst;
  port_e  p_a, p_b;
  int checks = 0, failures = 0;

  dor_route                                   u_a (.my_coord(me), .dst(dst), .out_port(p_a));
  dor_route #(.DIM_X(5), .DIM_Y(3), .DIM_Z(4)) u_b (.my_coord(me), .dst(dst), .out_port(p_b));

  function automatic port_e ref_port(coord_t m, coord_t d, int nx, int ny, int nz);
    int n [3]; int a [3]; int b [3];
    n = '{nx, ny, nz}; a = '{m.x, m.y, m.z}; b = '{d.x, d.y, d.z};
    for (int k = 0; k < 3; k++) begin
      if (a[k] != b[k]) begin
        int plus, minus;
        plus  = (b[k] - a[k] + n[k]) % n[k];
        minus = (a[k] - b[k] + n[k]) % n[k];
        return port_e'(2*k + ((plus <= minus) ? 0 : 1));
      end
    end
    return P_LOC0;
  endfunction

  initial begin
    for (int mx = 0; mx < 5; mx++) for (int my = 0; my < 3; my++) for (int mz = 0; mz < 4; mz++)
    for (int dx = 0; dx < 5; dx++) for (int dy = 0; dy < 3; dy++) for (int dz = 0; dz < 4; dz++) begin
      me  = '{x: 4'(mx), y: 4'(my), z: 4'(mz)};
      dst = '{x: 4'(dx), y: 4'(dy), z: 4'(dz)};
      #1;
      checks++;
      if (p_b != ref_port(me, dst, 5, 3, 4)) begin
        failures++; $display("FAIL 5x3x4 %p -> %p got %s", me, dst, p_b.name());
      end
      if (mx < 4 && dx < 4 && my < 2 && dy < 2 && mz < 1 && dz < 1) begin
        checks++;
        if (p_a != ref_port(me, dst, 4, 2, 1)) begin
          failures++; $display("FAIL 4x2x1 %p -> %p got %s", me, dst, p_a.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
