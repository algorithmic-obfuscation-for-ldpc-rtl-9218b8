// tb_vnu: variable node unit against integer arithmetic.
// Random channel values and c2v messages (including ties to zero) drive two
// instances, V_FLIP = 0 and 1. Expected: total = gamma' + sum c2v,
// u_b = sat(total - c2v_b) in sign-magnitude, zero taking the sign of gamma',
// z' = sign(total), z = z' xor v; with init, c2v are ignored.
module tb_vnu;
  import ldpc_pkg::*;
  localparam int JB = 5;

  msg_t gamma;
  logic init;
  msg_t [JB-1:0] c2v, u0, u1;
  logic zp0, z0, zp1, z1;

  vnu #(.JB(JB), .V_FLIP(1'b0)) dut0 (.gamma, .init, .c2v, .u(u0), .zp(zp0), .z(z0));
  vnu #(.JB(JB), .V_FLIP(1'b1)) dut1 (.gamma, .init, .c2v, .u(u1), .zp(zp1), .z(z1));

  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val(bit s, int m); return s ? m : -m; endfunction

  task automatic expect_vnu(bit vf, msg_t [JB-1:0] uo, bit zpo, bit zo);
    bit gs; int tot, c [JB];
    gs  = gamma.sgn ^ vf;
    tot = val(gs, int'(gamma.mag));
    for (int b = 0; b < JB; b++) begin
      c[b] = init ? 0 : val(c2v[b].sgn, int'(c2v[b].mag));
      tot += c[b];
    end
    for (int b = 0; b < JB; b++) begin
      int x = tot - c[b], a;
      bit es;
      a  = x < 0 ? -x : x;
      if (a > 15) a = 15;
      es = (x > 0) ? 1'b1 : (x < 0) ? 1'b0 : gs;
      checks++;
      if (uo[b].mag != MAG_W'(a) || uo[b].sgn != es) begin
        failures++;
        $display("FAIL v=%0d u[%0d]: got %0d/%0d exp %0d/%0d", vf, b, uo[b].sgn, uo[b].mag, es, a);
      end
    end
    begin
      bit ezp = (tot > 0) ? 1'b1 : (tot < 0) ? 1'b0 : gs;
      checks++;
      if (zpo != ezp || zo != (ezp ^ vf)) begin
        failures++;
        $display("FAIL v=%0d z: got %0d %0d exp %0d", vf, zpo, zo, ezp);
      end
    end
  endtask

  initial begin
    for (int it = 0; it < 3000; it++) begin
      automatic int rng = (it % 2) ? 15 : 3;
      gamma = '{sgn: 1'($urandom_range(1)), mag: MAG_W'($urandom_range(rng))};
      for (int b = 0; b < JB; b++) c2v[b] = '{sgn: 1'($urandom_range(1)), mag: MAG_W'($urandom_range(rng))};
      init = (it % 7 == 0);
      #1;
      expect_vnu(1'b0, u0, zp0, z0);
      expect_vnu(1'b1, u1, zp1, z1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
