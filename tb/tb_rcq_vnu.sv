// tb_rcq_vnu: self-checking test of one VN-unit lane.
// Random posteriors, old/new check messages and parameter sets are applied;
// the read path (saturated l - R_prev(u_old), then Q) and the write path
// (saturated v2c + R_cur(u_new)) are recomputed here with plain integers.
// Saturation at +/-127 and the first-iteration bypass are counted.
module tb_rcq_vnu;
  localparam int BE = 3, BV = 8, NR = 4, NT = 3;
  logic signed [BV-1:0]  l_in, v2c, v2c_in, l_out;
  logic [BE-1:0]         u_old, u_new, ext;
  logic                  no_old;
  logic [NR-1:0][BV-2:0] r_prev, r_cur;
  logic [NT-1:0][BV-2:0] tau;
  int checks = 0, failures = 0, n_sat = 0, n_noold = 0;

  rcq_vnu #(.BE(BE), .BV(BV)) dut (.*);

  function automatic int rec(input int d, input logic [NR-1:0][BV-2:0] r);
    int m = int'(r[d % NR]);
    return (d >= NR) ? -m : m;
  endfunction
  function automatic int sat(input int x);
    return (x > 127) ? 127 : (x < -127) ? -127 : x;
  endfunction
  function automatic int quant(input int h, input logic [NT-1:0][BV-2:0] t);
    int m = (h < 0) ? -h : h;
    int q = 0;
    for (int j = 0; j < NT; j++) if (m > int'(t[j])) q = j + 1;
    return ((h < 0) ? NR : 0) + q;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int e_v2c, e_l, a, b;
      for (int i = 0; i < NR; i++) begin
        r_prev[i] = 7'(i * 20 + $urandom_range(0, 19));
        r_cur[i]  = 7'(i * 30 + $urandom_range(0, 29));
      end
      a = $urandom_range(0, 40); tau[0] = 7'(a);
      a = a + $urandom_range(1, 40); tau[1] = 7'(a);
      a = a + $urandom_range(1, 40); tau[2] = 7'(a);
      l_in   = BV'($urandom_range(0, 254) - 127);
      v2c_in = BV'($urandom_range(0, 254) - 127);
      u_old  = BE'($urandom);
      u_new  = BE'($urandom);
      no_old = ($urandom_range(0, 7) == 0);
      #1;
      e_v2c = sat(int'(l_in) - (no_old ? 0 : rec(int'(u_old), r_prev)));
      e_l   = sat(int'(v2c_in) + rec(int'(u_new), r_cur));
      b = int'(l_in) - (no_old ? 0 : rec(int'(u_old), r_prev));
      if (b > 127 || b < -127) n_sat++;
      if (no_old) n_noold++;
      checks += 3;
      if (int'(v2c) != e_v2c) begin failures++; if (failures < 10) $display("v2c got %0d exp %0d", v2c, e_v2c); end
      if (int'(ext) != quant(e_v2c, tau)) begin failures++; if (failures < 10) $display("ext got %0d exp %0d", ext, quant(e_v2c, tau)); end
      if (int'(l_out) != e_l) begin failures++; if (failures < 10) $display("l_out got %0d exp %0d", l_out, e_l); end
    end
    checks++;
    if (n_sat == 0 || n_noold == 0) failures++;
    $display("saturations=%0d first_iteration_cases=%0d", n_sat, n_noold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
