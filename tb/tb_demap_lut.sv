// tb_demap_lut: self-checking test of the LUT demapper. For random effective
// points it checks that
//  - the 9 indices give exactly the 3x3 neighbourhood of the nearest lattice
//    point, each once;
//  - indices 0, 1 and 2 give the true nearest, second and third nearest
//    points (these ranks hold everywhere in a region);
//  - every index gives the symbol found by sorting the neighbourhood by
//    distance to the region's representative point (0.3, 0.15), mapped by
//    the region's symmetry; this is computed without the module's table.
module tb_demap_lut;
  import viper_pkg::*;
  cplxw_t shat;
  pidx_t  p;
  tsym_t  t;
  int checks = 0, failures = 0;

  demap_lut dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int trial = 0; trial < 2000; trial++) begin
      automatic int sr = $signed($urandom_range(0, 4095)) - 2048;  // -8 .. 8 in Q.8
      automatic int si = $signed($urandom_range(0, 4095)) - 2048;
      automatic int cr, ci, fr, fi;
      automatic real xr, xi, rr, ri, d [9];
      automatic int nx [9], ny [9], ord [9];
      automatic bit seen [9];
      automatic bit swp;
      shat = '{re: acc_t'(sr), im: acc_t'(si)};
      cr = (sr + 128) >>> 8;
      ci = (si + 128) >>> 8;
      fr = sr - cr * 256;
      fi = si - ci * 256;
      xr = real'(fr) / 256.0;
      xi = real'(fi) / 256.0;
      // true distances to the neighbourhood
      for (int n = 0; n < 9; n++) begin
        nx[n] = n % 3 - 1;
        ny[n] = n / 3 - 1;
        d[n] = (xr - nx[n]) ** 2 + (xi - ny[n]) ** 2;
        seen[n] = 0;
      end
      // representative point of the region
      swp = ((fi < 0) ? -fi : fi) > ((fr < 0) ? -fr : fr);
      rr = swp ? 0.15 : 0.3;
      ri = swp ? 0.3 : 0.15;
      if (fr < 0) rr = -rr;
      if (fi < 0) ri = -ri;
      for (int n = 0; n < 9; n++) ord[n] = n;
      for (int a = 0; a < 9; a++)
        for (int b = a + 1; b < 9; b++)
          if ((rr - nx[ord[b]]) ** 2 + (ri - ny[ord[b]]) ** 2 < (rr - nx[ord[a]]) ** 2 + (ri - ny[ord[a]]) ** 2) begin
            automatic int tmp = ord[a];
            ord[a] = ord[b];
            ord[b] = tmp;
          end
      for (int k = 0; k < 9; k++) begin
        automatic int ox, oy, idx;
        p = pidx_t'(k);
        #1;
        ox = int'(t.re) - cr;
        oy = int'(t.im) - ci;
        chk(ox >= -1 && ox <= 1 && oy >= -1 && oy <= 1, $sformatf("outside neighbourhood p=%0d", k));
        if (ox >= -1 && ox <= 1 && oy >= -1 && oy <= 1) begin
          idx = (oy + 1) * 3 + (ox + 1);
          chk(!seen[idx], $sformatf("repeated symbol p=%0d", k));
          seen[idx] = 1;
          chk(idx == ord[k], $sformatf("p=%0d got (%0d,%0d) expected (%0d,%0d) f=(%f,%f)", k, ox, oy, nx[ord[k]], ny[ord[k]], xr, xi));
          if (k < 3) begin
            // rank k by true distance: exactly k points strictly nearer
            automatic int nearer = 0;
            for (int n = 0; n < 9; n++) if (d[n] < d[idx] - 1e-9) nearer++;
            chk(nearer <= k, $sformatf("rank p=%0d", k));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
