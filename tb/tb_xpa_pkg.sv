// tb_xpa_pkg -- checks the layout construction of xpa_pkg.
//
// * n = 7 and n = 12 against the printed layouts of the construction
//   examples (22 PEs for n = 7; the visible parts of the 72-PE n = 12 line);
// * for every n from 3 to 16: the PE count, that every pair of classes is
//   adjacent (exactly once for odd n, n/2-1 repeats for even n), that no PE
//   neighbours its own class, and the replicate numbering.
module tb_xpa_pkg;
  import xpa_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  int exp7 [22] = '{0,1,2,3,4,5,0,2,4,0,3,6,1,3,5,1,4,6,2,5,6,0};
  int pre12 [26] = '{0,1,2,3,4,5,6,7,8,9,10,11,0,2,4,6,8,10,0,3,6,9,0,4,8,0};
  int tail12 [6] = '{3,9,4,10,5,11};

  initial begin
    chk(num_pes(7) == 22, "num_pes(7)");
    for (int p = 0; p < 22; p++)
      chk(pe_class(7, p) == exp7[p], $sformatf("n=7 pos %0d: %0d", p, pe_class(7, p)));
    chk(pe_class(7, 22) == -1, "n=7 end");
    chk(num_pes(12) == 72, "num_pes(12)");
    for (int p = 0; p < 26; p++)
      chk(pe_class(12, p) == pre12[p], $sformatf("n=12 pos %0d", p));
    for (int p = 0; p < 6; p++)
      chk(pe_class(12, 66 + p) == tail12[p], $sformatf("n=12 pos %0d", 66 + p));
    // "0 6 1 3 5 7 9 11": end of Q_0 and first cycle of Q_1
    chk(pe_class(12, 37) == 0 && pe_class(12, 38) == 6 && pe_class(12, 39) == 1 &&
        pe_class(12, 40) == 3, "n=12 Q0/Q1 boundary");

    for (int n = 3; n <= 16; n++) begin
      int P, cnt[16][16], rep[16], extra;
      P = num_pes(n);
      chk(P == ((n % 2) ? n * (n - 1) / 2 + 1 : n * n / 2), $sformatf("P n=%0d", n));
      chk(pe_class(n, P) == -1 && pe_class(n, P - 1) >= 0, $sformatf("length n=%0d", n));
      foreach (cnt[a, b]) cnt[a][b] = 0;
      foreach (rep[a]) rep[a] = 0;
      for (int p = 0; p < P; p++) begin
        int c;
        c = pe_class(n, p);
        chk(c >= 0 && c < n, $sformatf("range n=%0d p=%0d", n, p));
        chk(pe_replicate(n, p) == rep[c], $sformatf("replicate n=%0d p=%0d", n, p));
        rep[c]++;
        if (p > 0) begin
          int l;
          l = pe_class(n, p - 1);
          chk(l != c, $sformatf("self-adjacent n=%0d p=%0d", n, p));
          cnt[l < c ? l : c][l < c ? c : l]++;
        end
      end
      extra = 0;
      for (int a = 0; a < n; a++)
        for (int b = a + 1; b < n; b++) begin
          chk(cnt[a][b] >= 1, $sformatf("pair %0d,%0d missing n=%0d", a, b, n));
          if (cnt[a][b] > 1) extra += cnt[a][b] - 1;
        end
      chk(extra == ((n % 2) ? 0 : n / 2 - 1), $sformatf("repeats n=%0d: %0d", n, extra));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
