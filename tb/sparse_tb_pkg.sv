// Reference models used by the testbenches of the 2:4 sparse Tensor Core.
//
// These are the software steps that sit in front of the hardware, written
// plainly so that expected results never come from the design under test:
//   prune24     magnitude pruning: in every group of four values, zero the two
//               with the smallest magnitude (ties: the lower position is kept);
//   compress24  2:4 compression: per group, two values and their 2-bit
//               positions, in ascending position order. A group with more than
//               two zeros still stores two entries; the extra entries are zeros
//               at the lowest free positions;
//   is_24       true when every group of four has at most two nonzeros.
// Values are plain ints (the testbenches keep them inside the 8-bit range).
package sparse_tb_pkg;

  typedef int int_da[];

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic bit is_24(int_da w);
    for (int g = 0; g < w.size() / 4; g++) begin
      int nz = 0;
      for (int p = 0; p < 4; p++) if (w[4*g+p] != 0) nz++;
      if (nz > 2) return 1'b0;
    end
    return 1'b1;
  endfunction

  // Keep the two largest magnitudes of each group of four.
  function automatic int_da prune24(int_da w);
    int_da o = new[w.size()](w);
    for (int g = 0; g < w.size() / 4; g++) begin
      int keep0 = -1, keep1 = -1;
      for (int p = 0; p < 4; p++) begin
        if (keep0 < 0 || iabs(w[4*g+p]) > iabs(w[4*g+keep0])) begin
          keep1 = keep0; keep0 = p;
        end else if (keep1 < 0 || iabs(w[4*g+p]) > iabs(w[4*g+keep1])) begin
          keep1 = p;
        end
      end
      for (int p = 0; p < 4; p++) if (p != keep0 && p != keep1) o[4*g+p] = 0;
    end
    return o;
  endfunction

  // Compress a 2:4 row: vals and meta each get w.size()/2 entries.
  function automatic void compress24(input int_da w, output int_da vals, output int_da meta);
    vals = new[w.size() / 2];
    meta = new[w.size() / 2];
    for (int g = 0; g < w.size() / 4; g++) begin
      bit take [4];
      int n = 0, k = 0;
      for (int p = 0; p < 4; p++) begin
        take[p] = (w[4*g+p] != 0);
        if (take[p]) n++;
      end
      // Pad with zero entries at the lowest free positions.
      for (int p = 0; p < 4 && n < 2; p++) if (!take[p]) begin take[p] = 1; n++; end
      for (int p = 0; p < 4; p++) if (take[p]) begin
        vals[2*g+k] = w[4*g+p];
        meta[2*g+k] = p;
        k++;
      end
    end
  endfunction

  // Random row with values in [-lim, lim]; zero_pct percent forced to zero.
  function automatic int_da rand_row(int len, int lim, int zero_pct);
    int_da o = new[len];
    foreach (o[i]) begin
      if (($urandom % 100) < zero_pct) o[i] = 0;
      else o[i] = int'($urandom % (2*lim + 1)) - lim;
    end
    return o;
  endfunction

endpackage
