// tb_ref_pkg: reference models shared by the testbenches.
//
// edit_distance() is a plain dynamic-programming computation, independent
// of the bit-vector method used in the hardware: D[i][0] = i, D[0][j] = 0,
// D[i][j] = min(D[i-1][j] + 1, D[i][j-1] + 1, D[i-1][j-1] + (q[i] != t[j])),
// returning D[m][n], the fewest edits that turn the query into a substring
// of the target that ends at the target's last base. Sequences are arrays
// of 2-bit codes, first base at index 0. Helpers make random sequences and
// the ASCII form used in memory.
package tb_ref_pkg;
  localparam int unsigned MAXL = 1024;

  typedef byte unsigned seq_t [];

  function automatic int edit_distance(input seq_t q, input seq_t t);
    int prev [MAXL+1];
    int cur  [MAXL+1];
    int m = q.size();
    int n = t.size();
    // column-major: prev/cur hold one target column over all query rows
    for (int i = 0; i <= m; i++) prev[i] = i;
    for (int j = 1; j <= n; j++) begin
      cur[0] = 0;
      for (int i = 1; i <= m; i++) begin
        int best = prev[i-1] + ((q[i-1] != t[j-1]) ? 1 : 0);
        if (prev[i] + 1 < best) best = prev[i] + 1;
        if (cur[i-1] + 1 < best) best = cur[i-1] + 1;
        cur[i] = best;
      end
      for (int i = 0; i <= m; i++) prev[i] = cur[i];
    end
    return prev[m];
  endfunction

  function automatic seq_t random_seq(input int unsigned len);
    seq_t s = new[len];
    foreach (s[i]) s[i] = byte'($urandom_range(3));
    return s;
  endfunction

  // Copy of a sequence with a few random edits, so that related pairs with
  // small distances also occur.
  function automatic seq_t mutate(input seq_t s, input int unsigned edits, input int unsigned lmax);
    seq_t r = s;
    for (int e = 0; e < int'(edits); e++) begin
      int unsigned kind = $urandom_range(2);
      int unsigned pos  = (r.size() > 0) ? $urandom_range(r.size() - 1) : 0;
      if (kind == 0 && r.size() > 0) r[pos] = byte'($urandom_range(3));
      else if (kind == 1 && r.size() > 1) begin
        seq_t n = new[r.size() - 1];
        for (int i = 0, k = 0; i < r.size(); i++) if (i != int'(pos)) n[k++] = r[i];
        r = n;
      end else if (r.size() < lmax) begin
        seq_t n = new[r.size() + 1];
        for (int i = 0, k = 0; i <= r.size(); i++) begin
          if (i == int'(pos)) n[i] = byte'($urandom_range(3));
          else n[i] = r[k++];
        end
        r = n;
      end
    end
    return r;
  endfunction

  function automatic byte unsigned code_to_ascii(input byte unsigned c, input bit lower);
    byte unsigned a;
    case (c & 3)
      0: a = "A";
      1: a = "C";
      2: a = "T";
      default: a = "G";
    endcase
    return lower ? (a | 8'h20) : a;
  endfunction
endpackage
