// tb_fm_pkg: reference model used by the testbenches. It builds the
// table-based FM-Index of a reference sequence the way the accelerator
// expects it and runs backward searches in plain software.
//   text     = reference followed by the terminator '$'
//   sa       = suffix array of text (sorted by direct comparison)
//   bwt[i]   = text[(sa[i]-1) mod |text|]; '$' is kept as code 4 here
//   cnt[s]   = Count(s): 1 (for '$') + number of symbols smaller than s
//   marker   = Count(s) + Occ(s, b*d) + d for bucket b (the stored form)
// Bucket words are {mar[T], mar[G], mar[C], mar[A], bwt symbols}, symbol j
// of the bucket in bits 2j+1:2j; '$' is stored as code 0 (it is masked by
// the hardware through its position).
package tb_fm_pkg;

  class fm_index;
    int n;          // reference length (text length n+1)
    int d;          // bucket width
    int text[$];
    int sa[$];
    int bwt[$];
    int cnt[4];
    int dollar;     // BWT position of '$'

    function new(int d_);
      d = d_;
    endfunction

    // Lexicographic comparison of suffixes a and b ('$' = -1 is smallest).
    function automatic bit less(int a, int b);
      int L;
      L = text.size();
      for (int k = 0; k < L; k++) begin
        int ca, cb;
        ca = (a + k < L) ? text[a+k] : -2;
        cb = (b + k < L) ? text[b+k] : -2;
        if (ca != cb) return ca < cb;
      end
      return 0;
    endfunction

    function void build(int ref_seq[$]);
      int L;
      n = ref_seq.size();
      text = ref_seq;
      text.push_back(-1);
      L = n + 1;
      sa.delete();
      for (int i = 0; i < L; i++) sa.push_back(i);
      // insertion sort of the suffixes
      for (int i = 1; i < L; i++) begin
        int v, j;
        v = sa[i];
        j = i - 1;
        while (j >= 0 && less(v, sa[j])) begin
          sa[j+1] = sa[j];
          j--;
        end
        sa[j+1] = v;
      end
      bwt.delete();
      for (int i = 0; i < L; i++) begin
        int c;
        c = text[(sa[i] - 1 + L) % L];
        if (c < 0) begin
          dollar = i;
          bwt.push_back(4);
        end else begin
          bwt.push_back(c);
        end
      end
      for (int s = 0; s < 4; s++) begin
        cnt[s] = 1;
        for (int i = 0; i < n; i++) if (ref_seq[i] < s) cnt[s]++;
      end
    endfunction

    function int occ(int s, int x);
      int c;
      c = 0;
      for (int i = 0; i < x && i <= n; i++) if (bwt[i] == s) c++;
      return c;
    endfunction

    function int lfm(int s, int x);
      return cnt[s] + occ(s, x);
    endfunction

    function int num_buckets();
      return (n + 1) / d + 1;
    endfunction

    // One bucket as the hardware stores it, width 2d + 128.
    function logic [2*512+127:0] bucket(int b);
      logic [2*512+127:0] w;
      w = '0;
      for (int j = 0; j < d; j++) begin
        int p, c;
        p = b * d + j;
        c = (p <= n && bwt[p] != 4) ? bwt[p] : 0;
        w[2*j +: 2] = 2'(c);
      end
      for (int s = 0; s < 4; s++)
        w[2*d + 32*s +: 32] = 32'(cnt[s] + occ(s, b * d) + d);
      return w;
    endfunction

    // Backward search of q[0..m-1] from the interval (lo, hi).
    function void search(int q[$], inout int lo, inout int hi);
      for (int i = q.size() - 1; i >= 0; i--) begin
        if (lo >= hi) return;
        lo = lfm(q[i], lo);
        hi = lfm(q[i], hi);
      end
    endfunction
  endclass

  // The indexes of the reference (0) and of its reverse (1) that the
  // testbench bank models answer from.
  fm_index g_fm [2];

endpackage
