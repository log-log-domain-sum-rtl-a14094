// ldpc_code_pkg -- builds test codes for the decoder testbenches.
//
// A code is a protograph lifted by a factor Z with random circulant shifts.
// Two protographs are provided, both type-based protograph LDPC codes:
//   PROTO_R001  rate 0.01: 100 VNs, 99 CNs, 407 edges; two high-degree VNs
//               A (degree 28) and B (degree 281 after lifting counts), 98
//               degree-1 VNs. Check types (repetition x edges A/B):
//               14 x (1,3), 1 x (2,3, no degree-1 VN), 6 x (1,2), 6 x (1,4),
//               18 x (0,3), 35 x (0,2), 19 x (0,4); every other check has
//               one degree-1 VN.
//   PROTO_R01   rate 0.1: 10 VNs, 9 CNs, 37 edges; types 1 x (1,3),
//               1 x (2,3, no degree-1 VN), 1 x (1,2), 5 x (0,3), 1 x (0,2).
// build() returns the four tables the decoder loads: CN degrees, VN index per
// edge in check-node order, VN degrees, and the edge indices of every VN in
// variable-node order. Parallel protograph edges get distinct shifts, so the
// lifted graph has no double edges.
package ldpc_code_pkg;

  typedef enum int { PROTO_R001, PROTO_R01 } proto_e;

  // One check type: repetition, edges to A, edges to B, has a degree-1 VN.
  typedef struct { int rep; int na; int nb; bit d1; } ctype_t;

  class ldpc_code;
    int n, m, e, z;
    int cn_deg[];
    int edge_vn[];
    int vn_deg[];
    int vn_edge[];

    function automatic void get_types(proto_e p, ref ctype_t t[$]);
      t.delete();
      if (p == PROTO_R001) begin
        t.push_back('{14, 1, 3, 1'b1});
        t.push_back('{ 1, 2, 3, 1'b0});
        t.push_back('{ 6, 1, 2, 1'b1});
        t.push_back('{ 6, 1, 4, 1'b1});
        t.push_back('{18, 0, 3, 1'b1});
        t.push_back('{35, 0, 2, 1'b1});
        t.push_back('{19, 0, 4, 1'b1});
      end else begin
        t.push_back('{ 1, 1, 3, 1'b1});
        t.push_back('{ 1, 2, 3, 1'b0});
        t.push_back('{ 1, 1, 2, 1'b1});
        t.push_back('{ 5, 0, 3, 1'b1});
        t.push_back('{ 1, 0, 2, 1'b1});
      end
    endfunction

    // Distinct random shifts for cnt parallel edges.
    function automatic void shifts(int cnt, ref int s[4]);
      for (int k = 0; k < cnt; k++) begin
        bit dup;
        do begin
          s[k] = int'($urandom_range(z - 1, 0));
          dup = 1'b0;
          for (int q = 0; q < k; q++) if (s[q] == s[k]) dup = 1'b1;
        end while (dup);
      end
    endfunction

    function automatic void build(proto_e p, int lift);
      ctype_t t[$];
      int pm, pn, pe, d1, pc;
      int ecount, slot;
      int vfill[];
      get_types(p, t);
      z  = lift;
      pm = 0; pe = 0; d1 = 0;
      foreach (t[i]) begin
        pm += t[i].rep;
        pe += t[i].rep * (t[i].na + t[i].nb + int'(t[i].d1));
        d1 += int'(t[i].d1) * t[i].rep;
      end
      pn = 2 + d1;
      n = pn * z; m = pm * z; e = pe * z;
      cn_deg  = new[m];
      edge_vn = new[e];
      vn_deg  = new[n];
      vn_edge = new[e];
      foreach (vn_deg[i]) vn_deg[i] = 0;
      // Protograph VN numbering: 0 = A, 1 = B, 2.. = degree-1 VNs.
      ecount = 0; pc = 0; d1 = 2;
      foreach (t[ti]) begin
        for (int r = 0; r < t[ti].rep; r++) begin
          int sa[4], sb[4], sd[4];
          shifts(t[ti].na, sa);
          shifts(t[ti].nb, sb);
          shifts(1, sd);
          for (int zz = 0; zz < z; zz++) begin
            int c;
            c = pc * z + zz;
            cn_deg[c] = t[ti].na + t[ti].nb + int'(t[ti].d1);
            for (int k = 0; k < t[ti].na; k++) edge_vn[ecount++] = 0 * z + (zz + sa[k]) % z;
            for (int k = 0; k < t[ti].nb; k++) edge_vn[ecount++] = 1 * z + (zz + sb[k]) % z;
            if (t[ti].d1) edge_vn[ecount++] = d1 * z + (zz + sd[0]) % z;
          end
          if (t[ti].d1) d1++;
          pc++;
        end
      end
      // Variable-node order: count, prefix sum, fill.
      foreach (edge_vn[k]) vn_deg[edge_vn[k]]++;
      vfill = new[n];
      slot = 0;
      foreach (vn_deg[i]) begin
        vfill[i] = slot;
        slot += vn_deg[i];
      end
      foreach (edge_vn[k]) vn_edge[vfill[edge_vn[k]]++] = k;
    endfunction

    // Parity of check c for hard decisions hd.
    function automatic bit check(int c_first, int deg, ref bit hd[]);
      bit p = 1'b0;
      for (int k = 0; k < deg; k++) p ^= hd[edge_vn[c_first + k]];
      return p;
    endfunction
  endclass

  // Gaussian sample by Box-Muller.
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(32'hFFFF_FFFE, 0)) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

endpackage
