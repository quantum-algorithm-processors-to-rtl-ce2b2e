// tb_hc_pkg: reference models shared by the testbenches.
//
// apply_gate is an independent model of one broadcast gate acting on a row of
// register lines (up to 256 lines), with or without enable lines. ref_flag computes, straight from the
// graph, what the wiring diagram must leave in a register's flag: pairs
// 0 .. n-2 need an edge and an unused source vertex (a vertex is used up once
// it has been the source of a matched pair), the closing pair needs only an
// edge. next_perm steps through the permutations of vertices 1 .. n-1 in
// lexicographic order; with vertex 0 in front these are the (n-1)! candidate
// circuits an off-chip computer would load.
package tb_hc_pkg;
  import qap_pkg::*;

  typedef logic [255:0] lines_t;
  typedef bit [15:0][15:0] adj_t;

  function automatic lines_t apply_gate(lines_t l, opcode_e op, int a, int b, int t,
                                        lines_t mask, int n, int k, int bits, bit en);
    lines_t r = l;
    case (op)
      OP_INIT: begin
        for (int x = n*k; x < bits; x++) r[x] = 1'b0;
        if (en) for (int v = 0; v < n; v++) r[n*k + n + v] = 1'b1;
      end
      OP_NOTM:  r = l ^ mask;
      OP_CN:    r[t] = l[t] ^ l[a];
      OP_DCN:   r[t] = l[t] ^ (l[a] & l[b]);
      OP_ZERO:  r[t] = 1'b0;
      OP_CZERO: if (l[a]) r[t] = 1'b0;
      default: ;
    endcase
    return r;
  endfunction

  function automatic bit ref_flag(int n, int codes[16], adj_t adj);
    bit en[16];
    bit p;
    for (int v = 0; v < 16; v++) en[v] = 1'b1;
    for (int i = 0; i < n - 1; i++) begin
      p = adj[codes[i]][codes[i+1]];
      if (!(p && en[codes[i]])) return 1'b0;
      en[codes[i]] = 1'b0;
    end
    return adj[codes[n-1]][codes[0]];
  endfunction

  // Same without the enables: a bad cycle that revisits a vertex can pass.
  function automatic bit ref_flag_no_enable(int n, int codes[16], adj_t adj);
    for (int i = 0; i < n; i++)
      if (!adj[codes[i]][codes[(i+1)%n]]) return 1'b0;
    return 1'b1;
  endfunction

  function automatic bit is_hamiltonian(int n, int codes[16], adj_t adj);
    bit seen[16];
    for (int i = 0; i < n; i++) begin
      if (codes[i] >= n || seen[codes[i]]) return 1'b0;
      seen[codes[i]] = 1'b1;
    end
    return ref_flag_no_enable(n, codes, adj);
  endfunction

  // Next lexicographic permutation of codes[1 .. n-1]; returns 0 after the last.
  function automatic bit next_perm(int n, ref int codes[16]);
    int i, j, tmp;
    i = n - 2;
    while (i >= 1 && codes[i] > codes[i+1]) i--;
    if (i < 1) return 1'b0;
    j = n - 1;
    while (codes[j] < codes[i]) j--;
    tmp = codes[i]; codes[i] = codes[j]; codes[j] = tmp;
    for (int x = i + 1, y = n - 1; x < y; x++, y--) begin
      tmp = codes[x]; codes[x] = codes[y]; codes[y] = tmp;
    end
    return 1'b1;
  endfunction

endpackage
