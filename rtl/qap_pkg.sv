// qap_pkg: types and line-layout helpers shared by the Hamiltonian circuit
// processor.
//
// Every register of the processor is a row of single-bit "lines". In each
// time slot one gate is broadcast to all registers and acts on the same lines
// of each. The gate set is the one the wiring diagrams use: a NOT layer on any
// set of lines, the controlled NOT (CN), the double controlled NOT (DCN, a
// Toffoli gate) and the two irreversible zeroing operations that CMOS allows
// (unconditional zero, and zero-if-control-is-one). LOAD_INIT puts the
// workspace lines into their starting state.
//
// Line layout of one register (n vertices, k bits per vertex code, E = n
// when the one-shot enables are built and 0 when they are left out):
//   [0 .. n*k-1]                 vertex codes, vertex i at lines i*k .. i*k+k-1,
//                                bit 0 of the code on the lowest line
//   [n*k .. n*k+n-1]             pair result lines, one per vertex pair
//   [n*k+n .. n*k+n+E-1]         enable lines, one per vertex (start at 1)
//   [n*k+n+E .. n*k+n+E+SCR-1]   scratch pad lines (start at 0)
//   [n*k+n+E+SCR]                Hamiltonian circuit flag (starts at 0)
// SCR = max(2k-1, n-2): the edge detector's DCN chain needs 2k-1 scratch lines
// and the closing AND over n pair results needs n-2 plus the flag line.
package qap_pkg;

  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,  // no gate in this slot
    OP_INIT  = 3'd1,  // pair results, scratch, flag := 0; enables := 1
    OP_NOTM  = 3'd2,  // NOT layer: every line whose mask bit is 1 is inverted
    OP_CN    = 3'd3,  // line[t] ^= line[a]
    OP_DCN   = 3'd4,  // line[t] ^= line[a] & line[b]
    OP_ZERO  = 3'd5,  // line[t] := 0
    OP_CZERO = 3'd6   // if line[a] then line[t] := 0
  } opcode_e;

  function automatic int unsigned scr_lines(int unsigned n, int unsigned k);
    return ((2*k-1) > (n-2)) ? (2*k-1) : (n-2);
  endfunction

  function automatic int unsigned en_lines(int unsigned n, bit en);
    return en ? n : 0;
  endfunction

  function automatic int unsigned bits_per_reg(int unsigned n, int unsigned k, bit en);
    return n*k + n + en_lines(n, en) + scr_lines(n, k) + 1;
  endfunction

  function automatic int unsigned pair_line(int unsigned n, int unsigned k, int unsigned i);
    return n*k + i;
  endfunction

  function automatic int unsigned en_line(int unsigned n, int unsigned k, int unsigned v);
    return n*k + n + v;
  endfunction

  function automatic int unsigned scr_line(int unsigned n, int unsigned k, int unsigned j,
                                          bit en);
    return n*k + n + en_lines(n, en) + j;
  endfunction

  function automatic int unsigned flag_line(int unsigned n, int unsigned k, bit en);
    return n*k + n + en_lines(n, en) + scr_lines(n, k);
  endfunction

  function automatic int unsigned factorial(int unsigned n);
    int unsigned f = 1;
    for (int unsigned i = 2; i <= n; i++) f = f * i;
    return f;
  endfunction

endpackage
