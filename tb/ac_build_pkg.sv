// ac_build_pkg: builds bit-split Aho-Corasick tables for the testbenches.
//
// build(pats, k) projects every pattern onto bit k of its letter codes
// (code = letter - 'A'), builds the Aho-Corasick goto/failure automaton over
// the binary alphabet, completes it into a DFA and stores, per state, the
// two successors (ac_nxt0, ac_nxt1) and the partial match vector (ac_pmv: bit i set
// when projected pattern i is a suffix of the state's string). ac_nstates gives
// the number of states used; state 0 is the root.
// The helpers also give a direct string-search reference to compare with.
package ac_build_pkg;

  localparam int MAXS = 4096;

  int          ac_nstates;
  int          ac_nxt0 [MAXS];
  int          ac_nxt1 [MAXS];
  bit [63:0]   ac_pmv  [MAXS];

  localparam string ALPHABET = "ACDEFGHIKLMNPQRSTVWY";

  function automatic int bit_of(byte c, int k);
    return ((int'(c) - 65) >> k) & 1;
  endfunction

  function automatic void build(input string pats[$], input int k);
    int go [MAXS][2];
    int fail [MAXS];
    int q [$];
    int s, r, u;
    for (int i = 0; i < MAXS; i++) begin
      go[i][0] = -1; go[i][1] = -1; ac_pmv[i] = '0; fail[i] = 0;
    end
    ac_nstates = 1;
    foreach (pats[i]) begin
      s = 0;
      for (int j = 0; j < pats[i].len(); j++) begin
        int b = bit_of(pats[i][j], k);
        if (go[s][b] < 0) begin
          go[s][b] = ac_nstates;
          ac_nstates++;
        end
        s = go[s][b];
      end
      ac_pmv[s][i] = 1'b1;
    end
    for (int b = 0; b < 2; b++) begin
      if (go[0][b] < 0) go[0][b] = 0;
      else begin fail[go[0][b]] = 0; q.push_back(go[0][b]); end
    end
    while (q.size() > 0) begin
      r = q.pop_front();
      for (int b = 0; b < 2; b++) begin
        u = go[r][b];
        if (u >= 0) begin
          fail[u] = go[fail[r]][b];
          ac_pmv[u] |= ac_pmv[fail[u]];
          q.push_back(u);
        end else begin
          go[r][b] = go[fail[r]][b];
        end
      end
    end
    for (int i = 0; i < ac_nstates; i++) begin
      ac_nxt0[i] = go[i][0];
      ac_nxt1[i] = go[i][1];
    end
  endfunction

  // A random peptide of length lo..hi.
  function automatic string rand_peptide(int lo, int hi);
    string p = "";
    int n = lo + int'($urandom_range(hi - lo));
    for (int i = 0; i < n; i++) begin
      p = {p, "A"};
      p.putc(i, ALPHABET[$urandom_range(19)]);
    end
    return p;
  endfunction

  // 1 when pattern p ends exactly at position j of seq.
  function automatic bit ends_at(string seq, string p, int j);
    int n = p.len();
    if (j - n + 1 < 0) return 0;
    return seq.substr(j - n + 1, j) == p;
  endfunction

  // 1 when pattern p occurs anywhere in seq.
  function automatic bit occurs(string seq, string p);
    for (int j = 0; j < seq.len(); j++) if (ends_at(seq, p, j)) return 1;
    return 0;
  endfunction

endpackage
