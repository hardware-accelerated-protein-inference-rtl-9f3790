// tb_pi_task_logic: self-checking test of the tile array and result flags.
//
// Three tiles, each with its own random peptide set, are loaded and fed the
// same ASCII letter stream (some letters in lower case). Checked against a
// string-search reference: the sticky result flags of every tile after each
// sequence, the letter counter, busy for exactly the cycle after each letter,
// restart (a peptide cut by the boundary must not be found, flags are kept)
// and clear (flags and counter return to zero).
module tb_pi_task_logic;
  import ac_build_pkg::*;

  localparam int N_TILES = 3;
  localparam int STATES  = 256;
  localparam int NPEP    = 20;
  localparam int SW      = $clog2(STATES);

  logic clk = 0, rst_n = 0, clear = 0, restart = 0, ch_valid = 0;
  logic [7:0] ch = '0;
  logic tbl_we_next = 0, tbl_we_pmv = 0;
  logic [1:0] tbl_tile = '0;
  logic [2:0] tbl_fsm = '0;
  logic [SW-1:0] tbl_addr = '0, tbl_next0 = '0, tbl_next1 = '0;
  logic [NPEP-1:0] tbl_pmv = '0;
  logic [N_TILES-1:0][NPEP-1:0] result;
  logic [31:0] count;
  logic busy;
  int checks = 0, failures = 0;
  string pats [N_TILES][$];

  always #5 clk = ~clk;

  pi_task_logic #(.N_TILES(N_TILES), .NPEP(NPEP), .STATES(STATES)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic feed(string seq, bit lower);
    for (int j = 0; j < seq.len(); j++) begin
      ch = seq[j];
      if (lower && j % 3 == 0) ch = ch + 8'h20;
      ch_valid = 1;
      @(negedge clk);
      ch_valid = 0;
      expect_eq("busy after letter", busy, 1);
    end
    @(negedge clk);
    expect_eq("busy idle", busy, 0);
  endtask

  function automatic logic [NPEP-1:0] ref_flags(int t, string seq);
    logic [NPEP-1:0] f = '0;
    foreach (pats[t][i]) f[i] = occurs(seq, pats[t][i]);
    return f;
  endfunction

  function automatic string make_seq(int len);
    string s = "";
    while (s.len() < len) begin
      int t = $urandom_range(N_TILES - 1);
      if ($urandom_range(3) == 0) s = {s, pats[t][$urandom_range(NPEP-1)]};
      else s = {s, rand_peptide(1, 5)};
    end
    return s;
  endfunction

  initial begin
    string s1, s2, cut;
    int n;
    void'($urandom(3));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < N_TILES; t++) begin
      for (int i = 0; i < NPEP; i++) pats[t].push_back(rand_peptide(4, 9));
      for (int k = 0; k < 5; k++) begin
        build(pats[t], k);
        for (int s = 0; s < ac_nstates; s++) begin
          @(negedge clk);
          tbl_tile = 2'(t); tbl_fsm = 3'(k); tbl_addr = SW'(s);
          tbl_next0 = SW'(ac_nxt0[s]); tbl_next1 = SW'(ac_nxt1[s]);
          tbl_pmv = ac_pmv[s][NPEP-1:0]; tbl_we_next = 1; tbl_we_pmv = 1;
        end
      end
    end
    @(negedge clk); tbl_we_next = 0; tbl_we_pmv = 0;
    clear = 1; @(negedge clk); clear = 0;
    for (int t = 0; t < N_TILES; t++) expect_eq("cleared", result[t], 0);
    expect_eq("count cleared", count, 0);

    // several sequences, cleared in between
    for (int r = 0; r < 6; r++) begin
      s1 = make_seq(120 + 40 * r);
      feed(s1, r[0]);
      for (int t = 0; t < N_TILES; t++)
        expect_eq($sformatf("seq %0d tile %0d", r, t), result[t], ref_flags(t, s1));
      expect_eq("count", count, s1.len());
      clear = 1; @(negedge clk); clear = 0;
      for (int t = 0; t < N_TILES; t++) expect_eq("cleared", result[t], 0);
      expect_eq("count cleared", count, 0);
    end

    // restart splits a peptide: neither half may report it
    cut = pats[1][0];
    n = cut.len() / 2;
    s1 = {"W", cut.substr(0, n - 1)};
    s2 = {cut.substr(n, cut.len() - 1), "W"};
    feed(s1, 0);
    restart = 1; @(negedge clk); restart = 0;
    feed(s2, 0);
    for (int t = 0; t < N_TILES; t++) begin
      logic [NPEP-1:0] f;
      f = ref_flags(t, s1) | ref_flags(t, s2);
      expect_eq($sformatf("restart tile %0d", t), result[t], f);
    end
    expect_eq("count over restart", count, s1.len() + s2.len());
    // the same letters without restart do find it
    clear = 1; @(negedge clk); clear = 0;
    feed({s1, s2}, 0);
    expect_eq("joined finds the cut peptide", result[1][0], 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
