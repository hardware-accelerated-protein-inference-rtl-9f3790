// tb_pi_accel_full: the accelerator at its default size (20 tiles x 20
// peptides x 5 FSMs, 512 states per FSM) running the prototype's mapping of
// 13 protein reference clusters onto 20 tiles.
//
// Tile t holds as many peptides as the prototype's mapping table gives
// (319 in all); the cluster of each tile is the one that table gives. The
// peptide sequences themselves are random (6 to 25 letters, so at most 501
// trie states per FSM). For each cluster a reference protein is formed by
// concatenating the cluster's peptides in random order; the host clears the
// matcher, streams the protein, reads the 20 result words and scores every
// cluster by the fraction of its peptides identified, as the host software
// would. Checked: every result word against a string search, the letter
// count, one letter per clock, and that the inferred cluster is the true one.
module tb_pi_accel_full;
  import pi_pkg::*;
  import ac_build_pkg::*;

  localparam int SW = $clog2(STATES);
  localparam int TW = $clog2(N_TILES);
  localparam int N_CLUSTERS = 13;
  // prototype mapping: cluster and peptide count of each tile
  localparam int CLUSTER [20] = '{1, 1, 2, 3, 3, 4, 5, 6, 7, 7, 7, 8, 8, 8, 9, 10, 11, 12, 13, 13};
  localparam int NPEPS   [20] = '{13, 14, 9, 20, 19, 18, 12, 18, 20, 20, 18, 20, 20, 19, 11, 14, 5, 17, 16, 16};

  logic clk = 0, rst_n = 0;
  logic cs, rd_s, wr_s, waitreq;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] wdata, rdata;
  int checks = 0, failures = 0, n_hits = 0, n_stalls_res = 0;
  longint cycle = 0;
  string pats [N_TILES][$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  pi_accel_top dut (
    .clk, .rst_n,
    .avs_chipselect(cs), .avs_address(addr), .avs_read(rd_s), .avs_write(wr_s),
    .avs_writedata(wdata), .avs_readdata(rdata), .avs_waitrequest(waitreq)
  );

  avalon_master_bfm #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) host (
    .clk, .chipselect(cs), .address(addr), .read(rd_s), .write(wr_s),
    .writedata(wdata), .readdata(rdata), .waitrequest(waitreq)
  );

  initial begin
    repeat (2000000) @(posedge clk);
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

  initial begin
    logic [31:0] r;
    int total = 0, maxst = 0;
    void'($urandom(1234));
    for (int t = 0; t < N_TILES; t++) begin
      for (int i = 0; i < NPEPS[t]; i++) pats[t].push_back(rand_peptide(6, 25));
      total += NPEPS[t];
    end
    expect_eq("peptides mapped", total, 319);
    repeat (3) @(posedge clk);
    rst_n = 1;

    host.rd(REG_CONFIG, r);
    expect_eq("config", r, {16'(STATES), 8'(NPEP), 8'(N_TILES)});
    for (int t = 0; t < N_TILES; t++)
      for (int k = 0; k < CODE_BITS; k++) begin
        build(pats[t], k);
        if (ac_nstates > maxst) maxst = ac_nstates;
        host.wr(REG_TBL_ADDR, 32'({TW'(t), 3'(k), SW'(0)}));
        for (int s = 0; s < ac_nstates; s++) begin
          host.wr(REG_TBL_NEXT, 32'(ac_nxt1[s]) << 16 | 32'(ac_nxt0[s]));
          host.wr(REG_TBL_PMV, 32'(ac_pmv[s][NPEP-1:0]));
        end
      end
    $display("tables loaded at cycle %0d, largest FSM %0d states", cycle, maxst);
    checks++; if (maxst > STATES) begin failures++; $display("FAIL table overflow"); end

    for (int c = 1; c <= N_CLUSTERS; c++) begin
      string prot;
      string pool[$];
      longint c0;
      real best;
      int inferred;
      real score [N_CLUSTERS+1];
      int npc [N_CLUSTERS+1];
      prot = "";
      pool.delete();
      best = -1.0;
      inferred = 0;
      for (int t = 0; t < N_TILES; t++) if (CLUSTER[t] == c) foreach (pats[t][i]) pool.push_back(pats[t][i]);
      pool.shuffle();
      foreach (pool[i]) prot = {prot, pool[i]};
      host.wr(REG_CTRL, 1);
      for (int j = 0; j < prot.len(); j++) begin
        host.wr(REG_DATA, 32'(prot[j]));
        if (j == 0) c0 = cycle;
      end
      expect_eq("one letter per clock", cycle - c0, prot.len() - 1);
      for (int k = 0; k <= N_CLUSTERS; k++) begin score[k] = 0.0; npc[k] = 0; end
      for (int t = 0; t < N_TILES; t++) begin
        logic [NPEP-1:0] f;
        int s0;
        f = '0;
        s0 = host.stalls;
        foreach (pats[t][i]) f[i] = occurs(prot, pats[t][i]);
        host.rd(ADDR_W'(REG_RESULT0 + t), r);
        n_stalls_res += host.stalls - s0;
        expect_eq($sformatf("cluster %0d tile %0d", c, t), r, 32'(f));
        score[CLUSTER[t]] += $countones(r);
        npc[CLUSTER[t]] += NPEPS[t];
        n_hits += $countones(r);
      end
      host.rd(REG_COUNT, r);
      expect_eq("count", r, prot.len());
      for (int k = 1; k <= N_CLUSTERS; k++) begin
        score[k] = score[k] / npc[k];
        if (score[k] > best) begin best = score[k]; inferred = k; end
      end
      $display("cluster %0d: %0d letters, inferred cluster %0d (score %0.2f)", c, prot.len(), inferred, best);
      expect_eq("inferred cluster", inferred, c);
    end
    checks++; if (n_hits < 319) begin failures++; $display("FAIL too few hits %0d", n_hits); end
    checks++; if (n_stalls_res == 0) begin failures++; $display("FAIL no waitrequest stall"); end
    $display("cycles %0d, bus stalls %0d", cycle, host.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
