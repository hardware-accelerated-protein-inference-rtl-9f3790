// tb_pi_accel_top: end-to-end test of the accelerator through its bus port.
//
// A bus-functional host loads four tiles of 20 random peptides each (tables
// built by ac_build_pkg, written with the auto-incrementing table port), then
// runs several protein sequences: clear, write the letters back to back, read
// the per-tile result words and the letter count, and compare with a plain
// string search. It also runs two sequences separated by a restart (the
// comma-separated multi-protein input). It counts each mechanism of the
// design (waitrequest stall, clear, restart, table auto-increment, peptide
// hits, lower-case input) and fails if one never happened, and checks the
// rate of one letter per clock.
module tb_pi_accel_top;
  import pi_pkg::*;
  import ac_build_pkg::*;

  localparam int N_TILES = 4;
  localparam int NPEP    = 20;
  localparam int STATES  = 256;
  localparam int SW      = $clog2(STATES);
  localparam int TW      = 2;

  logic clk = 0, rst_n = 0;
  logic cs, rd_s, wr_s, waitreq;
  logic [ADDR_W-1:0] addr;
  logic [DATA_W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  int n_clear = 0, n_restart = 0, n_autoinc = 0, n_hits = 0, n_lower = 0;
  longint cycle = 0;
  string pats [N_TILES][$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  pi_accel_top #(.N_TILES(N_TILES), .NPEP(NPEP), .STATES(STATES)) dut (
    .clk, .rst_n,
    .avs_chipselect(cs), .avs_address(addr), .avs_read(rd_s), .avs_write(wr_s),
    .avs_writedata(wdata), .avs_readdata(rdata), .avs_waitrequest(waitreq)
  );

  avalon_master_bfm #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) host (
    .clk, .chipselect(cs), .address(addr), .read(rd_s), .write(wr_s),
    .writedata(wdata), .readdata(rdata), .waitrequest(waitreq)
  );

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic load_tables();
    logic [31:0] r;
    for (int t = 0; t < N_TILES; t++)
      for (int k = 0; k < 5; k++) begin
        build(pats[t], k);
        host.wr(REG_TBL_ADDR, 32'({TW'(t), 3'(k), SW'(0)}));
        for (int s = 0; s < ac_nstates; s++) begin
          host.wr(REG_TBL_NEXT, 32'(ac_nxt1[s]) << 16 | 32'(ac_nxt0[s]));
          host.wr(REG_TBL_PMV, 32'(ac_pmv[s][NPEP-1:0]));
        end
        host.rd(REG_TBL_ADDR, r);
        expect_eq("table address advanced", r, {TW'(t), 3'(k), SW'(ac_nstates)});
        if (ac_nstates > 1) n_autoinc++;
      end
  endtask

  task automatic send(string seq, bit lower);
    longint c0;
    for (int j = 0; j < seq.len(); j++) begin
      byte c;
      c = seq[j];
      if (lower && j % 4 == 1) begin c = c + 8'h20; n_lower++; end
      host.wr(REG_DATA, 32'(c));
      if (j == 0) c0 = cycle;
    end
    expect_eq("one letter per clock", cycle - c0, seq.len() - 1);
  endtask

  task automatic check_results(string what, string segs[$]);
    logic [31:0] r;
    int total = 0;
    for (int t = 0; t < N_TILES; t++) begin
      logic [NPEP-1:0] f;
      f = '0;
      foreach (pats[t][i]) foreach (segs[g]) if (occurs(segs[g], pats[t][i])) f[i] = 1;
      host.rd(ADDR_W'(REG_RESULT0 + t), r);
      expect_eq($sformatf("%s tile %0d", what, t), r, 32'(f));
      n_hits += $countones(f);
    end
    foreach (segs[g]) total += segs[g].len();
    host.rd(REG_COUNT, r);
    expect_eq({what, " count"}, r, total);
  endtask

  function automatic string make_seq(int len);
    string s = "";
    while (s.len() < len) begin
      int t = $urandom_range(N_TILES - 1);
      if ($urandom_range(2) == 0) s = {s, pats[t][$urandom_range(NPEP-1)]};
      else s = {s, rand_peptide(1, 6)};
    end
    return s;
  endfunction

  initial begin
    logic [31:0] r;
    string segs[$];
    int stalls0;
    void'($urandom(21));
    for (int t = 0; t < N_TILES; t++)
      for (int i = 0; i < NPEP; i++) pats[t].push_back(rand_peptide(4, 10));
    repeat (3) @(posedge clk);
    rst_n = 1;

    host.rd(REG_CONFIG, r);
    expect_eq("config", r, {16'(STATES), 8'(NPEP), 8'(N_TILES)});
    load_tables();

    for (int p = 0; p < 6; p++) begin
      segs.delete();
      host.wr(REG_CTRL, 1); n_clear++;
      segs.push_back(make_seq(150 + 50 * p));
      send(segs[0], p[0]);
      stalls0 = host.stalls;
      check_results($sformatf("protein %0d", p), segs);
      expect_eq("result read stalled once", host.stalls - stalls0, 1);
    end

    // comma-separated input: two proteins, FSMs restarted at the boundary
    segs.delete();
    host.wr(REG_CTRL, 1); n_clear++;
    segs.push_back(make_seq(200));
    segs.push_back(make_seq(200));
    send(segs[0], 0);
    host.wr(REG_CTRL, 2); n_restart++;
    send(segs[1], 0);
    check_results("two proteins", segs);

    host.wr(REG_CTRL, 1); n_clear++;
    for (int t = 0; t < N_TILES; t++) begin
      host.rd(ADDR_W'(REG_RESULT0 + t), r);
      expect_eq("cleared", r, 0);
    end

    $display("mechanisms: stalls=%0d clears=%0d restarts=%0d autoinc_tables=%0d hits=%0d lower=%0d",
             host.stalls, n_clear, n_restart, n_autoinc, n_hits, n_lower);
    checks++; if (host.stalls == 0)  begin failures++; $display("FAIL no waitrequest stall"); end
    checks++; if (n_clear == 0)      begin failures++; $display("FAIL no clear"); end
    checks++; if (n_restart == 0)    begin failures++; $display("FAIL no restart"); end
    checks++; if (n_autoinc == 0)    begin failures++; $display("FAIL no auto-increment"); end
    checks++; if (n_hits == 0)       begin failures++; $display("FAIL no peptide hit"); end
    checks++; if (n_lower == 0)      begin failures++; $display("FAIL no lower-case letter"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
