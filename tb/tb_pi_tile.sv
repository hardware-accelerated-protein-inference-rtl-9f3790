// tb_pi_tile: self-checking test of one tile (five bit-split FSMs + AND).
//
// Twenty random peptides are compiled into the five per-bit tables and loaded
// through the tile's table port, steering each write to one FSM. A letter
// stream with planted peptides is then fed one letter per clock, back to back;
// one cycle after each letter the tile's match vector must equal the set of
// peptides that end at that letter, found by plain string comparison. A
// second round uses peptides that share prefixes and suffixes.
module tb_pi_tile;
  import ac_build_pkg::*;

  localparam int STATES = 256;
  localparam int NPEP   = 20;
  localparam int SW     = $clog2(STATES);

  logic clk = 0, rst_n = 0, restart = 0, step = 0;
  logic [4:0] code = '0;
  logic tbl_we_next = 0, tbl_we_pmv = 0;
  logic [2:0] tbl_fsm = '0;
  logic [SW-1:0] tbl_addr = '0, tbl_next0 = '0, tbl_next1 = '0;
  logic [NPEP-1:0] tbl_pmv = '0, match;
  int checks = 0, failures = 0, hits = 0;

  always #5 clk = ~clk;

  pi_tile #(.STATES(STATES), .NPEP(NPEP)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input string pats[$]);
    for (int k = 0; k < 5; k++) begin
      build(pats, k);
      for (int s = 0; s < ac_nstates; s++) begin
        @(negedge clk);
        tbl_fsm = 3'(k); tbl_addr = SW'(s);
        tbl_next0 = SW'(ac_nxt0[s]); tbl_next1 = SW'(ac_nxt1[s]);
        tbl_pmv = ac_pmv[s][NPEP-1:0]; tbl_we_next = 1; tbl_we_pmv = 1;
      end
    end
    @(negedge clk); tbl_we_next = 0; tbl_we_pmv = 0;
    restart = 1; @(negedge clk); restart = 0;
  endtask

  task automatic run(input string pats[$], input int len);
    string seq = "";
    logic [NPEP-1:0] exp;
    while (seq.len() < len) begin
      if ($urandom_range(2) == 0) seq = {seq, pats[$urandom_range(NPEP-1)]};
      else seq = {seq, rand_peptide(1, 4)};
    end
    checks++;
    if (match !== '0) begin failures++; $display("FAIL root match %b", match); end
    for (int j = 0; j < seq.len(); j++) begin
      code = 5'(int'(seq[j]) - 65); step = 1;
      @(negedge clk);
      step = 0;
      for (int i = 0; i < NPEP; i++) exp[i] = ends_at(seq, pats[i], j);
      if (exp != 0) hits++;
      checks++;
      if (match !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL pos %0d: match=%b expected %b", j, match, exp);
      end
    end
  endtask

  initial begin
    string pats[$];
    string base;
    void'($urandom(11));
    repeat (2) @(posedge clk);
    rst_n = 1;
    // round 1: independent random peptides
    for (int i = 0; i < NPEP; i++) pats.push_back(rand_peptide(3, 10));
    load(pats);
    run(pats, 1500);
    // round 2: overlapping peptides (shared prefixes, one inside another)
    pats.delete();
    base = rand_peptide(8, 8);
    for (int i = 0; i < NPEP; i++) begin
      if (i < 6)       pats.push_back(base.substr(0, 2 + i));
      else if (i < 12) pats.push_back(base.substr(i - 6, 7));
      else             pats.push_back(rand_peptide(2, 6));
    end
    load(pats);
    run(pats, 1500);
    checks++;
    if (hits < 100) begin failures++; $display("FAIL too few matches exercised: %0d", hits); end
    $display("positions with a match: %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
