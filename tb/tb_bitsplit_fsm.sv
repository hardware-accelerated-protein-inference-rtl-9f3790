// tb_bitsplit_fsm: self-checking test of one bit-split Aho-Corasick FSM.
//
// Eight random peptides are projected onto one code bit, compiled into the
// FSM's tables and a random letter stream with peptides planted in it is fed
// bit by bit. After every step the FSM's partial match vector must equal the
// set of projected peptides ending at that letter, worked out by direct
// comparison of bit strings. The test repeats for each of the five code bits
// and also checks restart and a held (non-stepping) cycle.
module tb_bitsplit_fsm;
  import ac_build_pkg::*;

  localparam int STATES = 128;
  localparam int NPEP   = 8;
  localparam int SW     = $clog2(STATES);

  logic clk = 0, rst_n = 0, restart = 0, step = 0, in_bit = 0;
  logic tbl_we_next = 0, tbl_we_pmv = 0;
  logic [SW-1:0] tbl_addr = '0, tbl_next0 = '0, tbl_next1 = '0;
  logic [NPEP-1:0] tbl_pmv = '0, pmv;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bitsplit_fsm #(.STATES(STATES), .NPEP(NPEP)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit proj_ends(string seq, string p, int j, int k);
    int n = p.len();
    if (j - n + 1 < 0) return 0;
    for (int m = 0; m < n; m++)
      if (bit_of(seq[j - n + 1 + m], k) != bit_of(p[m], k)) return 0;
    return 1;
  endfunction

  task automatic check(string what, logic [NPEP-1:0] exp);
    checks++;
    if (pmv !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: pmv=%b expected %b", what, pmv, exp);
    end
  endtask

  initial begin
    string pats[$];
    string seq;
    logic [NPEP-1:0] exp;
    void'($urandom(7));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 5; k++) begin
      pats.delete();
      for (int i = 0; i < NPEP; i++) pats.push_back(rand_peptide(2, 6));
      build(pats, k);
      // load the tables
      for (int s = 0; s < ac_nstates; s++) begin
        @(negedge clk);
        tbl_addr = SW'(s); tbl_next0 = SW'(ac_nxt0[s]); tbl_next1 = SW'(ac_nxt1[s]);
        tbl_pmv = ac_pmv[s][NPEP-1:0]; tbl_we_next = 1; tbl_we_pmv = 1;
      end
      @(negedge clk); tbl_we_next = 0; tbl_we_pmv = 0;
      restart = 1; @(negedge clk); restart = 0;
      check("root", '0);
      // stream with planted peptides
      seq = "";
      while (seq.len() < 300) begin
        if ($urandom_range(2) == 0) seq = {seq, pats[$urandom_range(NPEP-1)]};
        else seq = {seq, rand_peptide(1, 3)};
      end
      for (int j = 0; j < seq.len(); j++) begin
        in_bit = 1'(bit_of(seq[j], k)); step = 1;
        @(negedge clk);
        step = 0;
        for (int i = 0; i < NPEP; i++) exp[i] = proj_ends(seq, pats[i], j, k);
        check($sformatf("bit %0d pos %0d", k, j), exp);
        if (j == 100) begin   // hold: state must not move without step
          in_bit = ~in_bit; @(negedge clk);
          check("hold", exp);
        end
      end
      restart = 1; step = 1; @(negedge clk); restart = 0; step = 0;
      check("restart", '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
