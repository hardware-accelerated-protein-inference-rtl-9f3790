// tb_pi_avalon_slave: self-checking test of the Avalon-MM slave / register
// file.
//
// The testbench plays the bus master (signals driven at the falling edge, a
// transfer completes at the rising edge where waitrequest is low) and also
// plays the task logic (result, count, busy). It checks the decoded command
// strobes and table fields for every writable register, the auto-increment
// of the table state address, every readable register, and the waitrequest
// rule: reads and CTRL writes wait while busy, letter writes do not.
module tb_pi_avalon_slave;
  import pi_pkg::*;

  localparam int N_TILES = 20;
  localparam int NPEP    = 20;
  localparam int STATES  = 512;
  localparam int SW      = 9;

  logic clk = 0, rst_n = 0;
  logic avs_chipselect = 0, avs_read = 0, avs_write = 0;
  logic [ADDR_W-1:0] avs_address = '0;
  logic [DATA_W-1:0] avs_writedata = '0, avs_readdata;
  logic avs_waitrequest;
  logic clear, restart, ch_valid;
  logic [7:0] ch;
  logic tbl_we_next, tbl_we_pmv;
  logic [4:0] tbl_tile;
  logic [2:0] tbl_fsm;
  logic [SW-1:0] tbl_addr, tbl_next0, tbl_next1;
  logic [NPEP-1:0] tbl_pmv;
  logic [N_TILES-1:0][NPEP-1:0] result;
  logic [31:0] count;
  logic busy = 0;
  int checks = 0, failures = 0, stalls = 0;

  // strobes seen in the cycle a transfer completes
  logic s_clear, s_restart, s_ch_valid, s_next, s_pmv;
  logic [7:0] s_ch;
  logic [4:0] s_tile;
  logic [2:0] s_fsm;
  logic [SW-1:0] s_addr, s_n0, s_n1;
  logic [NPEP-1:0] s_pmvv;

  always #5 clk = ~clk;

  pi_avalon_slave #(.N_TILES(N_TILES), .NPEP(NPEP), .STATES(STATES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
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

  // One transfer; returns readdata and the number of wait cycles.
  task automatic xfer(bit is_wr, logic [ADDR_W-1:0] a, logic [31:0] d,
                      output logic [31:0] rdata, output int waits);
    logic w;
    waits = 0;
    @(negedge clk);
    avs_chipselect = 1; avs_address = a; avs_writedata = d;
    avs_write = is_wr; avs_read = !is_wr;
    forever begin
      #1;
      w = avs_waitrequest;
      rdata = avs_readdata;
      {s_clear, s_restart, s_ch_valid, s_next, s_pmv} = {clear, restart, ch_valid, tbl_we_next, tbl_we_pmv};
      {s_ch, s_tile, s_fsm, s_addr, s_n0, s_n1, s_pmvv} = {ch, tbl_tile, tbl_fsm, tbl_addr, tbl_next0, tbl_next1, tbl_pmv};
      @(posedge clk);
      if (!w) break;
      waits++;
      stalls++;
      @(negedge clk);
    end
    #1;
    avs_chipselect = 0; avs_write = 0; avs_read = 0;
  endtask

  task automatic wr(logic [ADDR_W-1:0] a, logic [31:0] d);
    logic [31:0] r; int n;
    xfer(1, a, d, r, n);
  endtask

  task automatic rd(logic [ADDR_W-1:0] a, output logic [31:0] r);
    int n;
    xfer(0, a, 0, r, n);
  endtask

  initial begin
    logic [31:0] r;
    int n;
    void'($urandom(5));
    for (int t = 0; t < N_TILES; t++) result[t] = NPEP'($urandom);
    count = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;

    rd(REG_CONFIG, r);
    expect_eq("config", r, {16'(STATES), 8'(NPEP), 8'(N_TILES)});
    rd(REG_COUNT, r);
    expect_eq("count", r, count);
    for (int t = 0; t < N_TILES; t++) begin
      rd(ADDR_W'(REG_RESULT0 + t), r);
      expect_eq($sformatf("result %0d", t), r, result[t]);
    end
    rd(ADDR_W'(REG_RESULT0 + N_TILES), r);
    expect_eq("unmapped", r, 0);

    // table programming: address, next, pmv, auto-increment
    for (int i = 0; i < 20; i++) begin
      logic [4:0] t;
      logic [2:0] f;
      logic [SW-1:0] s, n0, n1;
      logic [NPEP-1:0] p;
      t = 5'($urandom_range(N_TILES - 1));
      f = 3'($urandom_range(4));
      s = SW'($urandom_range(STATES - 3));
      n0 = SW'($urandom);
      n1 = SW'($urandom);
      p = NPEP'($urandom);
      wr(REG_TBL_ADDR, {t, f, s});
      rd(REG_TBL_ADDR, r);
      expect_eq("tbl_addr readback", r, {t, f, s});
      wr(REG_TBL_NEXT, {7'($urandom), n1, 7'($urandom), n0});
      expect_eq("we_next", s_next, 1);
      expect_eq("we_pmv idle", s_pmv, 0);
      expect_eq("next fields", {s_tile, s_fsm, s_addr, s_n0, s_n1}, {t, f, s, n0, n1});
      wr(REG_TBL_PMV, {12'($urandom), p});
      expect_eq("we_pmv", s_pmv, 1);
      expect_eq("pmv fields", {s_tile, s_fsm, s_addr, s_pmvv}, {t, f, s, p});
      rd(REG_TBL_ADDR, r);
      expect_eq("auto increment", r, {t, f, s + SW'(1)});
      wr(REG_TBL_NEXT, 0);
      expect_eq("next at incremented state", s_addr, s + SW'(1));
    end

    // letters and control
    wr(REG_DATA, 32'h0000_0141);
    expect_eq("letter strobe", {s_ch_valid, s_ch, s_clear, s_restart}, {1'b1, 8'h41, 2'b00});
    wr(REG_CTRL, 1);
    expect_eq("clear", {s_clear, s_restart, s_ch_valid}, 3'b100);
    wr(REG_CTRL, 2);
    expect_eq("restart", {s_clear, s_restart, s_ch_valid}, 3'b010);
    wr(REG_CTRL, 0);
    expect_eq("ctrl 0", {s_clear, s_restart}, 2'b00);

    // waitrequest while busy
    fork
      begin
        @(negedge clk); busy = 1;
        repeat (3) @(negedge clk);
        busy = 0;
      end
      begin
        @(negedge clk);
        xfer(1, REG_DATA, 32'h51, r, n);
        expect_eq("letter write does not wait", n, 0);
        expect_eq("letter written while busy", {s_ch_valid, s_ch}, {1'b1, 8'h51});
        xfer(0, REG_CTRL, 0, r, n);
        expect_eq("read waits for busy", n > 0, 1);
        expect_eq("status after wait", r, 0);
      end
    join
    fork
      begin
        @(negedge clk); busy = 1;
        repeat (2) @(negedge clk);
        busy = 0;
      end
      begin
        @(negedge clk);
        xfer(1, REG_CTRL, 1, r, n);
        expect_eq("ctrl write waits for busy", n > 0, 1);
        expect_eq("clear after wait", s_clear, 1);
      end
    join
    busy = 1;
    @(negedge clk);
    #1;
    expect_eq("no request, no wait", avs_waitrequest, 0);
    busy = 0;
    rd(REG_CTRL, r);
    expect_eq("status idle", r, 0);
    expect_eq("stalls seen", stalls > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
