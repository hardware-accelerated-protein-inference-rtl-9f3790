// avalon_master_bfm: bus-functional model of the host processor's Avalon-MM
// master port, for testbenches.
//
// wr()/rd() perform one transfer each: address, data and strobes change at the
// falling clock edge and the transfer completes at the first rising edge with
// waitrequest low, so back-to-back calls issue one transfer per clock. stalls
// counts the cycles spent waiting; xfers counts completed transfers.
module avalon_master_bfm #(
  parameter int ADDR_W = 6,
  parameter int DATA_W = 32
) (
  input  logic              clk,
  output logic              chipselect,
  output logic [ADDR_W-1:0] address,
  output logic              read,
  output logic              write,
  output logic [DATA_W-1:0] writedata,
  input  logic [DATA_W-1:0] readdata,
  input  logic              waitrequest
);
  int stalls = 0;
  int xfers  = 0;

  initial begin
    chipselect = 0; read = 0; write = 0; address = '0; writedata = '0;
  end

  task automatic xfer(bit is_wr, logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d,
                      output logic [DATA_W-1:0] rdata);
    logic w;
    @(negedge clk);
    chipselect = 1; address = a; writedata = d; write = is_wr; read = !is_wr;
    forever begin
      #1;
      w = waitrequest;
      rdata = readdata;
      @(posedge clk);
      if (!w) break;
      stalls++;
      @(negedge clk);
    end
    xfers++;
    #1;
    chipselect = 0; write = 0; read = 0;
  endtask

  task automatic wr(logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d);
    logic [DATA_W-1:0] r;
    xfer(1, a, d, r);
  endtask

  task automatic rd(logic [ADDR_W-1:0] a, output logic [DATA_W-1:0] r);
    xfer(0, a, '0, r);
  endtask
endmodule
