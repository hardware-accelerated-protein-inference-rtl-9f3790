// pi_avalon_slave: Avalon Memory-Mapped slave and register file of the
// matching accelerator.
//
// The host processor reaches the matcher only through this slave. It uses the
// basic Avalon-MM slave signals (chipselect, address, read, write, writedata,
// readdata, waitrequest) with zero read latency: readdata is valid in the
// cycle the transfer completes, i.e. the first cycle with waitrequest low.
// Register map (word addresses, see pi_pkg):
//   0 CTRL     W bit0 clear (states, results, counter), bit1 restart (states)
//              R bit0 busy
//   1 DATA     W one ASCII amino-acid letter in bits 7:0; one letter per write
//   2 TBL_ADDR W/R {tile, fsm, state}: state at [SW-1:0], fsm at
//              [SW+2:SW], tile above it
//   3 TBL_NEXT W next-on-0 at [SW-1:0], next-on-1 at [16+SW-1:16]
//   4 TBL_PMV  W partial match vector [NPEP-1:0]; afterwards the state field of
//              TBL_ADDR increments, so a table loads as NEXT, PMV, NEXT, PMV...
//   5 COUNT    R letters consumed since the last clear
//   6 CONFIG   R {STATES[15:0], NPEP[7:0], N_TILES[7:0]}
//   16+t RESULT R peptides of tile t seen since the last clear
// waitrequest is raised for any read and for a CTRL write while the matcher is
// busy (a letter written in the previous cycle is still being folded into the
// results); the stall lasts one cycle. Letters can thus be written back to back
// and a following status or result read always sees every letter before it.
// Bits of writedata above the widest field (bit 24 with the default sizes) are
// ignored.
// The bus signals are the ones the prototype's slave uses; the register map and
// the stall rule are this design's own.
module pi_avalon_slave #(
  parameter int unsigned N_TILES   = pi_pkg::N_TILES,
  parameter int unsigned NPEP      = pi_pkg::NPEP,
  parameter int unsigned STATES    = pi_pkg::STATES,
  localparam int unsigned DATA_W   = pi_pkg::DATA_W,
  localparam int unsigned ADDR_W   = pi_pkg::ADDR_W,
  localparam int unsigned SW       = $clog2(STATES),
  localparam int unsigned FW       = $clog2(pi_pkg::CODE_BITS),
  localparam int unsigned TW       = (N_TILES > 1) ? $clog2(N_TILES) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // Avalon-MM slave
  input  logic                         avs_chipselect,
  input  logic [ADDR_W-1:0]            avs_address,
  input  logic                         avs_read,
  input  logic                         avs_write,
  input  logic [DATA_W-1:0]            avs_writedata,
  output logic [DATA_W-1:0]            avs_readdata,
  output logic                         avs_waitrequest,
  // to / from the task logic
  output logic                         clear,
  output logic                         restart,
  output logic                         ch_valid,
  output logic [7:0]                   ch,
  output logic                         tbl_we_next,
  output logic                         tbl_we_pmv,
  output logic [TW-1:0]                tbl_tile,
  output logic [FW-1:0]                tbl_fsm,
  output logic [SW-1:0]                tbl_addr,
  output logic [SW-1:0]                tbl_next0,
  output logic [SW-1:0]                tbl_next1,
  output logic [NPEP-1:0]              tbl_pmv,
  input  logic [N_TILES-1:0][NPEP-1:0] result,
  input  logic [31:0]                  count,
  input  logic                         busy
);
  import pi_pkg::*;

  localparam int unsigned AW = SW + FW + TW;  // used bits of TBL_ADDR

  logic          wr, rd;
  logic [AW-1:0] tbl_reg;

  initial begin
    assert (SW <= 16) else $error("STATES too large for the TBL_NEXT layout");
    assert (N_TILES <= 2**ADDR_W - int'(REG_RESULT0)) else $error("too many tiles for the address map");
    assert (NPEP <= DATA_W) else $error("NPEP wider than the data bus");
  end

  assign avs_waitrequest = avs_chipselect && busy &&
                           (avs_read || (avs_write && avs_address == REG_CTRL));
  assign wr = avs_chipselect && avs_write && !avs_waitrequest;
  assign rd = avs_chipselect && avs_read  && !avs_waitrequest;

  // Write side: commands go straight to the task logic in the same cycle.
  assign clear       = wr && avs_address == REG_CTRL && avs_writedata[0];
  assign restart     = wr && avs_address == REG_CTRL && avs_writedata[1];
  assign ch_valid    = wr && avs_address == REG_DATA;
  assign ch          = avs_writedata[7:0];
  assign tbl_we_next = wr && avs_address == REG_TBL_NEXT;
  assign tbl_we_pmv  = wr && avs_address == REG_TBL_PMV;
  assign tbl_addr    = tbl_reg[SW-1:0];
  assign tbl_fsm     = tbl_reg[SW +: FW];
  assign tbl_tile    = tbl_reg[SW+FW +: TW];
  assign tbl_next0   = avs_writedata[SW-1:0];
  assign tbl_next1   = avs_writedata[16 +: SW];
  assign tbl_pmv     = avs_writedata[NPEP-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) tbl_reg <= '0;
    else if (wr && avs_address == REG_TBL_ADDR) tbl_reg <= avs_writedata[AW-1:0];
    else if (tbl_we_pmv) tbl_reg[SW-1:0] <= tbl_reg[SW-1:0] + SW'(1);
  end

  // Read side: zero-latency multiplexer.
  always_comb begin
    avs_readdata = '0;
    if (rd) begin
      unique case (avs_address)
        REG_CTRL:     avs_readdata = DATA_W'(busy);
        REG_TBL_ADDR: avs_readdata = DATA_W'(tbl_reg);
        REG_COUNT:    avs_readdata = count;
        REG_CONFIG:   avs_readdata = {16'(STATES), 8'(NPEP), 8'(N_TILES)};
        default:
          if (avs_address >= REG_RESULT0 && avs_address < ADDR_W'(REG_RESULT0 + N_TILES))
            avs_readdata = DATA_W'(result[avs_address - REG_RESULT0]);
      endcase
    end
  end

  // Bus rules: a master must not read and write in the same transfer.
  a_rd_wr_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    avs_chipselect |-> !(avs_read && avs_write));

endmodule
