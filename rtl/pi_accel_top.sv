// pi_accel_top: the protein-inference matching accelerator as one bus
// component: an Avalon-MM slave in front of N_TILES parallel tiles of
// bit-split Aho-Corasick FSMs.
//
// The host writes each tile's automaton tables, then writes the letters of a
// protein sequence one per bus write; every letter steps all N_TILES x 5 FSMs
// in the same clock. After the sequence it reads one RESULT word per tile,
// whose bits mark the peptides found, and from these computes peptide
// probabilities and picks the best reference protein in software. The host
// processor and the bus interconnect are outside this module; its ports are
// the slave side of the bus. Register map and timing are described in
// pi_avalon_slave; the matcher is in pi_task_logic.
// Defaults follow the prototype: 20 tiles of at most 20 peptides, 5 FSMs per
// tile. The table depth (512 states per FSM) is this design's choice.
module pi_accel_top #(
  parameter int unsigned N_TILES = pi_pkg::N_TILES,
  parameter int unsigned NPEP    = pi_pkg::NPEP,
  parameter int unsigned STATES  = pi_pkg::STATES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      avs_chipselect,
  input  logic [pi_pkg::ADDR_W-1:0] avs_address,
  input  logic                      avs_read,
  input  logic                      avs_write,
  input  logic [pi_pkg::DATA_W-1:0] avs_writedata,
  output logic [pi_pkg::DATA_W-1:0] avs_readdata,
  output logic                      avs_waitrequest
);

  localparam int unsigned SW = $clog2(STATES);
  localparam int unsigned FW = $clog2(pi_pkg::CODE_BITS);
  localparam int unsigned TW = (N_TILES > 1) ? $clog2(N_TILES) : 1;

  logic                         clear, restart, ch_valid, busy;
  logic [7:0]                   ch;
  logic                         tbl_we_next, tbl_we_pmv;
  logic [TW-1:0]                tbl_tile;
  logic [FW-1:0]                tbl_fsm;
  logic [SW-1:0]                tbl_addr, tbl_next0, tbl_next1;
  logic [NPEP-1:0]              tbl_pmv;
  logic [N_TILES-1:0][NPEP-1:0] result;
  logic [31:0]                  count;

  pi_avalon_slave #(.N_TILES(N_TILES), .NPEP(NPEP), .STATES(STATES)) u_slave (
    .clk, .rst_n,
    .avs_chipselect, .avs_address, .avs_read, .avs_write, .avs_writedata,
    .avs_readdata, .avs_waitrequest,
    .clear, .restart, .ch_valid, .ch,
    .tbl_we_next, .tbl_we_pmv, .tbl_tile, .tbl_fsm, .tbl_addr,
    .tbl_next0, .tbl_next1, .tbl_pmv,
    .result, .count, .busy
  );

  pi_task_logic #(.N_TILES(N_TILES), .NPEP(NPEP), .STATES(STATES)) u_task (
    .clk, .rst_n,
    .clear, .restart, .ch_valid, .ch,
    .tbl_we_next, .tbl_we_pmv, .tbl_tile, .tbl_fsm, .tbl_addr,
    .tbl_next0, .tbl_next1, .tbl_pmv,
    .result, .count, .busy
  );

endmodule
