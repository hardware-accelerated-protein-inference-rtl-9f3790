// bitsplit_fsm: one bit-split Aho-Corasick state machine.
//
// A bit-split automaton follows a set of patterns through one bit of every
// input symbol. Its transition table has two entries per state (next on 0,
// next on 1) and each state carries a partial match vector (PMV): bit i is set
// when pattern i, projected onto this FSM's bit, ends at the current position.
// A pattern really matches when every FSM of its tile reports it at once, so
// the tile ANDs the PMVs (see pi_tile).
//
// The tables are RAM written through tbl_* (one state per write, no reads),
// so a new peptide set can be loaded without rebuilding the hardware; the
// prototype compiled its peptides into logic instead. Table depth STATES is
// this design's choice; NPEP = 20 follows the prototype's tile size.
//
// Timing: when step is high the state register takes the table entry of the
// current state for in_bit at the next clock edge. pmv is read
// combinationally from the current state, so it shows the PMV of the state
// reached by the last consumed bit. restart (or reset) returns to state 0,
// the root; restart has priority over step.
module bitsplit_fsm #(
  parameter int unsigned STATES = pi_pkg::STATES,
  parameter int unsigned NPEP   = pi_pkg::NPEP,
  localparam int unsigned SW    = $clog2(STATES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            restart,
  input  logic            step,
  input  logic            in_bit,
  input  logic            tbl_we_next,
  input  logic            tbl_we_pmv,
  input  logic [SW-1:0]   tbl_addr,
  input  logic [SW-1:0]   tbl_next0,
  input  logic [SW-1:0]   tbl_next1,
  input  logic [NPEP-1:0] tbl_pmv,
  output logic [NPEP-1:0] pmv
);

  logic [SW-1:0]   next0_mem [STATES];
  logic [SW-1:0]   next1_mem [STATES];
  logic [NPEP-1:0] pmv_mem   [STATES];
  logic [SW-1:0]   state;

  always_ff @(posedge clk) begin
    if (tbl_we_next) begin
      next0_mem[tbl_addr] <= tbl_next0;
      next1_mem[tbl_addr] <= tbl_next1;
    end
    if (tbl_we_pmv) pmv_mem[tbl_addr] <= tbl_pmv;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) state <= '0;
    else if (step)         state <= in_bit ? next1_mem[state] : next0_mem[state];
  end

  assign pmv = pmv_mem[state];

endmodule
