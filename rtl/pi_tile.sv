// pi_tile: one tile of the matcher, holding up to NPEP peptides of one
// protein reference cluster.
//
// A tile is CODE_BITS bit-split Aho-Corasick FSMs (FSM0..FSM4 for the 5-bit
// amino-acid code), all fed the same letter code; FSM k follows bit k. A
// peptide ends at the current letter exactly when every FSM's partial match
// vector has its bit set, so the tile's output is the bitwise AND of the five
// PMVs. Five FSMs per tile and the tile size of 20 peptides follow the
// prototype; the bit-to-FSM assignment is this design's choice.
//
// Interface: code/step advance all FSMs together; restart returns them to the
// root. Table writes carry an FSM index (tbl_fsm) and a state address and are
// steered to that FSM only.
// Timing: match reflects the letters consumed up to the previous clock edge
// (one cycle after step), combinationally from the FSM state registers.
module pi_tile #(
  parameter int unsigned STATES    = pi_pkg::STATES,
  parameter int unsigned NPEP      = pi_pkg::NPEP,
  parameter int unsigned CODE_BITS = pi_pkg::CODE_BITS,
  localparam int unsigned SW       = $clog2(STATES),
  localparam int unsigned FW       = (CODE_BITS > 1) ? $clog2(CODE_BITS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 restart,
  input  logic                 step,
  input  logic [CODE_BITS-1:0] code,
  input  logic                 tbl_we_next,
  input  logic                 tbl_we_pmv,
  input  logic [FW-1:0]        tbl_fsm,
  input  logic [SW-1:0]        tbl_addr,
  input  logic [SW-1:0]        tbl_next0,
  input  logic [SW-1:0]        tbl_next1,
  input  logic [NPEP-1:0]      tbl_pmv,
  output logic [NPEP-1:0]      match
);

  logic [NPEP-1:0] pmv [CODE_BITS];

  for (genvar k = 0; k < CODE_BITS; k++) begin : g_fsm
    bitsplit_fsm #(.STATES(STATES), .NPEP(NPEP)) u_fsm (
      .clk        (clk),
      .rst_n      (rst_n),
      .restart    (restart),
      .step       (step),
      .in_bit     (code[k]),
      .tbl_we_next(tbl_we_next && (tbl_fsm == FW'(k))),
      .tbl_we_pmv (tbl_we_pmv  && (tbl_fsm == FW'(k))),
      .tbl_addr   (tbl_addr),
      .tbl_next0  (tbl_next0),
      .tbl_next1  (tbl_next1),
      .tbl_pmv    (tbl_pmv),
      .pmv        (pmv[k])
    );
  end

  always_comb begin
    match = '1;
    for (int k = 0; k < CODE_BITS; k++) match &= pmv[k];
  end

endmodule
