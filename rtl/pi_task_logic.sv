// pi_task_logic: the cluster-based FSM logic behind the bus slave.
//
// N_TILES tiles run in parallel on one broadcast letter stream. A letter
// arrives as ASCII (ch, ch_valid), is turned into its 5-bit code and steps
// every FSM of every tile in the same cycle, so the array consumes one letter
// per clock whatever the number of peptides. One cycle later each tile's match
// vector is ORed into a sticky result register: result[t][i] says peptide i of
// tile t has occurred at least once since the last clear. A counter keeps the
// number of letters consumed.
//
// The tile count and parallel operation follow the prototype; the ASCII
// input, the sticky result flags, the counter and the clear/restart controls
// are this design's choices for the register file the host reads.
//
// Interface: clear resets FSM states, result flags, counter and the pipeline;
// restart resets FSM states only (a sequence boundary, results kept). Both
// take effect at the next edge and win over a letter in the same cycle.
// busy is high while a consumed letter has not yet been folded into result,
// i.e. for the single cycle after ch_valid. The host should not issue clear
// or restart while busy (the bus slave enforces this).
module pi_task_logic #(
  parameter int unsigned N_TILES   = pi_pkg::N_TILES,
  parameter int unsigned NPEP      = pi_pkg::NPEP,
  parameter int unsigned STATES    = pi_pkg::STATES,
  localparam int unsigned CODE_BITS = pi_pkg::CODE_BITS,
  localparam int unsigned SW       = $clog2(STATES),
  localparam int unsigned FW       = $clog2(CODE_BITS),
  localparam int unsigned TW       = (N_TILES > 1) ? $clog2(N_TILES) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         restart,
  input  logic                         ch_valid,
  input  logic [7:0]                   ch,
  input  logic                         tbl_we_next,
  input  logic                         tbl_we_pmv,
  input  logic [TW-1:0]                tbl_tile,
  input  logic [FW-1:0]                tbl_fsm,
  input  logic [SW-1:0]                tbl_addr,
  input  logic [SW-1:0]                tbl_next0,
  input  logic [SW-1:0]                tbl_next1,
  input  logic [NPEP-1:0]              tbl_pmv,
  output logic [N_TILES-1:0][NPEP-1:0] result,
  output logic [31:0]                  count,
  output logic                         busy
);

  logic [CODE_BITS-1:0] code;
  logic                 step;
  logic                 fsm_restart;
  logic                 pending;
  logic [NPEP-1:0]      match [N_TILES];

  assign code        = pi_pkg::aa_code(ch);
  assign fsm_restart = clear || restart;
  assign step        = ch_valid && !fsm_restart;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    pi_tile #(.STATES(STATES), .NPEP(NPEP), .CODE_BITS(CODE_BITS)) u_tile (
      .clk        (clk),
      .rst_n      (rst_n),
      .restart    (fsm_restart),
      .step       (step),
      .code       (code),
      .tbl_we_next(tbl_we_next && (tbl_tile == TW'(t))),
      .tbl_we_pmv (tbl_we_pmv  && (tbl_tile == TW'(t))),
      .tbl_fsm    (tbl_fsm),
      .tbl_addr   (tbl_addr),
      .tbl_next0  (tbl_next0),
      .tbl_next1  (tbl_next1),
      .tbl_pmv    (tbl_pmv),
      .match      (match[t])
    );
  end

  // Stage 2: fold the match vectors of the state just reached into the flags.
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      pending <= 1'b0;
      count   <= '0;
      result  <= '0;
    end else begin
      pending <= step;
      if (step) count <= count + 32'd1;
      if (pending) begin
        for (int t = 0; t < N_TILES; t++) result[t] <= result[t] | match[t];
      end
    end
  end

  assign busy = pending;

endmodule
