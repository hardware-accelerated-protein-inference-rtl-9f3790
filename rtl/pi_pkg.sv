// pi_pkg: constants and the register map shared by the protein-inference
// matching accelerator.
//
// The accelerator matches a stream of amino-acid letters against up to
// N_TILES x NPEP peptides at once. Each letter is reduced to a 5-bit code
// (letter - 'A'), and every tile runs one bit-split Aho-Corasick state machine
// per code bit. Tile count, peptides per tile and FSMs per tile follow the
// prototype (20 tiles, at most 20 peptides each, 5x20 FSMs); the state-table
// depth, the bus width and the register map are this design's own choices.
package pi_pkg;

  // Prototype organisation.
  localparam int unsigned N_TILES   = 20;  // tiles, one protein-cluster slice each
  localparam int unsigned NPEP      = 20;  // peptides per tile (maximum)
  localparam int unsigned CODE_BITS = 5;   // amino-acid code width = FSMs per tile
  localparam int unsigned STATES    = 512; // states per bit-split FSM

  // Avalon-MM slave geometry.
  localparam int unsigned DATA_W = 32;
  localparam int unsigned ADDR_W = 6;      // word address

  // Register map (word addresses).
  typedef enum logic [ADDR_W-1:0] {
    REG_CTRL     = 6'd0,  // W: bit0 clear FSM states and results, bit1 restart FSMs only
                          // R: bit0 busy (a letter is still in the pipeline)
    REG_DATA     = 6'd1,  // W: one ASCII letter in bits 7:0
    REG_TBL_ADDR = 6'd2,  // W/R: {tile[4:0], fsm[2:0], state[8:0]} at bits 16:0
    REG_TBL_NEXT = 6'd3,  // W: next-on-1 in bits 24:16, next-on-0 in bits 8:0
    REG_TBL_PMV  = 6'd4,  // W: partial match vector; then the state field increments
    REG_COUNT    = 6'd5,  // R: letters consumed since the last clear
    REG_CONFIG   = 6'd6,  // R: {STATES[15:0] , NPEP[7:0], N_TILES[7:0]}
    REG_RESULT0  = 6'd16  // R: REG_RESULT0 + t = peptides of tile t seen so far
  } reg_addr_e;

  // Map an ASCII letter to its 5-bit code. Letters A..Z give 0..25; the
  // lower-case range is folded onto the upper-case one.
  function automatic logic [CODE_BITS-1:0] aa_code(input logic [7:0] ch);
    logic [7:0] up;
    up = (ch >= 8'h61 && ch <= 8'h7a) ? ch - 8'h20 : ch;
    return CODE_BITS'(up - 8'h41);
  endfunction

endpackage
