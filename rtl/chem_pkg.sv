// chem_pkg: sizes, types and helper functions shared by the chemical engine.
//
// The default sizes are the resource reservation of the reference
// implementation: 8 reactions, 8 reactant/product slots per reaction, up to
// 8th order per slot, 255 species, 16-bit concentrations and 32-bit
// (IEEE-754 single) reaction coefficients. Species address 0 is reserved: its
// concentration register always holds 1, so an inactive stoichiometric record
// (address 0) selects the multiplicative identity and updates nothing.
// The programming-table numbering and the time representation (one timer unit
// per clock cycle, all-ones = never) are choices of this design.
package chem_pkg;

  localparam int unsigned N_REACT_D   = 8;    // |R|
  localparam int unsigned N_PSI_D     = 8;    // |Psi|
  localparam int unsigned N_ORD_D     = 8;    // |alpha| = |beta|
  localparam int unsigned N_SPECIES_D = 255;  // |S|
  localparam int unsigned C_W_D       = 16;   // |C|
  localparam int unsigned K_W         = 32;   // |k|
  localparam int unsigned T_W         = 32;   // timer width (clock cycles)
  localparam int unsigned SA_W        = 8;    // species address width

  localparam logic [T_W-1:0] T_NEVER = '1;    // "reaction never fires"

  // IEEE-754 single precision constants
  localparam logic [31:0] FP_ONE  = 32'h3F80_0000;
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

  // Programming tables (low nibble of the table byte of a write frame)
  typedef enum logic [3:0] {
    TBL_C      = 4'd0,   // concentration, index = species
    TBL_ALPHA  = 4'd1,   // reactant record, index = (r*PSI + p)*ORD + o
    TBL_BETA   = 4'd2,   // product record,  same index
    TBL_K      = 4'd3,   // reaction coefficient, index = reaction
    TBL_IN     = 4'd8,   // input channel map  {ac, species, ratio}
    TBL_OUT    = 4'd9,   // output channel map {ac, species, ratio}
    TBL_MONSEL = 4'd10,  // monitor slot {en, ac, species}
    TBL_MONPER = 4'd11   // monitor period (cycles)
  } tbl_e;

  // One programming write as it travels from the decoder to an engine
  typedef struct packed {
    logic [3:0]  ac;
    tbl_e        tbl;
    logic [15:0] idx;
    logic [31:0] data;
  } prog_wr_t;

  // Engine I/O operations requested by the manager
  typedef enum logic [0:0] {
    IO_ADD   = 1'b0,     // c += amount (saturating)
    IO_SUBGE = 1'b1      // if c >= amount: c -= amount, ok = 1
  } io_op_e;

endpackage
