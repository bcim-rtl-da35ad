// bcim_pkg -- shared constants and types of the BCIM binary-neural-network
// crossbar engine.
//
// The engine evaluates out = Sign(2*popcount(XNOR(x, w)) - n) for many
// output neurons at once: each crossbar column holds one weight vector as
// differential memristor cells, the bitline current is the popcount, and a
// sense amplifier compares it with a reference of n/2.  Vectors longer than
// one crossbar are split over several crossbars ("parts") and the
// per-part sense results are merged by a cascading function.
//
// The 512 x 512 crossbar, 32-bit bus and three references are the values the
// paper evaluates; NTILES = 3 is this design's choice (enough parts for a
// 1500-input layer).
package bcim_pkg;

  localparam int unsigned XBAR_INPUTS = 512;  // input positions per crossbar
  localparam int unsigned XBAR_COLS   = 512;  // bitlines (output neurons)
  localparam int unsigned BUS_WIDTH   = 32;   // inter-crossbar data bus
  localparam int unsigned NREF_MAX    = 3;    // references per sense amp
  localparam int unsigned NTILES_DEF  = 3;    // crossbars per split vector

  // Cascading function applied to the per-part sense results.
  typedef enum logic [2:0] {
    CASC_NONE = 3'd0,  // vector fits one column: main reference result
    CASC_AND  = 3'd1,  // AND of the main results of all parts
    CASC_OR   = 3'd2,  // OR of the main results of all parts
    CASC_F1   = 3'd3,  // cascading function 1 (two parts, NREF refs)
    CASC_F2   = 3'd4   // cascading function 2 (two parts, NREF refs)
  } casc_fn_e;

  // Kind of a word on the input bus.
  typedef enum logic [1:0] {
    IN_WORD  = 2'd0,  // random write of one 32-bit word of the buffer
    IN_COL   = 2'd1,  // one beat of a streamed window column
    IN_CLEAR = 2'd2   // empty the buffer (refresh at the start of a row)
  } in_kind_e;

  // Layer configuration of the engine (static while a layer runs).  Field
  // widths are generous; modules truncate them to their own sizes.
  typedef struct packed {
    casc_fn_e    fn;         // cascading function
    logic [3:0]  nparts;     // parts (crossbars) one weight vector spans
    logic [3:0]  nref;       // references per evaluation: 1 or 3 (odd)
    logic [15:0] aux_x;      // distance of auxiliary references
    logic [15:0] slot_bits;  // bits per window column slot (K*Cin)
    logic [15:0] nslots;     // column slots in the buffer (K or K+1)
    logic [15:0] ncols_out;  // activation bits sent on the bus per result
  } layer_cfg_t;

endpackage
