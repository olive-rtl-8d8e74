// olive_pkg -- types and constants shared by the OliVe outlier-victim pair
// (OVP) datapath.
//
// Every decoded operand, normal value or outlier, becomes an exponent-integer
// pair <e, i> whose value is i << e. The 4-bit path carries it in one byte
// with the exponent in bits 3:0 and the signed integer in bits 7:4, the order
// the MAC unit diagram prints ("Exp4" 0:3, "Int4" 4:7). The 8-bit path (int8
// normals, E4M3 abfloat outliers) uses a 4-bit exponent and an 8-bit signed
// integer; that width is this design's choice, as the 8-bit decoders are only
// described as extensions of the 4-bit ones. Accumulators are 32-bit
// integers, as in the paper.
package olive_pkg;

  localparam int EXP_W  = 4;   // exponent field of a pair
  localparam int INT4_W = 4;   // integer field of a 4-bit pair
  localparam int INT8_W = 8;   // integer field of an 8-bit pair
  localparam int ACC_W  = 32;  // accumulator width

  // The outlier identifier (victim code) of the 4-bit and 8-bit encodings.
  localparam logic [3:0] OVP_ID4 = 4'b1000;
  localparam logic [7:0] OVP_ID8 = 8'b1000_0000;

  // Exponent-integer pair of the 4-bit path: value = int << exp.
  typedef struct packed {
    logic signed [INT4_W-1:0] int_v;  // bits 7:4
    logic        [EXP_W-1:0]  exp_v;  // bits 3:0
  } exp_int4_t;

  // Exponent-integer pair of the 8-bit path.
  typedef struct packed {
    logic signed [INT8_W-1:0] int_v;  // bits 11:4
    logic        [EXP_W-1:0]  exp_v;  // bits 3:0
  } exp_int8_t;

  // Data type of the normal (non-outlier) values of a 4-bit tensor.
  typedef enum logic {
    NT_INT4   = 1'b0,   // int4 restricted to [-7, 7]
    NT_FLINT4 = 1'b1    // flint4: 0, +-1, +-2, +-3, +-4, +-6, +-8, +-16
  } ntype_e;

endpackage
