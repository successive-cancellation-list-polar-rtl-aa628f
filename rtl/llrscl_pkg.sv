// llrscl_pkg: constants and types shared by the LLR-based successive
// cancellation list (LLR-SCL) polar decoder.
//
// The default code length (1024) and list size (4) are the configuration the
// design is sized for. The LLR width of 8 bits is this design's own choice:
// the architecture is described for a generic q-bit quantisation.
// Decoder phases: a COMPUTE cycle evaluates one layer of the SC tree in every
// component decoder; a DECIDE cycle runs the metric units, the sorter and the
// memory-bank updates for one decoded bit.
package llrscl_pkg;

  localparam int unsigned N_DEF   = 1024;  // code length n
  localparam int unsigned L_DEF   = 4;     // list size L
  localparam int unsigned Q_DEF   = 8;     // LLR word width q
  localparam int unsigned PMW_DEF = 8;     // path-metric width (q bits)

  typedef enum logic [1:0] {
    ST_IDLE    = 2'd0,
    ST_COMPUTE = 2'd1,
    ST_DECIDE  = 2'd2
  } phase_e;

endpackage
