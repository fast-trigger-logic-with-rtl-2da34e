// ftl_pkg: constants and types shared by the fast-trigger blocks.
//
// The default sizes are those of the reference configuration: each front-end
// channel sends up to M_HITS = 3 hit words per time slot (TS, one 25 ns
// master-clock period), each hit word is N_BITS = 8 bits of time inside the
// TS in 100 ps units (0..249), and the all-ones word means "no hit".
// Dropping P_TRUNC = 3 low bits leaves 2^(8-3) = 32 time slices of 800 ps
// per TS.
//
// The upload bus (cfg_wr_t) is this design's own format for the parameter
// and LUT loading that a host link performs; one write per clock, no
// read-back. Its fields are:
//   target : which module is addressed (0 = trigger module, k = channel
//            reduction module k-1)
//   kind   : which table inside that module
//   index  : channel number, or LUT address for CFG_LUT_THR on the trigger
//   data   : value written
package ftl_pkg;

  localparam int unsigned N_BITS_DEF = 8;  // bits per hit time
  localparam int unsigned M_HITS_DEF = 3;  // hit fields per channel per TS
  localparam int unsigned P_DEF      = 3;  // low bits dropped by resolution degrading
  localparam int unsigned DEPTH_DEF  = 16; // coarse-correction RAM depth, TS

  typedef enum logic [1:0] {
    CFG_COARSE  = 2'd0, // coarse delay of a channel, in TS
    CFG_FINE    = 2'd1, // fine offset of a channel, in input time units
    CFG_WIDTH   = 2'd2, // window (bit-stream) length of a channel, in slices
    CFG_LUT_THR = 2'd3  // trigger: one LUT bit; channel reduction: threshold
  } cfg_kind_e;

  typedef struct packed {
    logic        we;
    logic [3:0]  target;
    cfg_kind_e   kind;
    logic [15:0] index;
    logic [15:0] data;
  } cfg_wr_t;

endpackage
