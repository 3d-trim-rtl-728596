// trim_pkg: types and constants shared by every 3D-TrIM module.
//
// The paper states no arithmetic precision. This design uses signed 8-bit
// activations and weights and 32-bit partial sums (psums), wide enough for a
// 3x3 window (16-bit products, 9 of them) summed over 8 cores without
// overflow. The activation source of a PE is an enum that mirrors the two
// multiplexers of the PE: external memory, Input Recycling Buffer (IRB,
// diagonal movement) or the right-hand neighbour (horizontal movement).
// Pipeline latencies are this design's choice and are used by the control
// logic to tag outputs.
package trim_pkg;
  localparam int ACT_W  = 8;
  localparam int WGT_W  = 8;
  localparam int PSUM_W = 32;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [PSUM_W-1:0] psum_t;

  // Where a PE takes the activation it multiplies in the current cycle.
  typedef enum logic [1:0] {
    SRC_EXT   = 2'd0,  // A register, loaded from memory the cycle before
    SRC_IRB   = 2'd1,  // diagonal reuse through the IRB
    SRC_RIGHT = 2'd2   // right-to-left movement from the neighbour PE
  } act_src_e;

  // Cycles from the cycle a PE multiplies to the cycle its psum register
  // holds the result (product register, then psum register).
  localparam int PE_LAT   = 2;
  // Each adder tree has one output register.
  localparam int TREE_LAT = 1;
endpackage
