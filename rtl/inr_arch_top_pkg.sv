// inr_arch_top_pkg: names of the array streams of inr_arch_top.
//
// Each enumerator indexes one FIFO of the top level: its depth in the
// top's DEPTH parameter and its observed peak occupancy in the fifo_peak
// output. The names follow the role of the data they carry.
package inr_arch_top_pkg;

  typedef enum int unsigned {
    S_X   = 0,   // input coordinates, one element per beat
    S_XB  = 1,   // coordinates re-packed to BS elements per beat
    S_W   = 2,   // layer weight W (HID x IN)
    S_W1  = 3,   // copy of W for the transpose
    S_W2  = 4,   // copy of W for the gradient MM
    S_WT  = 5,   // W transposed (IN x HID)
    S_B   = 6,   // bias, broadcast to BATCH x HID
    S_MM1 = 7,   // X * W^T
    S_Z   = 8,   // pre-activation Z = X * W^T + B
    S_Z1  = 9,   // copy of Z for Sin
    S_Z2  = 10,  // copy of Z for Cos
    S_Y   = 11,  // layer output sin(Z)
    S_C   = 12,  // cos(Z)
    S_U   = 13,  // upstream gradient dL/dY
    S_D   = 14,  // dL/dZ = U .* cos(Z)
    S_G   = 15,  // dL/dX = dL/dZ * W
    S_G1  = 16,  // copy of G for the narrow output
    S_GN  = 17,  // G re-packed to one element per beat
    S_G2  = 18,  // copy of G for Select
    S_GS  = 19   // selected column of G
  } stream_e;

  localparam int unsigned NUM_STREAMS = 20;

endpackage
