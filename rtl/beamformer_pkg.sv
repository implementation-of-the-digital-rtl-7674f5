// beamformer_pkg: widths, fixed-point formats and sizes shared by the
// QS-SVM / MVDR beamformer. Every number format is two's complement fixed
// point; a value v is held as round(v * 2**F) in a W-bit signed word.
//
// Sizes taken from the design: 57 measured array outputs per snapshot and a
// rate factor of 87 between the snapshot rate and the processing clock (the
// "Repeat 87x" / "up 87" stages). The word widths and fraction lengths are
// this design's own choice; the source model only says they are fixed point.
package beamformer_pkg;

  // Number of antenna element outputs in one snapshot a(t).
  parameter int unsigned N_ELEM = 57;
  // Processing clock cycles per snapshot.
  parameter int unsigned RATE = 87;

  // Input samples a(t) and steering vector elements: Q3.12 in 16 bits.
  parameter int unsigned IN_W = 16;
  parameter int unsigned IN_F = 12;

  // Internal solver words (R, y, x, accumulators): Q19.28 in 48 bits.
  parameter int unsigned ACC_W = 48;
  parameter int unsigned ACC_F = 28;

  // Beamformer weights w: Q3.20 in 24 bits.
  parameter int unsigned WGT_W = 24;
  parameter int unsigned WGT_F = 20;

  // Default forgetting factor lambda of the recursive Q-less QR update.
  parameter real LAMBDA = 0.99;

endpackage
