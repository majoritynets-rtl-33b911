// majnet_pkg: constants shared by the MajorityNet RTL.
//
// The XNorMaj-3 operation groups input pairs in threes (M = 3, the kernel
// width of every convolution). A majority popcount over K pairs therefore has
// K/3 one-bit terms and needs cnt_width(K) bits. The thresholds that fold the
// majority scale factors, the bias and batch normalisation into one compare
// (V1 = 2.625 and V0 = 0.375 are fixed during training) use the same width.
// Configuration words are addressed by layer, with these layer codes.
package majnet_pkg;

  localparam int unsigned MAJ_M = 3;

  // K input pairs rounded up to a multiple of 3 (pad pairs are added).
  function automatic int unsigned pad3(input int unsigned k);
    return ((k + MAJ_M - 1) / MAJ_M) * MAJ_M;
  endfunction

  // Bits needed to hold a popcount of 0 .. k/3 majority terms.
  function automatic int unsigned cnt_width(input int unsigned k);
    return $clog2(pad3(k) / MAJ_M + 1);
  endfunction

  // Layer codes of the configuration bus (layer 1 is not part of the design).
  typedef enum logic [3:0] {
    L_CONV2 = 4'd0,
    L_CONV3 = 4'd1,
    L_CONV4 = 4'd2,
    L_CONV5 = 4'd3,
    L_CONV6 = 4'd4,
    L_FC1   = 4'd5,
    L_FC2   = 4'd6,
    L_FC3   = 4'd7
  } layer_e;

endpackage
