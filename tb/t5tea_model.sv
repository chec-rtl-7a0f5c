// t5tea_model: behavioural model of one 16-channel trigger ASIC; a simulation
// model, not synthesizable RTL.
//
// Channel c is module pixel (row c/8, column c%8) of the two pixel rows the
// ASIC serves. Output k is high while the sum of the four pixels of the 2x2
// patch in columns 2k, 2k+1 of both rows reaches the threshold, standing for
// the discriminated analogue sum of four neighbouring pixels.
module t5tea_model
  import chec_pkg::*;
(
  input  logic [CH_PER_ASIC-1:0][15:0]   amp_i,
  input  logic [17:0]                    thr_i,
  output logic [PATCH_PER_ASIC-1:0]      trig_o
);
  always_comb
    for (int k = 0; k < PATCH_PER_ASIC; k++)
      trig_o[k] = (18'(amp_i[2*k]) + 18'(amp_i[2*k+1]) + 18'(amp_i[8+2*k]) + 18'(amp_i[9+2*k])) >= thr_i;
endmodule
