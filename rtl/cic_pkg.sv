// cic_pkg -- constants and width rules shared by the CIC decimator.
//
// The filter is a fifth-order (N=5) cascaded integrator-comb decimator with
// decimation ratio R=16 and differential delay M=1, fed by a 5-bit two's
// complement sample stream. With those numbers the worst-case register growth
// is (R*M)^N = 2^20, so 25 bits are carried by the first integrator; all of
// these values follow the published design.
//
// In the truncated (high-speed) configuration the integrators drop least
// significant bits so that their widths are 25, 22, 20, 18 and 16 bits, and
// the combs and the output run at 16 bits. The drop counts below encode that
// list relative to the 25-bit maximum; they are only defined for N=5. When
// truncation is switched off every stage keeps the full 25 bits.
// The package also holds the encoding of the filter's test modes. Modules
// that import it for one item leave the other constants unread.
package cic_pkg;

  localparam int unsigned CIC_N     = 5;   // integrator/comb pairs
  localparam int unsigned CIC_R     = 16;  // decimation ratio
  localparam int unsigned CIC_M     = 1;   // differential delay
  localparam int unsigned CIC_B_IN  = 5;   // input word (quantizer bits)
  localparam int unsigned CIC_B_MAX = 25;  // first-integrator word

  // Number of LSBs the truncated design has dropped by integrator stage j
  // (0-based): 25,22,20,18,16 bits out of 25.
  localparam int unsigned CIC_N_TRUNC = 5;
  localparam int unsigned TRUNC_DROP [CIC_N_TRUNC] = '{0, 3, 5, 7, 9};

  // Test configuration of the filter: which section drives the output.
  // NORMAL is the filter itself; the other modes route the adjusted input
  // around the sections in front of the one under test and put that
  // section's output on the filter output.
  typedef enum logic [1:0] {
    CIC_MODE_NORMAL      = 2'd0,   // integrators -> down-sampler -> combs
    CIC_MODE_INTEGRATOR  = 2'd1,   // output = integrator cascade
    CIC_MODE_DOWNSAMPLER = 2'd2,   // input -> down-sampler -> output
    CIC_MODE_COMB        = 2'd3    // input -> comb cascade -> output
  } cic_mode_e;

  // Width of integrator stage j.
  function automatic int unsigned int_width(int unsigned j, bit trunc,
                                            int unsigned bmax);
    if (!trunc) return bmax;
    if (j < CIC_N_TRUNC) return bmax - TRUNC_DROP[j];
    return bmax - TRUNC_DROP[CIC_N_TRUNC-1];
  endfunction

  // Width of the downsampler, the comb section and the filter output.
  function automatic int unsigned out_width(bit trunc, int unsigned bmax);
    return trunc ? bmax - TRUNC_DROP[CIC_N_TRUNC-1] : bmax;
  endfunction

endpackage
