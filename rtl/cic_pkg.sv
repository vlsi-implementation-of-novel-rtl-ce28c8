// cic_pkg -- shared constants of the five-stage truncated, pipelined CIC
// decimator.
//
// The filter order N = 5, differential delay M = 1 and decimation factor
// R = 16 are the paper's choices, as is the 5-bit input word from a
// 3rd-order sigma-delta modulator. The most significant output bit follows
// Hogenauer's bound B_max = N*log2(R) + B_in - 1 = 24, so the first
// integrator is 25 bits wide. The per-stage register widths 25, 22, 20, 18
// and 16 bits (integrators) and 16 bits (combs) are taken from the pipelined
// block diagram. Truncation keeps the MSB position fixed and drops LSBs.
package cic_pkg;

  localparam int unsigned N_STAGES = 5;   // filter order N
  localparam int unsigned DECIM    = 16;  // decimation factor R
  localparam int unsigned DIFF_DLY = 1;   // differential delay M
  localparam int unsigned IN_W     = 5;   // modulator word width B_in

  // MSB index of the full-precision result, B_max = N log2(R) + B_in - 1.
  localparam int unsigned BMAX     = N_STAGES * $clog2(DECIM) + IN_W - 1;
  localparam int unsigned ACC_W    = BMAX + 1;  // 25 bits

  // Register width of integrator k (k = 0 for integrator 1).
  localparam int unsigned INT_W1 = 25;
  localparam int unsigned INT_W2 = 22;
  localparam int unsigned INT_W3 = 20;
  localparam int unsigned INT_W4 = 18;
  localparam int unsigned INT_W5 = 16;
  localparam int unsigned COMB_W = 16;  // all five comb stages
  localparam int unsigned OUT_W  = COMB_W;

  function automatic int unsigned int_width(int unsigned k);
    case (k)
      0: return INT_W1;
      1: return INT_W2;
      2: return INT_W3;
      3: return INT_W4;
      4: return INT_W5;
      default: return COMB_W;  // width after the last LSB removal
    endcase
  endfunction

endpackage
