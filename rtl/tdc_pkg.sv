// tdc_pkg: shared constants, the timestamp type and the ring-oscillator
// period model of the multi-channel carry-chain Vernier TDC.
//
// Word widths follow the published prototype: a 9-bit coarse counter at
// 600 MHz (1667 ps period), a 7-bit fine counter and a 16-bit timestamp.
//
// Ring-oscillator period model. Each channel has a slow RO tapped at delay
// unit (DU) j of its 32-DU carry chain and a fast RO tapped at DU i. The
// published characterisation of channel No.1 gives, for taps 17..32, the
// period differences dtau(i,32) (j fixed at 32) and dtau(32,j) (i fixed at
// 32). Taking tau_f,32 = TREF (about 5 ns, our choice of reference) the
// individual periods follow as
//     tau_s,j = TREF + dtau(32,j)
//     tau_f,i = TREF + dtau(32,32) - dtau(i,32)
// so that tau_s,j - tau_f,i = dtau(32,j) + dtau(i,32) - dtau(32,32), the
// period-difference-recording identity. Taps below 17 were never recorded
// and are not modelled (the functions return 0.0 for them).
`timescale 1ps/1fs
package tdc_pkg;

  localparam int unsigned COARSE_W  = 9;
  localparam int unsigned FINE_W    = 7;
  localparam int unsigned TS_W      = COARSE_W + FINE_W;   // 16
  localparam int unsigned NUM_CH    = 32;
  localparam int unsigned CHAIN_LEN = 32;                  // DUs per carry chain
  localparam int unsigned MIN_TAP   = 17;                  // 16 x 16 design space
  localparam real         T_CLK_PS  = 1667.0;              // 600 MHz

  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } timestamp_t;

  // dtau(i,32) in ps, j fixed at 32, for i = 32 down to 17
  function automatic int dtau_i32(input int unsigned i);
    case (i)
      32: return -133;  31: return -175;  30: return  -63;  29: return  -96;
      28: return   70;  27: return   45;  26: return   88;  25: return   62;
      24: return  131;  23: return  145;  22: return  130;  21: return  125;
      20: return  190;  19: return  450;  18: return  135;  17: return   90;
      default: return 0;
    endcase
  endfunction

  // dtau(32,j) in ps, i fixed at 32, for j = 32 down to 17
  function automatic int dtau_32j(input int unsigned j);
    case (j)
      32: return -133;  31: return -131;  30: return -168;  29: return -256;
      28: return -230;  27: return -371;  26: return -344;  25: return -383;
      24: return -333;  23: return -400;  22: return -286;  21: return -433;
      20: return -400;  19: return -406;  18: return -362;  17: return -400;
      default: return 0;
    endcase
  endfunction

  function automatic bit tap_ok(input int unsigned t);
    return (t >= MIN_TAP) && (t <= CHAIN_LEN);
  endfunction

  // period of the fast RO tapped at DU i
  function automatic real fast_period_ps(input int unsigned i, input real tref);
    if (!tap_ok(i)) return 0.0;
    return tref + real'(dtau_i32(32)) - real'(dtau_i32(i));
  endfunction

  // period of the slow RO tapped at DU j
  function automatic real slow_period_ps(input int unsigned j, input real tref);
    if (!tap_ok(j)) return 0.0;
    return tref + real'(dtau_32j(j));
  endfunction

endpackage
