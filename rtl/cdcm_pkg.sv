// cdcm_pkg: types and constants shared by the Clock Duty Cycle Modulation
// (CDCM) link modules.
//
// A CDCM word is N unit intervals (UI) long and is serialised bit 0 first.
// Bit 0 is the header '0', bit 1 the header '1' (the unmodulated rising edge
// of the carried clock), and bits 2..N-1 the payload: a run of ones followed
// by zeros, so the only falling edge of the period moves with the data.
// A word is therefore fully described by its number of ones, counted with
// the header '1'. The functions below give that count for each code.
//
// The count rules of the N-1 code follow Table I of the CDCM proposal at
// depth 1; the extra depth setting reproduces the test transmitter's
// 0..+/-45 % modulation settings and is this design's own parameterisation.
package cdcm_pkg;

  // Which CDCM code the transmitter emits.
  typedef enum logic [1:0] {
    CODE_N1      = 2'd0,  // CDCM-N-1: one bit per period, duty cycle 50 % +/- depth
    CODE_TERNARY = 2'd1,  // CDCM-N-1.5: idle / 0 / 1 per period (N even)
    CODE_UNARY   = 2'd2   // CDCM-N-Q: a Q-bit value as a unary run, P = N-2
  } code_e;

  // Data source of the test transmitter.
  typedef enum logic [2:0] {
    PAT_ZERO = 3'd0,  // constant 0
    PAT_ONE  = 3'd1,  // constant 1
    PAT_ALT  = 3'd2,  // alternating 0,1,0,1
    PAT_PRBS = 3'd3,  // PRBS15
    PAT_IDLE = 3'd4,  // no user data (50 % clock where the code allows it)
    PAT_USER = 3'd5   // user_data input
  } pattern_e;

  // Number of user bits carried per period by the unary code with the
  // maximal payload P = N-2: the integer part of log2(N-1).
  function automatic int unsigned q_bits(int unsigned n);
    int unsigned q;
    q = 0;
    while ((2 ** (q + 1)) <= (n - 1)) q++;
    return (q == 0) ? 1 : q;
  endfunction

  // Largest useful modulation depth of the N-1 code.
  function automatic int unsigned n1_max_depth(int unsigned n);
    return (n % 2 == 0) ? (n / 2 - 1) : ((n - 1) / 2);
  endfunction

  // Ones in an N-1 word (header '1' included) for data bit d at a given
  // depth. Depth 1 is Table I: even N gives N/2 -/+ 1, odd N gives (N-1)/2
  // and (N+1)/2. Each further depth step moves the falling edge by one UI.
  function automatic int unsigned n1_ones(int unsigned n, logic d, int unsigned depth);
    int unsigned dd, dodd;
    dd   = (depth > n1_max_depth(n)) ? n1_max_depth(n) : depth;
    dodd = (dd == 0) ? 1 : dd;
    return (n % 2 == 0) ? (d ? (n / 2 + dd) : (n / 2 - dd))
                        : (d ? ((n + 1) / 2 + dodd - 1) : ((n - 1) / 2 - (dodd - 1)));
  endfunction

  // Ones in an N-1.5 word: N/2 for idle, one less for a 0, one more for a 1.
  function automatic int unsigned ternary_ones(int unsigned n, logic valid, logic d);
    if (!valid) return n / 2;
    return d ? (n / 2 + 1) : (n / 2 - 1);
  endfunction

endpackage
