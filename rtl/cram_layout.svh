// Row map of one neuron array (one column per presynaptic connection).
// Included inside modules that have the parameters S (weight / value bit
// length) and LF (entries of the alpha lookup table). Every field is S rows
// (one row per bit, LSB first) unless noted. Only column 0 is meaningful for
// the per-neuron fields from the synaptic current onwards.
localparam int TW       = $clog2(LF);            // STDP time-difference width
localparam int R_SPK    = 0;                     // LF rows: spike history, [0] = newest
localparam int R_ALPHA  = R_SPK + LF;            // LF x S: alpha_u lookup table
localparam int R_W      = R_ALPHA + LF * S;      // synaptic weight
localparam int R_D      = R_W + S;               // synaptic delay d_ij
localparam int R_DLY    = R_D + S;               // local delay counter
localparam int R_DLYT   = R_DLY + S;             // incremented delay counter
localparam int R_EQ     = R_DLYT + S;            // 1 row: delay match = column enable
localparam int R_NEQ    = R_EQ + 1;              // 1 row: scratch flag
localparam int R_ANDR   = R_NEQ + 1;             // spike AND alpha entry
localparam int R_CONV   = R_ANDR + S;            // S+TW rows: filter sum, rounded to its top S (step 2)
localparam int R_PROD   = R_CONV + S + TW;            // 2S rows: product; top S = step 3
localparam int R_RND    = R_PROD + 2 * S;        // constant 2^(S-1): rounding factor
localparam int R_TMPR   = R_RND + S;             // shifted copy for the reduction
localparam int R_SUM    = R_TMPR + S;            // S+1 rows: sum with carry
localparam int R_B      = R_SUM + S + 1;         // bias b_i
localparam int R_U      = R_B + S;               // synaptic response current u_i
localparam int R_V      = R_U + S;               // membrane potential v_i
localparam int R_TAUV   = R_V + S;               // decay constant (1/tau_v)
localparam int R_SOLD   = R_TAUV + S;            // 1 row: previous output spike
localparam int R_THETA  = R_SOLD + 1;            // threshold theta_i
localparam int R_TS     = R_THETA + S;           // theta AND old spike
localparam int R_NTS    = R_TS + S;              // its inverse (for subtraction)
localparam int R_MEM    = R_NTS + S;             // new membrane potential
localparam int R_SPKN   = R_MEM + S;             // 1 row: new output spike
localparam int R_NSPK   = R_SPKN + 1;            // 1 row: inverse of a spike row
localparam int R_LFSR   = R_NSPK + 1;            // 13 rows: b1..b9, t, a0..a2
localparam int R_DTPRE  = R_LFSR + 13;           // TW rows: time since presynaptic spike
localparam int R_DTPOST = R_DTPRE + TW;          // TW rows: time since postsynaptic spike
localparam int R_DT2    = R_DTPOST + TW;         // TW rows: incremented counter
localparam int R_MATCH  = R_DT2 + TW;            // 1 row: lookup-table index match
localparam int R_FV     = R_MATCH + 1;           // looked-up alpha value
localparam int R_T      = R_FV + S;              // masked table entry / scratch
localparam int R_FSC    = R_T + S;               // scale alpha -> F (tau_u)
localparam int R_FS     = R_FSC + S;             // F(dt)
localparam int R_AP     = R_FS + S;              // A+
localparam int R_AM     = R_AP + S;              // A- (magnitude)
localparam int R_DWP    = R_AM + S;              // A+ F(dt_pre)
localparam int R_DWN    = R_DWP + S;             // A- F(dt_post), copied to all columns
localparam int R_SIALL  = R_DWN + S;             // 1 row: postsynaptic spike in all columns
localparam int R_RED    = R_SIALL + 1;           // column-reduction accumulator
localparam int R_P3     = R_RED + S;             // weighted input held per column (step 3)
localparam int R_END    = R_P3 + S;              // first free row
