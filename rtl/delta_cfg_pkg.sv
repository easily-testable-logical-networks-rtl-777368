// delta_cfg_pkg -- link tables for building automata inside a widened long
// flip-flop, and the fragment builders that fill them.
//
// A network Delta is fixed by which non-lateral inputs 6_k and which OR
// outputs feed its AND gates (see widened_lff).  The tables here are sized
// for the largest network in this design (MAXN ladder stages, MAXK inputs);
// a network copies out the part it needs.
//
// Each builder adds one "Delta-fragment": the group of consecutive ladder
// stages starting at stage m that stands in for one element of an ordinary
// logic prototype.  Consecutive fragments share one AND gate of group 1.
//   add_andor_iv   AND-OR element, method IV         (stages m..m+g)
//   add_latch_t1   D latch, output on a 2-gate, IV  (stages m..m+3)
//   add_latch_t2   D latch, output on a 3-gate, IV  (stages m..m+3)
//   add_andor_v    AND-OR element, method V, with its own zero loop
//                                                    (stages m..m+g+1)
//   add_latch_t3   D latch, output on a 2-gate, V   (stages m..m+5)
//   add_latch_t4   D latch, output on a 3-gate, V   (stages m..m+5)
// An AND term, a D input, C or not-C is given as a pair of masks: bit k of
// the x mask selects input 6_k, bit j of the l mask selects OR output 2_j
// (for group-4 gates) or 3_j (for group-5 gates).  Input 6_1 is the constant
// 0 of the operating condition and input 1 of every group-4/5 gate is the
// lateral input 11/12, which widened_lff adds itself.
//
// lateral_in_t / lateral_out_t bundle the back-door test pins of a network.
//
// Gate by gate the builders copy the fragment drawings of the paper; the
// table format and the builder functions are this design's own.
package delta_cfg_pkg;
    localparam int unsigned MAXN = 32;
    localparam int unsigned MAXK = 16;
    localparam int unsigned MAXT = 4;   // AND terms per AND-OR element

    typedef logic [MAXK:1] xsel_t;                 // selects inputs 6_k
    typedef logic [MAXN:1] lsel_t;                 // selects OR outputs
    typedef logic [MAXN+1:1][MAXK:1] xmask_t;
    typedef logic [MAXN:1][MAXN:1]   lmask_t;

    typedef struct packed {
        xmask_t g1x;   // 6_k -> gate 1_j
        xmask_t g4x;   // 6_k -> gate 4_i
        xmask_t g5x;   // 6_k -> gate 5_i
        lmask_t g4l;   // 2_j -> gate 4_i
        lmask_t g5l;   // 3_j -> gate 5_i
    } delta_cfg_t;

    typedef xsel_t [MAXT:1] term_x_t;
    typedef lsel_t [MAXT:1] term_l_t;

    // 6_1 is the operating-condition zero
    localparam xsel_t ZERO_IN = xsel_t'(1);

    // AND-OR element of method IV: term t is AND gate 5_m+t-1; the 3-gate
    // chain ORs the terms onto the output of OR 3_m; gate 1_m+g gets 6_1 so
    // that the chain ends in 0 while operating.
    function automatic delta_cfg_t add_andor_iv(delta_cfg_t c, int m, int g,
                                                term_x_t tx, term_l_t tl);
        for (int t = 1; t <= g; t++) begin
            c.g5x[m+t-1] |= tx[t];
            c.g5l[m+t-1] |= tl[t];
        end
        c.g1x[m+g] |= ZERO_IN;
        return c;
    endfunction

    // D latch of method IV with its output on OR 2_m+1 (D and C enter
    // group 5, not-C enters gate 1_m+3).
    function automatic delta_cfg_t add_latch_t1(delta_cfg_t c, int m,
                                                xsel_t dx, lsel_t dl,
                                                xsel_t cx, xsel_t cnx);
        c.g4x[m+1] |= ZERO_IN;
        c.g5x[m+1] |= dx | cx;
        c.g5l[m+1] |= dl;
        c.g5x[m+2] |= dx;
        c.g5l[m+2] |= dl;
        c.g1x[m+3] |= cnx;
        return c;
    endfunction

    // D latch of method IV with its output on OR 3_m+1 (D and C enter
    // group 4, not-C enters gate 1_m).
    function automatic delta_cfg_t add_latch_t2(delta_cfg_t c, int m,
                                                xsel_t dx, lsel_t dl,
                                                xsel_t cx, xsel_t cnx);
        c.g1x[m]   |= cnx;
        c.g4x[m]   |= dx;
        c.g4l[m]   |= dl;
        c.g4x[m+1] |= dx | cx;
        c.g4l[m+1] |= dl;
        c.g5x[m+1] |= ZERO_IN;
        return c;
    endfunction

    // AND-OR element of method V: as method IV, but the chain is closed by
    // a loop (stages m+g, m+g+1) that is parked in its zero state.
    function automatic delta_cfg_t add_andor_v(delta_cfg_t c, int m, int g,
                                               term_x_t tx, term_l_t tl);
        for (int t = 1; t <= g; t++) begin
            c.g5x[m+t-1] |= tx[t];
            c.g5l[m+t-1] |= tl[t];
        end
        c.g5x[m+g] |= ZERO_IN;
        c.g4x[m+g] |= ZERO_IN;
        return c;
    endfunction

    // D latch of method V, output on OR 2_m+1; not-C enters gate 5_m+3 and
    // the zero loop sits at stages m+4, m+5.
    function automatic delta_cfg_t add_latch_t3(delta_cfg_t c, int m,
                                                xsel_t dx, lsel_t dl,
                                                xsel_t cx, xsel_t cnx);
        c.g4x[m+1] |= ZERO_IN;
        c.g5x[m+1] |= dx | cx;
        c.g5l[m+1] |= dl;
        c.g5x[m+2] |= dx;
        c.g5l[m+2] |= dl;
        c.g5x[m+3] |= cnx;
        c.g5x[m+4] |= ZERO_IN;
        c.g4x[m+4] |= ZERO_IN;
        return c;
    endfunction

    // D latch of method V, output on OR 3_m+3; the zero loop sits at stages
    // m, m+1, not-C enters gate 4_m+1.
    function automatic delta_cfg_t add_latch_t4(delta_cfg_t c, int m,
                                                xsel_t dx, lsel_t dl,
                                                xsel_t cx, xsel_t cnx);
        c.g5x[m]   |= ZERO_IN;
        c.g4x[m]   |= ZERO_IN;
        c.g4x[m+1] |= cnx;
        c.g4x[m+2] |= dx;
        c.g4l[m+2] |= dl;
        c.g4x[m+3] |= dx | cx;
        c.g4l[m+3] |= dl;
        c.g5x[m+3] |= ZERO_IN;
        return c;
    endfunction

    // lateral (test) side of one network, as seen from outside
    typedef struct packed {
        logic zero6_1;   // input 6_1: 0 while operating, 1 during the test
        logic in9;       // input 1 of gate 1_1
        logic in10;      // input 2 of gate 1_N+1
        logic in11;      // input 1 of every group-4 gate
        logic in12;      // input 1 of every group-5 gate
    } lateral_in_t;

    typedef struct packed {
        logic out13;     // output of gate 1_1
        logic out14;     // output of gate 1_N+1
    } lateral_out_t;

    // helpers: one-bit selectors
    function automatic xsel_t sel_in(int k);
        xsel_t s = '0;
        s[k] = 1'b1;
        return s;
    endfunction

    function automatic lsel_t sel_or(int j);
        lsel_t s = '0;
        s[j] = 1'b1;
        return s;
    endfunction
endpackage
