// network1 -- the worked example of method IV: a two-state automaton with a
// one-bit ban (check) output, laid out as one widened long flip-flop of
// length 22 and width 9.
//
// The automaton (input <x1,x2> and state q1, both two-rail coded):
//   f1 = ~x1 & x2 & ~q1        next state, q1' = f1
//   f2 = ~f1 = x1 | ~x2 | q1   the complementary rail, q2' = f2
//   y1 = q1
//   y2 = f3 = f1 | x1 & x2
//   f4 = ~f3 = f2 & ~x2 | f2 & ~x1
//   y3 = f3 & f4 | q1 & q2     ban output: 1 only if a rail pair is broken
// State is held in two master/slave pairs of D latches: e1, e2 load f1, f2
// while c1=1; e3, e4 copy them while c2=1 (q1 = e3, q2 = e4).  The four
// clock rails c1, ~c1, c2, ~c2 are two-rail coded as well; one automaton
// beat is c1 pulse then c2 pulse with the two never high together.
//
// Ladder layout (stage ranges are the gates 1_m..1_m' of each fragment):
//   e3 latch (output on a 3-gate)  1..4    D = e1, clock c2
//   e4 latch (output on a 3-gate)  4..7    D = e2, clock c2
//   e5 AND-OR f1, 1 term           7..8
//   e6 AND-OR f2, 3 terms          8..11
//   e7 AND-OR f3, 2 terms          11..13
//   e8 AND-OR f4, 2 terms          13..15
//   e9 AND-OR y3, 2 terms          15..17
//   e1 latch (output on a 2-gate)  17..20  D = f1, clock c1
//   e2 latch (output on a 2-gate)  20..23  D = f2, clock c1
// Inputs 6_1..6_9 carry 0, ~c1, c1, ~x2, x2, ~x1, x1, ~c2, c2.  The outputs
// are the points 8_2 (y1), 8_11 (y2) and 8_15 (y3).
//
// Operating condition: in6_1 = 0 and the lateral inputs 9..12 at 1.  Test
// condition (the back door): every other input at 1, then 11=0,12=1 with a
// 1->0->1 step on 9 that must appear on 13's partner output 14, then
// 11=1,12=0 with a 1->0->1 step on 10 that must appear on 13.
//
// Timing: asynchronous; sample outputs after the network settles following
// each input change.  The loops reported by lint are the latches.  Only
// three ladder points are outputs of the automaton; lint lists the other
// points 7_i/8_i as unused, they are internal links only.
//
// The automaton, the ranks and stage numbers, the input assignment and the
// output points follow the paper's example.  The paper's text and its
// figure captions disagree on which latch drawing belongs to e1/e2 and
// which to e3/e4; the assignment in the whole-network drawing is followed
// (e1, e2 with the output on a 2-gate; e3, e4 on a 3-gate).
module network1
    import delta_cfg_pkg::*;
(
    input  logic in6_1,            // constant 0 while operating
    input  logic c1, c1_n,         // first clock phase, two-rail
    input  logic c2, c2_n,         // second clock phase, two-rail
    input  logic x1, x1_n,         // input bit 1, two-rail
    input  logic x2, x2_n,         // input bit 2, two-rail
    input  logic in9, in10, in11, in12,   // lateral test inputs
    output logic out13, out14,            // lateral test outputs
    output logic y1, y2, y3
);
    localparam int unsigned N = 22;
    localparam int unsigned K = 9;

    // input numbering of the example
    localparam int C1N = 2, C1 = 3, X2N = 4, X2 = 5, X1N = 6, X1 = 7, C2N = 8, C2 = 9;

    function automatic delta_cfg_t build();
        delta_cfg_t c = '0;
        term_x_t tx;
        term_l_t tl;
        // e3, e4: slave latches, D from the master latches' 2-gate outputs
        c = add_latch_t2(c, 1, '0, sel_or(18), sel_in(C2), sel_in(C2N));
        c = add_latch_t2(c, 4, '0, sel_or(21), sel_in(C2), sel_in(C2N));
        // e5: f1 = ~x1 & x2 & q2            (q2 = 3_5)
        tx = '0; tl = '0;
        tx[1] = sel_in(X1N) | sel_in(X2); tl[1] = sel_or(5);
        c = add_andor_iv(c, 7, 1, tx, tl);
        // e6: f2 = x1 | ~x2 | q1             (q1 = 3_2)
        tx = '0; tl = '0;
        tx[1] = sel_in(X1); tx[2] = sel_in(X2N); tl[3] = sel_or(2);
        c = add_andor_iv(c, 8, 3, tx, tl);
        // e7: f3 = f1 | x1 & x2               (f1 = 3_7)
        tx = '0; tl = '0;
        tl[1] = sel_or(7); tx[2] = sel_in(X1) | sel_in(X2);
        c = add_andor_iv(c, 11, 2, tx, tl);
        // e8: f4 = f2 & ~x2 | f2 & ~x1        (f2 = 3_8)
        tx = '0; tl = '0;
        tl[1] = sel_or(8); tx[1] = sel_in(X2N);
        tl[2] = sel_or(8); tx[2] = sel_in(X1N);
        c = add_andor_iv(c, 13, 2, tx, tl);
        // e9: y3 = f3 & f4 | q1 & q2          (f3 = 3_11, f4 = 3_13)
        tx = '0; tl = '0;
        tl[1] = sel_or(11) | sel_or(13);
        tl[2] = sel_or(2) | sel_or(5);
        c = add_andor_iv(c, 15, 2, tx, tl);
        // e1, e2: master latches on f1, f2
        c = add_latch_t1(c, 17, '0, sel_or(7), sel_in(C1), sel_in(C1N));
        c = add_latch_t1(c, 20, '0, sel_or(8), sel_in(C1), sel_in(C1N));
        return c;
    endfunction

    localparam delta_cfg_t CFG = build();

    function automatic logic [N+1:1][K:1] cut_x1(xmask_t m);
        logic [N+1:1][K:1] r;
        for (int j = 1; j <= N + 1; j++) r[j] = m[j][K:1];
        return r;
    endfunction

    function automatic logic [N:1][K:1] cut_x(xmask_t m);
        logic [N:1][K:1] r;
        for (int j = 1; j <= N; j++) r[j] = m[j][K:1];
        return r;
    endfunction

    function automatic logic [N:1][N:1] cut_l(lmask_t m);
        logic [N:1][N:1] r;
        for (int j = 1; j <= N; j++) r[j] = m[j][N:1];
        return r;
    endfunction

    logic [K:1] in6;
    logic [N:1] o7, o8;

    assign in6 = {c2, c2_n, x1, x1_n, x2, x2_n, c1, c1_n, in6_1};

    widened_lff #(
        .N  (N),
        .K  (K),
        .G1X(cut_x1(CFG.g1x)),
        .G4X(cut_x(CFG.g4x)),
        .G5X(cut_x(CFG.g5x)),
        .G4L(cut_l(CFG.g4l)),
        .G5L(cut_l(CFG.g5l))
    ) u_delta (
        .in6  (in6),
        .in9  (in9),
        .in10 (in10),
        .in11 (in11),
        .in12 (in12),
        .out13(out13),
        .out14(out14),
        .o7   (o7),
        .o8   (o8)
    );

    assign y1 = o8[2];
    assign y2 = o8[11];
    assign y3 = o8[15];
endmodule
