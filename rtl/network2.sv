// network2 -- the worked example of method V: the same automaton as
// network1 without the ban output, laid out as one widened long flip-flop of
// length 29 and width 9 in which every AND gate of group 1 has exactly two
// inputs.
//
// The automaton (input <x1,x2> and state q1, two-rail coded):
//   f1 = ~x1 & x2 & ~q1        next state, q1' = f1
//   f2 = x1 | ~x2 | q1         the complementary rail, q2' = f2
//   y1 = q1,  y2 = f1 | x1 & x2
// Since group-1 gates can no longer take the operating zero on a third
// input, every fragment carries its own "zero loop": a ladder loop that is
// parked in its all-zero stable state before operation starts and then
// feeds the 0 the fragment needs.
//
// Ladder layout (gates 1_m..1_m' of each fragment):
//   e3 latch (output on a 3-gate)  1..6    D = e1, clock c2
//   e4 latch (output on a 3-gate)  6..11   D = e2, clock c2
//   e5 AND-OR f1, 1 term           11..13
//   e6 AND-OR f2, 3 terms          13..17
//   e7 AND-OR f3, 2 terms          17..20
//   e1 latch (output on a 2-gate)  20..25  D = f1, clock c1
//   e2 latch (output on a 2-gate)  25..30  D = f2, clock c1
// Inputs 6_1..6_9 carry 0, ~c1, c1, ~x2, x2, ~x1, x1, ~c2, c2; the outputs
// are the points 8_4 (y1) and 8_17 (y2).
//
// Start-up (moment t0): hold in6_1 = 0 and the lateral inputs 9..12 at 0
// until the network settles -- every ladder loop, the zero loops included,
// falls to 0 -- then raise 9..12 to 1 for the operating condition.  Load the
// state with one beat before relying on y1.
// Back-door test as for any widened long flip-flop: every non-lateral input
// at 1; 11=0, 12=1 and a 1->0->1 step on 9 must appear on 14; 11=1, 12=0 and a
// 1->0->1 step on 10 must appear on 13.
//
// Timing: asynchronous; sample outputs after the network settles.  The loops
// reported by lint are the latches and zero loops.  Only two of the
// ladder points are outputs of the automaton; lint lists the other points
// 7_i/8_i as unused, they are internal links only.
//
// Follows the paper's example: stages, ranks, inputs, outputs and the
// fragment drawings (the whole-network drawing is followed where the text
// and captions disagree on which latch drawing serves e1/e2).  Not built:
// the paper's final step, which replaces the AND gates of groups 4 and 5 by
// systems of long flip-flops with their own lateral test inputs; the drawing
// that defines those systems is not available, so groups 4 and 5 stay plain
// AND gates here, as in the intermediate network of the method.
module network2
    import delta_cfg_pkg::*;
(
    input  logic in6_1,            // constant 0 while operating
    input  logic c1, c1_n,         // first clock phase, two-rail
    input  logic c2, c2_n,         // second clock phase, two-rail
    input  logic x1, x1_n,         // input bit 1, two-rail
    input  logic x2, x2_n,         // input bit 2, two-rail
    input  logic in9, in10, in11, in12,   // lateral test inputs
    output logic out13, out14,            // lateral test outputs
    output logic y1, y2
);
    localparam int unsigned N = 29;
    localparam int unsigned K = 9;

    // input numbering of the example
    localparam int C1N = 2, C1 = 3, X2N = 4, X2 = 5, X1N = 6, X1 = 7, C2N = 8, C2 = 9;

    function automatic delta_cfg_t build();
        delta_cfg_t c = '0;
        term_x_t tx;
        term_l_t tl;
        // e3, e4: slave latches, D from the master latches' 2-gate outputs
        c = add_latch_t4(c, 1, '0, sel_or(21), sel_in(C2), sel_in(C2N));
        c = add_latch_t4(c, 6, '0, sel_or(26), sel_in(C2), sel_in(C2N));
        // e5: f1 = ~x1 & x2 & q2            (q2 = 3_9)
        tx = '0; tl = '0;
        tx[1] = sel_in(X1N) | sel_in(X2); tl[1] = sel_or(9);
        c = add_andor_v(c, 11, 1, tx, tl);
        // e6: f2 = q1 | x1 | ~x2             (q1 = 3_4)
        tx = '0; tl = '0;
        tl[1] = sel_or(4); tx[2] = sel_in(X1); tx[3] = sel_in(X2N);
        c = add_andor_v(c, 13, 3, tx, tl);
        // e7: f3 = f1 | x1 & x2               (f1 = 3_11)
        tx = '0; tl = '0;
        tl[1] = sel_or(11); tx[2] = sel_in(X1) | sel_in(X2);
        c = add_andor_v(c, 17, 2, tx, tl);
        // e1, e2: master latches on f1 (3_11), f2 (3_13)
        c = add_latch_t3(c, 20, '0, sel_or(11), sel_in(C1), sel_in(C1N));
        c = add_latch_t3(c, 25, '0, sel_or(13), sel_in(C1), sel_in(C1N));
        return c;
    endfunction

    localparam delta_cfg_t CFG = build();

    // method V keeps every gate of group 1 two-input: no input 6_k may reach it
    if (CFG.g1x != '0) begin : g_two_input_chain
        $error("network2: a method V fragment drives a group-1 gate from an input 6_k");
    end

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

    assign y1 = o8[4];
    assign y2 = o8[17];
endmodule
