// lff_testchip -- top level: the two example automata of the design and the
// three long flip-flop function units, side by side.
//
// network1 (method IV) and network2 (method V) implement the same small
// automaton from the same two-rail input symbol <x1,x2> and the same
// two-phase two-rail clock <c1,c2>; each keeps its own lateral test pins, so
// either can be put through its back-door test or held in its start-up state
// on its own.  network1 also delivers the ban output y3.  Since both
// networks see the same inputs, their y1 and y2 must always agree once both
// have been loaded, which gives an outside cross-check.
// lff_and, lff_or and lff_comparator are the long flip-flop used as an
// N-input AND, an N-input OR and a 2N-variable pattern comparator.
//
// Interface: see the port list; lateral pins are bundled in the
// lateral_in_t / lateral_out_t structs of delta_cfg_pkg.
// Timing: everything is asynchronous gate logic; apply a change, wait for
// the network to settle (a few hundred gate delays covers the largest
// network), then read.  One automaton beat is a c1 pulse then a c2 pulse,
// never overlapping.
//
// Placing both networks and the function units on one top is this design's
// choice; the paper treats each of them on its own.
module lff_testchip
    import delta_cfg_pkg::*;
#(
    parameter int unsigned FN = 8     // inputs of the AND/OR units, half the comparator width
) (
    // automaton inputs, shared by both networks (two-rail)
    input  logic          x1, x1_n,
    input  logic          x2, x2_n,
    input  logic          c1, c1_n,
    input  logic          c2, c2_n,
    // network 1 (method IV)
    input  lateral_in_t   n1_lat_in,
    output lateral_out_t  n1_lat_out,
    output logic          n1_y1, n1_y2, n1_y3,
    // network 2 (method V)
    input  lateral_in_t   n2_lat_in,
    output lateral_out_t  n2_lat_out,
    output logic          n2_y1, n2_y2,
    // long flip-flop function units
    input  logic [FN:1]   and_x,
    output logic          and_y,
    input  logic [FN:1]   or_x,
    output logic          or_y,
    input  logic [2*FN:1] cmp_x,
    input  logic          cmp_a1, cmp_a2,
    output logic          cmp_b1, cmp_b2
);
    network1 u_net1 (
        .in6_1(n1_lat_in.zero6_1),
        .c1, .c1_n, .c2, .c2_n, .x1, .x1_n, .x2, .x2_n,
        .in9  (n1_lat_in.in9),
        .in10 (n1_lat_in.in10),
        .in11 (n1_lat_in.in11),
        .in12 (n1_lat_in.in12),
        .out13(n1_lat_out.out13),
        .out14(n1_lat_out.out14),
        .y1   (n1_y1),
        .y2   (n1_y2),
        .y3   (n1_y3)
    );

    network2 u_net2 (
        .in6_1(n2_lat_in.zero6_1),
        .c1, .c1_n, .c2, .c2_n, .x1, .x1_n, .x2, .x2_n,
        .in9  (n2_lat_in.in9),
        .in10 (n2_lat_in.in10),
        .in11 (n2_lat_in.in11),
        .in12 (n2_lat_in.in12),
        .out13(n2_lat_out.out13),
        .out14(n2_lat_out.out14),
        .y1   (n2_y1),
        .y2   (n2_y2)
    );

    lff_and #(.N(FN)) u_and (.x(and_x), .y(and_y));
    lff_or  #(.N(FN)) u_or  (.x(or_x),  .y(or_y));

    lff_comparator #(.N(FN)) u_cmp (
        .x (cmp_x),
        .a1(cmp_a1),
        .a2(cmp_a2),
        .b1(cmp_b1),
        .b2(cmp_b2)
    );
endmodule
