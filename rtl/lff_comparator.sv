// lff_comparator -- compares 2N variables with a pattern that is either
// all-0 or all-1, using one long flip-flop.
//
// How it works: the odd variables x_1, x_3, .. drive the side inputs of the
// OR gates 2_i and the even variables x_2, x_4, .. drive the side inputs of
// the OR gates 3_i through an inversion.  While the pattern is 0 the ladder
// sees exactly its first test vector (2-sides 0, 3-sides 1): then, with A2
// held at 1, a 0->1 step on A1 runs down to B1, and B1 stays 0 before it.
// While the pattern is 1 the ladder sees its second test vector
// (2-sides 1, 3-sides 0): with A1 held at 1 a 0->1 step on A2 runs up to B2.
// Any variable that differs from the pattern either blocks the step or lets
// the end output rise before the step, so the response is wrong; by the
// long flip-flop's test property this also holds for stuck-at faults of the
// comparator itself, which is thereby tested while it works.
//
// Interface: x[1..2N], A1 (input 1 of the first AND gate), A2 (input 2 of
// the last AND gate) in; B1 (output of the last AND gate), B2 (output of the
// first AND gate) out.  Timing: asynchronous, read B1/B2 after settling.
//
// The function and the signal names A1, A2, B1, B2 follow the paper.  Its
// drawing uses a different minimal long flip-flop variant whose exact
// gate-by-gate wiring is not reproduced; this design builds the same
// function on the canonical ladder with the inversion on the even inputs.
// N = 8 is this design's choice.
module lff_comparator #(
    parameter int unsigned N  = 8,
    parameter int unsigned TD = 1
) (
    input  logic [2*N:1] x,
    input  logic         a1,
    input  logic         a2,
    output logic         b1,
    output logic         b2
);
    logic [N:1] odd_x, even_x;
    logic [N:1] o2, o3;

    for (genvar i = 1; i <= N; i++) begin : g_split
        assign odd_x[i]  = x[2*i-1];
        assign #(TD) even_x[i] = ~x[2*i];
    end

    long_flip_flop #(.N(N), .TD(TD)) u_ladder (
        .in1_first(a1),
        .in2_last (a2),
        .or2_side (odd_x),
        .or3_side (even_x),
        .and_side ('1),
        .out_first(b2),
        .out_last (b1),
        .o2       (o2),
        .o3       (o3)
    );

    logic unused;
    assign unused = ^{o2, o3};
endmodule
