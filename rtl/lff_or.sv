// lff_or -- an N-input OR built as a long flip-flop.
//
// How it works: a canonical long flip-flop whose OR gates 2_i have their
// side input tied to 1 and whose OR gates 3_i take x_i on their side input;
// input 2 of the last AND gate 1_N+1 is tied to 0 and input 1 of the first
// AND gate 1_1 to 1.  With every 2-gate at 1 each AND gate 1_i simply
// passes OR 3_i, and OR 3_i = x_i | 1_i+1, so the chain of gates 3 and 1
// accumulates x_N | ... | x_1 from the bottom (which starts at 0) up to the
// output of gate 1_1, which is y.
//
// Interface: x[1..N] in, y out.  Timing: combinational, valid about
// 2*N*TD after the last change of x.
//
// The gate types, the places of x and of the constants 1 and 0 follow the
// paper's drawing of the OR long flip-flop; input 1 of gate 1_1 carries an
// unlabelled arrow there and is tied to 1 here, the value the function needs.
// N has no value in the paper; 8 is this design's choice.
module lff_or #(
    parameter int unsigned N  = 8,
    parameter int unsigned TD = 1
) (
    input  logic [N:1] x,
    output logic       y
);
    logic         last;
    logic [N:1]   o2, o3;

    long_flip_flop #(.N(N), .TD(TD)) u_ladder (
        .in1_first(1'b1),
        .in2_last (1'b0),
        .or2_side ('1),
        .or3_side (x),
        .and_side ('1),
        .out_first(y),
        .out_last (last),
        .o2       (o2),
        .o3       (o3)
    );

    // the chain end and the OR outputs are internal points only
    logic unused;
    assign unused = ^{last, o2, o3};
endmodule
