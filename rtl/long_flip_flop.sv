// long_flip_flop -- the canonical "long flip-flop" of length N.
//
// What it does: a ladder of two-input AND gates 1_1..1_N+1 and two-input
// OR gates 2_1..2_N and 3_1..3_N.  For every i the loop
//   1_i -> 2_i -> 1_i+1 -> 3_i -> 1_i
// is a small set/hold cell; the N loops overlap, so a 0->1 step put on
// input 1 of gate 1_1 can only travel down the chain of gates 1 and 2, and a
// step put on input 2 of gate 1_N+1 can only travel up the chain of gates
// 1 and 3.  Two test vectors on the side inputs (inputs 2 of the OR gates)
// therefore exercise every pole of the ladder, which is the property the
// whole design is built on.
//
// Interface (index i runs 1..N, gate 1 index j runs 1..N+1):
//   in1_first   input 1 of gate 1_1
//   in2_last    input 2 of gate 1_N+1
//   or2_side[i] input 2 of OR gate 2_i
//   or3_side[i] input 2 of OR gate 3_i
//   and_side[j] product of any further inputs of AND gate 1_j (all 1 for the
//               canonical two-input ladder; the general long flip-flop lets
//               gates 1_j have more inputs, which are ANDed in here)
//   out_first   output of gate 1_1,   out_last output of gate 1_N+1
//   o2[i], o3[i] outputs of the OR gates (the points 7_i and 8_i of the
//               widened network)
//
// Timing: pure direct-current logic, no clock.  Every gate is modelled with
// a delay of TD time units (ignored by synthesis), so a simulation behaves
// like the physical network: steps travel gate by gate, and outputs are
// valid once the network has settled ("halted") after the last input
// change, at most about 2*(N+1)*TD later.  The loops hold their state while
// the side inputs keep them closed.  Without the delay a zero-delay
// simulator can circle forever in the loops from a random start.
//
// The gate list and the links follow the paper's definition of the canonical
// long flip-flop exactly.  Folding extra inputs of gate 1_j into one
// and_side bit is this implementation's choice.
//
// The combinational loops reported by lint are the storage of this circuit:
// it is an asynchronous gate network whose state lives in AND/OR feedback
// loops, not in clocked flip-flops, so they are intended.
module long_flip_flop #(
    parameter int unsigned N  = 22,
    parameter int unsigned TD = 1     // delay of one gate, in time units
) (
    input  logic         in1_first,
    input  logic         in2_last,
    input  logic [N:1]   or2_side,
    input  logic [N:1]   or3_side,
    input  logic [N+1:1] and_side,
    output logic         out_first,
    output logic         out_last,
    output logic [N:1]   o2,
    output logic [N:1]   o3
);
    logic [N+1:1] g1;   // outputs of AND gates 1_j

    // gate 1_1: input 1 from outside, input 2 from OR gate 3_1
    assign #(TD) g1[1] = in1_first & o3[1] & and_side[1];

    for (genvar i = 1; i <= N; i++) begin : g_stage
        // gate 2_i: input 1 <- 1_i, input 2 <- side input
        assign #(TD) o2[i] = g1[i] | or2_side[i];
        // gate 3_i: input 1 <- 1_i+1, input 2 <- side input
        assign #(TD) o3[i] = g1[i+1] | or3_side[i];
        // gate 1_i+1: input 1 <- 2_i, input 2 <- 3_i+1 (or the outside for i = N)
        if (i < N) begin : g_mid
            assign #(TD) g1[i+1] = o2[i] & o3[i+1] & and_side[i+1];
        end else begin : g_end
            assign #(TD) g1[i+1] = o2[i] & in2_last & and_side[i+1];
        end
    end

    assign out_first = g1[1];
    assign out_last  = g1[N+1];
endmodule
