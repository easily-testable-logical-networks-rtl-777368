// widened_lff -- the "widened long flip-flop" network Delta of length N and
// width K.
//
// What it does: a long flip-flop (AND gates 1_1..1_N+1, OR gates 2_i, 3_i)
// whose OR gates get their second input from two further groups of AND
// gates: gate 4_i drives input 2 of OR 2_i and gate 5_i drives input 2 of
// OR 3_i.  Input 1 of every gate 4_i is the lateral input 11 and input 1 of
// every gate 5_i is the lateral input 12.  The remaining inputs of gates 1, 4
// and 5 come from the non-lateral inputs 6_1..6_K or, for gates 4 and 5, from
// OR outputs elsewhere in the ladder.  The lateral inputs 9 (input 1 of 1_1)
// and 10 (input 2 of 1_N+1) and the lateral outputs 13 (output of 1_1) and 14
// (output of 1_N+1) are the "back door" through which the whole network is
// tested with two vectors: with 11=0, 12=1 and every 6_k=1 a step on 9 must
// appear on 14; with 11=1, 12=0 a step on 10 must appear on 13.
//
// Which links exist is set by bit-mask parameters (bit k or j set = the link
// exists):
//   G1X[j][k]  input 6_k feeds AND gate 1_j          (j = 1..N+1)
//   G4X[i][k]  input 6_k feeds AND gate 4_i
//   G5X[i][k]  input 6_k feeds AND gate 5_i
//   G4L[i][j]  output of OR 2_j (point 7_j) feeds AND gate 4_i, only j > i
//   G5L[i][j]  output of OR 3_j (point 8_j) feeds AND gate 5_i, only j < i
// With all masks zero the network is the bare widened ladder.
//
// Interface: in6[1..K], in9..in12 in; out13, out14, o7[1..N] (outputs of
// the 2-gates) and o8[1..N] (outputs of the 3-gates) out.
// Timing: asynchronous direct-current logic, every gate delayed by TD time
// units in simulation; read outputs after the network has settled.  State is held in the AND/OR loops of the ladder, so the
// combinational loops that lint reports are the storage of the design.
//
// Follows the paper: the gate groups, the lateral inputs/outputs and their
// connections.  The paper's structural definition in chapter III lets gate
// 4_i take 3-gate outputs and gate 5_i take 2-gate outputs, while chapter IV
// and every fragment drawing use 2-gate outputs into gates 4 and 3-gate
// outputs into gates 5 ("links 2->4 and 3->5"); this network follows the
// chapter IV form.  The same definition attaches input 9 and output 13 to
// gate 1_N, while the drawings and the test put them on gate 1_1; the
// drawings are followed.  Masks as parameters are this design's choice.
module widened_lff #(
    parameter int unsigned N = 7,
    parameter int unsigned K = 11,
    parameter int unsigned TD = 1,    // delay of one gate, in time units
    parameter logic [N+1:1][K:1] G1X = '0,
    parameter logic [N:1][K:1]   G4X = '0,
    parameter logic [N:1][K:1]   G5X = '0,
    parameter logic [N:1][N:1]   G4L = '0,
    parameter logic [N:1][N:1]   G5L = '0
) (
    input  logic [K:1] in6,
    input  logic       in9,
    input  logic       in10,
    input  logic       in11,
    input  logic       in12,
    output logic       out13,
    output logic       out14,
    output logic [N:1] o7,
    output logic [N:1] o8
);
    logic [N:1]   g4, g5;       // outputs of AND groups 4 and 5
    logic [N+1:1] g1_side;      // product of the 6_k inputs of each gate 1_j

    // Only the allowed internal links may be present.
    for (genvar i = 1; i <= N; i++) begin : g_rules
        for (genvar j = 1; j <= N; j++) begin : g_rule
            if (G4L[i][j] && j <= i) begin : g_bad4
                $error("widened_lff: link 2_%0d -> 4_%0d is not allowed", j, i);
            end
            if (G5L[i][j] && j >= i) begin : g_bad5
                $error("widened_lff: link 3_%0d -> 5_%0d is not allowed", j, i);
            end
        end
    end

    for (genvar j = 1; j <= N + 1; j++) begin : g_side1
        assign g1_side[j] = &(in6 | ~G1X[j]);
    end

    for (genvar i = 1; i <= N; i++) begin : g_groups45
        assign #(TD) g4[i] = in11 & (&(in6 | ~G4X[i])) & (&(o7 | ~G4L[i]));
        assign #(TD) g5[i] = in12 & (&(in6 | ~G5X[i])) & (&(o8 | ~G5L[i]));
    end

    long_flip_flop #(.N(N), .TD(TD)) u_ladder (
        .in1_first(in9),
        .in2_last (in10),
        .or2_side (g4),
        .or3_side (g5),
        .and_side (g1_side),
        .out_first(out13),
        .out_last (out14),
        .o2       (o7),
        .o3       (o8)
    );
endmodule
