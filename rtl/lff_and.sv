// lff_and -- an N-input AND built as a long flip-flop.
//
// How it works: the dual of lff_or.  The ladder's chain gates 1_1..1_N+1
// are OR gates and its side gates 2_i and 3_i are AND gates (the long
// flip-flop with every signal inverted, which the paper's "minimal long
// flip-flop" allows).  Gates 2_i have their side input tied to 0, gates 3_i
// take x_i, the last chain gate 1_N+1 has its input 2 tied to 1 and the first
// chain gate its input 1 tied to 0.  With every 2-gate at 0 each chain gate
// passes its 3-gate, and 3_i = x_i & 1_i+1, so the value x_1 & ... & x_N
// gathers from the bottom (which starts at 1) up to the output of the first
// chain gate, which is y.
//
// Interface: x[1..N] in, y out.  Timing: combinational, valid about
// 2*N*TD after the last change of x.  The loops 1_i -> 2_i -> 1_i+1 -> 3_i
// reported by lint are part of the long flip-flop structure.
//
// The gate types and the places of x, «0» and «1» follow the paper's
// drawing of the AND long flip-flop; the unlabelled input 1 of the first
// chain gate is tied to 0 here.  N = 8 is this design's choice.
module lff_and #(
    parameter int unsigned N  = 8,
    parameter int unsigned TD = 1
) (
    input  logic [N:1] x,
    output logic       y
);
    logic [N+1:1] g1;       // chain gates (OR)
    logic [N:1]   g2, g3;   // side gates (AND)

    assign #(TD) g1[1] = 1'b0 | g3[1];
    for (genvar i = 1; i <= N; i++) begin : g_stage
        assign #(TD) g2[i] = g1[i] & 1'b0;
        assign #(TD) g3[i] = g1[i+1] & x[i];
        if (i < N) begin : g_mid
            assign #(TD) g1[i+1] = g2[i] | g3[i+1];
        end else begin : g_end
            assign #(TD) g1[i+1] = g2[i] | 1'b1;
        end
    end

    assign y = g1[1];
endmodule
