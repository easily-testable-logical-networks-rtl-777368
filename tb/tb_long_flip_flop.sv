// tb_long_flip_flop -- applies the two-vector test of the canonical long
// flip-flop and checks the responses on the two ends of the ladder.
//
// Phase A: side inputs of the 2-gates at 0, of the 3-gates at 1, input 2 of
// the last AND at 1.  A 0->1->0 step on input 1 of gate 1_1 must run down the
// whole chain to the output of gate 1_N+1 (and every 2-gate output follows).
// Phase B: side inputs swapped.  A step on input 2 of gate 1_N+1 must run up
// to the output of gate 1_1 (every 3-gate output follows).
// Hold: with all side inputs at 0 the ladder is one big loop and keeps
// whatever value it was left in until an end input opens it.
// Every step is separated by 100 ns of settling; a watchdog ends the run.
// The two test phases follow the long flip-flop's two-vector test; the
// hold check and the settling times are this bench's additions.
module tb_long_flip_flop;
    localparam int unsigned N = 22;

    logic         in1_first, in2_last;
    logic [N:1]   or2_side, or3_side;
    logic [N+1:1] and_side;
    logic         out_first, out_last;
    logic [N:1]   o2, o3;

    int checks = 0, failures = 0;

    long_flip_flop #(.N(N)) dut (.*);

    task automatic check(input string what, input logic got, input logic exp);
        checks++;
        if (got !== exp) begin
            failures++;
            $display("FAIL %s: got %0b expected %0b", what, got, exp);
        end
    endtask

    initial begin : watchdog
        #1000000;
        failures++;
        $display("FAIL watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        and_side = '1;
        // ---- phase A: step down the chain of gates 1 and 2 ----
        or2_side = '0; or3_side = '1; in2_last = 1'b1; in1_first = 1'b0;
        #100;
        check("A t1 out_last", out_last, 1'b0);
        check("A t1 o2 all 0", |o2, 1'b0);
        in1_first = 1'b1; #100;
        check("A t2 out_last", out_last, 1'b1);
        check("A t2 o2 all 1", &o2, 1'b1);
        check("A t2 out_first", out_first, 1'b1);
        // ---- hold: close every loop, then open only at the top end ----
        or3_side = '0; #100;
        check("hold 1 out_last", out_last, 1'b1);
        check("hold 1 out_first", out_first, 1'b1);
        in1_first = 1'b0; #100;
        check("release out_last", out_last, 1'b0);
        check("release o3 all 0", |o3, 1'b0);
        in1_first = 1'b1; #100;
        check("hold 0 out_last", out_last, 1'b0);
        check("hold 0 out_first", out_first, 1'b0);
        // ---- phase B: step up the chain of gates 1 and 3 ----
        or2_side = '1; or3_side = '0; in1_first = 1'b1; in2_last = 1'b0;
        #100;
        check("B t3 out_first", out_first, 1'b0);
        in2_last = 1'b1; #100;
        check("B t4 out_first", out_first, 1'b1);
        check("B t4 o3 all 1", &o3, 1'b1);
        in2_last = 1'b0; #100;
        check("B back out_first", out_first, 1'b0);
        // ---- an erroneous stimulus is caught: one 3-side input at 0 in phase A
        for (int k = 1; k <= N; k += 7) begin
            or2_side = '0; or3_side = '0; in2_last = 1'b1; in1_first = 1'b0; #100;
            or3_side = '1; or3_side[k] = 1'b0; #100;   // loop k now stuck at 0
            in1_first = 1'b1; #100;
            check($sformatf("stimulus error at 3_%0d blocks the step", k), out_last, 1'b0);
        end
        // ---- random side products on gates 1: the step is blocked exactly
        // when some gate 1_j on the path has a 0 there
        for (int r = 0; r < 40; r++) begin
            logic [N+1:1] s;
            s = '1;
            if (r % 2 == 1) s[$urandom_range(N+1, 1)] = 1'b0;
            and_side = s;
            or2_side = '0; or3_side = '1; in2_last = 1'b1; in1_first = 1'b0; #100;
            in1_first = 1'b1; #100;
            check($sformatf("and_side run %0d", r), out_last, &s);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
