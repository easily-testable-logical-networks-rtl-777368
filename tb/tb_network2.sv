// tb_network2 -- checks the method V example network in its two modes.
//
// Start-up: in6_1 = 0 with the lateral inputs 9..12 at 0 parks every loop at
// 0, then 9..12 go to 1.  A check right after start-up confirms the zero
// loops hold their 0 (the fragments' AND-OR chains must end in 0).
// Operating mode (in6_1 = 0, lateral inputs 9..12 = 1): random two-rail input
// symbols are applied for many beats.  Each beat is: settle with both clocks
// low, compare y1, y2 with a reference automaton written from the
// automaton's equations, pulse c1 (masters load), check the state has not yet
// moved, pulse c2 (slaves load), update the reference state.
// Test mode (the back-door test): every non-lateral input at 1, first a
// 1->0->1 step on input 9 with 11=0, 12=1 must appear on output 14, then a
// 1->0->1 step on input 10 with 11=1, 12=0 must appear on output 13.  A
// stimulus error (one non-lateral input held at 0) must spoil the response.
// The automaton, the start-up order and the back-door sequence follow the
// example; the random beats, the reference model and the 200-unit settling
// time per step are this bench's choice.
module tb_network2;
    logic in6_1, c1, c1_n, c2, c2_n, x1, x1_n, x2, x2_n;
    logic in9, in10, in11, in12;
    logic out13, out14, y1, y2;

    int checks = 0, failures = 0;
    int beats = 0;

    network2 dut (.*);

    task automatic check(input string what, input logic got, input logic exp);
        checks++;
        if (got !== exp) begin
            failures++;
            $display("FAIL %s: got %0b expected %0b", what, got, exp);
        end
    endtask

    initial begin : watchdog
        #10000000;
        failures++;
        $display("FAIL watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    // reference automaton
    logic q;
    function automatic logic f1_of(logic a1, logic a2, logic s);
        return ~a1 & a2 & ~s;
    endfunction

    task automatic operating();
        // moment t0: all loops to their zero state
        in6_1 = 1'b0; in9 = 1'b0; in10 = 1'b0; in11 = 1'b0; in12 = 1'b0;
        c1 = 1'b0; c1_n = 1'b1; c2 = 1'b0; c2_n = 1'b1;
        #200;
        check("t0 ladder end 13 is 0", out13, 1'b0);
        check("t0 ladder end 14 is 0", out14, 1'b0);
        in9 = 1'b1; in10 = 1'b1; in11 = 1'b1; in12 = 1'b1;
        #200;
        // with x1 = 1 only e6's term x1 is active: y2 = f1 | x1 x2 = 0 when
        // x2 = 0 and f1 = 0 -- a zero loop that had not settled to 0 would
        // show up here as y2 = 1
        x1 = 1'b1; x1_n = 1'b0; x2 = 1'b0; x2_n = 1'b1;
        #200;
        check("zero loops hold after t0 (y2)", y2, 1'b0);
    endtask

    task automatic beat(input logic a1, input logic a2, input bit do_check);
        x1 = a1; x1_n = ~a1; x2 = a2; x2_n = ~a2;
        #200;
        if (do_check) begin
            check($sformatf("beat %0d y1", beats), y1, q);
            check($sformatf("beat %0d y2", beats), y2, f1_of(a1, a2, q) | (a1 & a2));
        end
        c1 = 1'b1; c1_n = 1'b0; #200;
        c1 = 1'b0; c1_n = 1'b1; #200;
        if (do_check) check($sformatf("beat %0d y1 held after c1", beats), y1, q);
        c2 = 1'b1; c2_n = 1'b0; #200;
        c2 = 1'b0; c2_n = 1'b1; #200;
        q = f1_of(a1, a2, q);
        beats++;
    endtask

    // back-door test; returns the six observed responses packed
    task automatic backdoor(input int bad_input, output logic [5:0] resp);
        {in6_1, c1_n, c1, x2_n, x2, x1_n, x1, c2_n, c2} = '1;
        if (bad_input >= 1) begin
            logic [9:1] v;
            v = '1;
            v[bad_input] = 1'b0;
            {c2, c2_n, x1, x1_n, x2, x2_n, c1, c1_n, in6_1} = v;
        end
        // t1..t3
        in11 = 1'b0; in12 = 1'b1; in9 = 1'b1; in10 = 1'b1; #200;
        resp[0] = out14;
        in9 = 1'b0; #200; resp[1] = out14;
        in9 = 1'b1; #200; resp[2] = out14;
        // t4..t6
        in11 = 1'b1; in12 = 1'b0; in9 = 1'b1; in10 = 1'b1; #200;
        resp[3] = out13;
        in10 = 1'b0; #200; resp[4] = out13;
        in10 = 1'b1; #200; resp[5] = out13;
    endtask

    initial begin
        logic [5:0] r;
        q = 1'b0;
        x1 = 1'b1; x1_n = 1'b0; x2 = 1'b0; x2_n = 1'b1;
        operating();
        beat(1'b1, 1'b0, 1'b0);          // brings the state to q1 = 0
        for (int b = 0; b < 200; b++)
            beat(1'($urandom_range(1)), 1'($urandom_range(1)), 1'b1);
        // x = 10 clears the state, then x = 01 sets it and x = 01 clears it
        beat(1'b1, 1'b0, 1'b1);
        beat(1'b0, 1'b1, 1'b1);
        check("state set by x=01", y1, 1'b1);
        beat(1'b0, 1'b1, 1'b1);
        check("state cleared by x=01 from q=1", y1, 1'b0);

        // ---- back-door test, fault-free stimuli ----
        backdoor(0, r);
        check("T t1 14", r[0], 1'b1);
        check("T t2 14", r[1], 1'b0);
        check("T t3 14", r[2], 1'b1);
        check("T t4 13", r[3], 1'b1);
        check("T t5 13", r[4], 1'b0);
        check("T t6 13", r[5], 1'b1);
        // ---- a wrong 0 on any non-lateral input is detected ----
        for (int k = 1; k <= 9; k++) begin
            backdoor(k, r);
            checks++;
            if (r == 6'b101101) begin
                failures++;
                $display("FAIL stimulus error on 6_%0d not detected", k);
            end
        end
        // ---- back to work: the automaton runs again after a re-init beat ----
        operating();
        beat(1'b1, 1'b0, 1'b0);
        q = 1'b0;
        for (int b = 0; b < 50; b++)
            beat(1'($urandom_range(1)), 1'($urandom_range(1)), 1'b1);
        $display("beats run: %0d", beats);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
