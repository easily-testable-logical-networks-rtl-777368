// tb_lff_testchip -- end-to-end test of the top level at its default size.
//
// How it works: both example networks are run in lockstep from the same
// two-rail symbols and clocks and compared beat by beat with one reference
// automaton (f1 = ~x1 x2 ~q1 is the next state, y1 = q1, y2 = f1 | x1 x2,
// network 1's ban output y3 = 0).  Network 2 is started from its zero state
// (moment t0 of its start-up); network 1 from a clearing beat.  Then both
// networks go through the back-door test together, with every single
// stimulus error (one non-lateral input held at 0) which must spoil the
// response, and come back to work.  The AND, OR and comparator units are
// driven with directed and random vectors at the same time.
//
// Each mechanism is counted: state set, state cleared, state held over a
// c1 pulse, y2 = 1 from the x1 x2 term, y2 = 1 from f1, ban output at 0
// and raised by a broken input rail pair, zero-loop start-up,
// back-door pass for each network, stimulus error caught for each network,
// AND true/false, OR true/false, comparator match / no match.  A mechanism
// whose count stays 0 is a failure.  Every step waits 200 time units (the
// gate delay is 1).  The top is instantiated without parameter overrides.
module tb_lff_testchip
    import delta_cfg_pkg::*;
;
    localparam int unsigned FN = 8;

    logic          x1, x1_n, x2, x2_n, c1, c1_n, c2, c2_n;
    lateral_in_t   n1_lat_in, n2_lat_in;
    lateral_out_t  n1_lat_out, n2_lat_out;
    logic          n1_y1, n1_y2, n1_y3, n2_y1, n2_y2;
    logic [FN:1]   and_x, or_x;
    logic          and_y, or_y;
    logic [2*FN:1] cmp_x;
    logic          cmp_a1, cmp_a2, cmp_b1, cmp_b2;

    lff_testchip dut (.*);

    int checks = 0, failures = 0;

    // mechanism counters
    typedef enum int {
        M_SET, M_CLEAR, M_HOLD, M_Y2_AND, M_Y2_F1, M_BAN, M_BAN_RAISED, M_ZERO_START,
        M_BD1, M_BD2, M_ERR1, M_ERR2,
        M_AND1, M_AND0, M_OR1, M_OR0, M_CMP_HIT, M_CMP_MISS, M_LAST
    } mech_e;
    int mech [M_LAST];

    task automatic check(input string what, input logic got, input logic exp);
        checks++;
        if (got !== exp) begin
            failures++;
            $display("FAIL %s: got %0b expected %0b", what, got, exp);
        end
    endtask

    initial begin : watchdog
        #20000000;
        failures++;
        $display("FAIL watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    // ---------------- automaton part ----------------
    logic q;
    int   beats = 0;

    function automatic logic f1_of(logic a1, logic a2, logic s);
        return ~a1 & a2 & ~s;
    endfunction

    task automatic set_x(input logic a1, input logic a2);
        x1 = a1; x1_n = ~a1; x2 = a2; x2_n = ~a2;
    endtask

    task automatic clocks_idle();
        c1 = 1'b0; c1_n = 1'b1; c2 = 1'b0; c2_n = 1'b1;
    endtask

    // operating mode for both; network 2 passes through its t0 zero state
    task automatic operating();
        clocks_idle();
        n1_lat_in = '{zero6_1: 1'b0, in9: 1'b1, in10: 1'b1, in11: 1'b1, in12: 1'b1};
        n2_lat_in = '0;
        #200;
        check("net2 t0 out13", n2_lat_out.out13, 1'b0);
        check("net2 t0 out14", n2_lat_out.out14, 1'b0);
        n2_lat_in = '{zero6_1: 1'b0, in9: 1'b1, in10: 1'b1, in11: 1'b1, in12: 1'b1};
        #200;
        set_x(1'b1, 1'b0);
        #200;
        check("net2 zero loops hold after t0", n2_y2, 1'b0);
        if (n2_y2 === 1'b0) mech[M_ZERO_START]++;
    endtask

    task automatic beat(input logic a1, input logic a2, input bit do_check);
        logic y2_exp;
        set_x(a1, a2);
        #200;
        y2_exp = f1_of(a1, a2, q) | (a1 & a2);
        if (do_check) begin
            check($sformatf("beat %0d net1 y1", beats), n1_y1, q);
            check($sformatf("beat %0d net2 y1", beats), n2_y1, q);
            check($sformatf("beat %0d net1 y2", beats), n1_y2, y2_exp);
            check($sformatf("beat %0d net2 y2", beats), n2_y2, y2_exp);
            check($sformatf("beat %0d net1 y3", beats), n1_y3, 1'b0);
            if (n1_y3 === 1'b0) mech[M_BAN]++;
            if (y2_exp && n1_y2 === 1'b1 && n2_y2 === 1'b1) begin
                if (a1 & a2) mech[M_Y2_AND]++;
                else         mech[M_Y2_F1]++;
            end
        end
        c1 = 1'b1; c1_n = 1'b0; #200;
        c1 = 1'b0; c1_n = 1'b1; #200;
        if (do_check) begin
            check($sformatf("beat %0d net1 y1 held over c1", beats), n1_y1, q);
            check($sformatf("beat %0d net2 y1 held over c1", beats), n2_y1, q);
            if (n1_y1 === q && n2_y1 === q && f1_of(a1, a2, q) != q) mech[M_HOLD]++;
        end
        c2 = 1'b1; c2_n = 1'b0; #200;
        c2 = 1'b0; c2_n = 1'b1; #200;
        if (do_check) begin
            logic nq;
            nq = f1_of(a1, a2, q);
            check($sformatf("beat %0d net1 next state", beats), n1_y1, nq);
            check($sformatf("beat %0d net2 next state", beats), n2_y1, nq);
            if (n1_y1 === nq && n2_y1 === nq) begin
                if (!q && nq) mech[M_SET]++;
                if (q && !nq) mech[M_CLEAR]++;
            end
        end
        q = f1_of(a1, a2, q);
        beats++;
    endtask

    // back-door test of both networks at once.  bad: 0 none, 1 net1's 6_1,
    // 2..9 shared input 6_k (the in6 order of the networks), 10 net2's 6_1.
    task automatic backdoor(input int bad, output logic [5:0] r1, output logic [5:0] r2);
        logic [9:2] v;
        v = '1;
        if (bad >= 2 && bad <= 9) v[bad] = 1'b0;
        {c2, c2_n, x1, x1_n, x2, x2_n, c1, c1_n} = v;
        n1_lat_in.zero6_1 = (bad != 1);
        n2_lat_in.zero6_1 = (bad != 10);
        // t1..t3: step on 9 must appear on 14
        {n1_lat_in.in11, n1_lat_in.in12, n1_lat_in.in9, n1_lat_in.in10} = 4'b0111;
        {n2_lat_in.in11, n2_lat_in.in12, n2_lat_in.in9, n2_lat_in.in10} = 4'b0111;
        #200; r1[0] = n1_lat_out.out14; r2[0] = n2_lat_out.out14;
        n1_lat_in.in9 = 1'b0; n2_lat_in.in9 = 1'b0;
        #200; r1[1] = n1_lat_out.out14; r2[1] = n2_lat_out.out14;
        n1_lat_in.in9 = 1'b1; n2_lat_in.in9 = 1'b1;
        #200; r1[2] = n1_lat_out.out14; r2[2] = n2_lat_out.out14;
        // t4..t6: step on 10 must appear on 13
        {n1_lat_in.in11, n1_lat_in.in12, n1_lat_in.in9, n1_lat_in.in10} = 4'b1011;
        {n2_lat_in.in11, n2_lat_in.in12, n2_lat_in.in9, n2_lat_in.in10} = 4'b1011;
        #200; r1[3] = n1_lat_out.out13; r2[3] = n2_lat_out.out13;
        n1_lat_in.in10 = 1'b0; n2_lat_in.in10 = 1'b0;
        #200; r1[4] = n1_lat_out.out13; r2[4] = n2_lat_out.out13;
        n1_lat_in.in10 = 1'b1; n2_lat_in.in10 = 1'b1;
        #200; r1[5] = n1_lat_out.out13; r2[5] = n2_lat_out.out13;
    endtask

    localparam logic [5:0] GOOD = 6'b101101;   // t6..t1 = 1,0,1,1,0,1

    // ---------------- function units ----------------
    task automatic units(input logic [FN:1] va, input logic [FN:1] vo,
                         input logic [2*FN:1] vc);
        logic pre_step, m0, m1;
        and_x = va; or_x = vo;
        cmp_x = vc; cmp_a1 = 1'b0; cmp_a2 = 1'b0;
        #200;
        check($sformatf("AND of %b", va), and_y, &va);
        if (and_y === (&va)) mech[(&va) ? M_AND1 : M_AND0]++;
        check($sformatf("OR of %b", vo), or_y, |vo);
        if (or_y === (|vo)) mech[(|vo) ? M_OR1 : M_OR0]++;
        // comparator, pattern 0 then pattern 1
        cmp_a2 = 1'b1; #200; pre_step = cmp_b1;
        cmp_a1 = 1'b1; #200; m0 = ~pre_step & cmp_b1;
        cmp_a1 = 1'b0; cmp_a2 = 1'b0; #200;
        cmp_a1 = 1'b1; #200; pre_step = cmp_b2;
        cmp_a2 = 1'b1; #200; m1 = ~pre_step & cmp_b2;
        check($sformatf("compare %b with 0..0", vc), m0, vc == '0);
        check($sformatf("compare %b with 1..1", vc), m1, vc == '1);
        if (m0 === (vc == '0) && m1 === (vc == '1))
            mech[(m0 | m1) ? M_CMP_HIT : M_CMP_MISS]++;
    endtask

    task automatic run_units();
        logic [FN:1] v;
        units('1, '0, '0);
        units('0, '1, '1);
        for (int i = 1; i <= FN; i++) begin
            v = '0; v[i] = 1'b1;
            units(~v, v, {v, ~v});
        end
        for (int r = 0; r < 40; r++)
            units(FN'($urandom), FN'($urandom), (2*FN)'($urandom));
    endtask

    // ---------------- main ----------------
    initial begin
        logic [5:0] r1, r2;
        foreach (mech[i]) mech[i] = 0;
        and_x = '0; or_x = '0; cmp_x = '0; cmp_a1 = 1'b0; cmp_a2 = 1'b0;
        q = 1'b0;
        set_x(1'b1, 1'b0);
        operating();
        beat(1'b1, 1'b0, 1'b0);            // clearing beat for network 1
        fork
            for (int b = 0; b < 150; b++)
                beat(1'($urandom_range(1)), 1'($urandom_range(1)), 1'b1);
            run_units();
        join
        // a broken input rail pair (x1 and ~x1 both 1) must raise the ban
        // output of network 1; the clocks stay idle so the state is kept
        for (int s2 = 0; s2 < 2; s2++) begin
            x1 = 1'b1; x1_n = 1'b1; x2 = 1'b1; x2_n = 1'b0;
            #200;
            check("net1 ban output on broken x1 rails", n1_y3, 1'b1);
            if (n1_y3 === 1'b1) mech[M_BAN_RAISED]++;
            set_x(1'b1, 1'b1);
            #200;
            check("net1 ban output back to 0", n1_y3, 1'b0);
            check("net1 state kept over the rail error", n1_y1, q);
            beat(1'b0, 1'b1, 1'b1);          // flip the state, try again
        end
        // a directed clear / set / clear sequence
        beat(1'b1, 1'b0, 1'b1);
        beat(1'b0, 1'b1, 1'b1);
        check("net1 set by x=01", n1_y1, 1'b1);
        check("net2 set by x=01", n2_y1, 1'b1);
        beat(1'b0, 1'b1, 1'b1);
        check("net1 cleared by x=01 from q=1", n1_y1, 1'b0);
        check("net2 cleared by x=01 from q=1", n2_y1, 1'b0);

        // back-door test with good stimuli
        backdoor(0, r1, r2);
        for (int t = 0; t < 6; t++) begin
            check($sformatf("net1 back-door t%0d", t + 1), r1[t], GOOD[t]);
            check($sformatf("net2 back-door t%0d", t + 1), r2[t], GOOD[t]);
        end
        if (r1 === GOOD) mech[M_BD1]++;
        if (r2 === GOOD) mech[M_BD2]++;
        // every single stimulus error is caught by the networks it reaches
        for (int bad = 1; bad <= 10; bad++) begin
            backdoor(bad, r1, r2);
            if (bad <= 9) begin
                checks++;
                if (r1 === GOOD) begin
                    failures++;
                    $display("FAIL net1 missed stimulus error %0d", bad);
                end else mech[M_ERR1]++;
            end
            if (bad >= 2) begin
                checks++;
                if (r2 === GOOD) begin
                    failures++;
                    $display("FAIL net2 missed stimulus error %0d", bad);
                end else mech[M_ERR2]++;
            end
        end

        // back to work
        set_x(1'b1, 1'b0);
        operating();
        beat(1'b1, 1'b0, 1'b0);
        q = 1'b0;
        for (int b = 0; b < 40; b++)
            beat(1'($urandom_range(1)), 1'($urandom_range(1)), 1'b1);

        // every mechanism must have happened
        for (int m = 0; m < int'(M_LAST); m++) begin
            mech_e me;
            me = mech_e'(m);
            $display("mechanism %-12s count %0d", me.name(), mech[m]);
            checks++;
            if (mech[m] == 0) begin
                failures++;
                $display("FAIL mechanism %s never happened", me.name());
            end
        end
        $display("beats run: %0d", beats);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
