// tb_widened_lff -- back-door test of a widened long flip-flop of length 7 and
// width 11 with a handful of internal links.
//
// Links set here: 6_3 -> gate 1_4, 6_2 -> gate 5_3, 6_4 -> gate 4_2,
// 2_5 -> gate 4_2, 3_1 -> gate 5_6; input 6_5 feeds nothing.
// The two-vector test (11=0,12=1 with a 1->0->1 step on 9 observed on 14;
// 11=1,12=0 with a 1->0->1 step on 10 observed on 13) must give 1,0,1 and
// 1,0,1 with every 6_k at 1; every 2-gate output must follow the first step
// and every 3-gate output the second.  A 0 on any 6_k that feeds a gate must
// spoil the response, a 0 on the unconnected 6_5 must not.
// The link set is this bench's choice (any legal set must pass the
// back-door test); the test sequence follows the widened ladder's test.
module tb_widened_lff;
    localparam int unsigned N = 7;
    localparam int unsigned K = 11;

    function automatic logic [N+1:1][K:1] mk_g1x();
        logic [N+1:1][K:1] m = '0;
        m[4][3] = 1'b1;
        return m;
    endfunction
    function automatic logic [N:1][K:1] mk_g4x();
        logic [N:1][K:1] m = '0;
        m[2][4] = 1'b1;
        return m;
    endfunction
    function automatic logic [N:1][K:1] mk_g5x();
        logic [N:1][K:1] m = '0;
        m[3][2] = 1'b1;
        return m;
    endfunction
    function automatic logic [N:1][N:1] mk_g4l();
        logic [N:1][N:1] m = '0;
        m[2][5] = 1'b1;
        return m;
    endfunction
    function automatic logic [N:1][N:1] mk_g5l();
        logic [N:1][N:1] m = '0;
        m[6][1] = 1'b1;
        return m;
    endfunction

    logic [K:1] in6;
    logic in9, in10, in11, in12, out13, out14;
    logic [N:1] o7, o8;

    int checks = 0, failures = 0;

    widened_lff #(.N(N), .K(K), .G1X(mk_g1x()), .G4X(mk_g4x()), .G5X(mk_g5x()),
                  .G4L(mk_g4l()), .G5L(mk_g5l())) dut (.*);

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

    task automatic backdoor(input int bad, output logic [5:0] r,
                            output logic all7, output logic all8);
        in6 = '1;
        if (bad > 0) in6[bad] = 1'b0;
        in11 = 1'b0; in12 = 1'b1; in9 = 1'b1; in10 = 1'b1; #100;
        r[0] = out14;
        in9 = 1'b0; #100; r[1] = out14;
        in9 = 1'b1; #100; r[2] = out14; all7 = &o7;
        in11 = 1'b1; in12 = 1'b0; #100;
        r[3] = out13;
        in10 = 1'b0; #100; r[4] = out13;
        in10 = 1'b1; #100; r[5] = out13; all8 = &o8;
    endtask

    initial begin
        logic [5:0] r;
        logic a7, a8;
        backdoor(0, r, a7, a8);
        check("t1 14", r[0], 1'b1);
        check("t2 14", r[1], 1'b0);
        check("t3 14", r[2], 1'b1);
        check("t4 13", r[3], 1'b1);
        check("t5 13", r[4], 1'b0);
        check("t6 13", r[5], 1'b1);
        check("2-gates all followed step 1", a7, 1'b1);
        check("3-gates all followed step 2", a8, 1'b1);
        for (int k = 1; k <= K; k++) begin
            bit connected;
            connected = (k == 2 || k == 3 || k == 4);
            backdoor(k, r, a7, a8);
            checks++;
            if ((r != 6'b101101) != connected) begin
                failures++;
                $display("FAIL 0 on 6_%0d: response %b, connected=%0b", k, r, connected);
            end
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
