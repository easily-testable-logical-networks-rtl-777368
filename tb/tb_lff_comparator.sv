// tb_lff_comparator -- runs the comparator through its two intervals for many
// input vectors.  Interval "pattern 0": A2 = 1, A1 = 0 then 1; the vector
// matches when B1 is 0 before and 1 after the step.  Interval "pattern 1":
// A1 = 1, A2 = 0 then 1; the vector matches when B2 is 0 before and 1 after.
// The testbench expects a match exactly when x is all-0 (first interval) or
// all-1 (second interval).  Every vector is applied after the ladder has been
// cleared (both end inputs at 0), 100 time units are allowed per step.
// The two intervals follow the long flip-flop's two-step test (pattern 0
// in the first, pattern 1 in the second); the vectors and N = 8 are this
// bench's choice.
module tb_lff_comparator;
    localparam int unsigned N = 8;
    logic [2*N:1] x;
    logic a1, a2, b1, b2;
    int checks = 0, failures = 0;
    int n_match = 0;

    lff_comparator #(.N(N)) dut (.*);

    task automatic run(input logic [2*N:1] v);
        logic pre_step, post_step, m0, m1;
        // interval with pattern 0
        x = v; a1 = 1'b0; a2 = 1'b0; #100;
        a2 = 1'b1; #100;
        pre_step = b1;
        a1 = 1'b1; #100;
        post_step = b1;
        m0 = ~pre_step & post_step;
        // interval with pattern 1
        a1 = 1'b0; a2 = 1'b0; #100;
        a1 = 1'b1; #100;
        pre_step = b2;
        a2 = 1'b1; #100;
        post_step = b2;
        m1 = ~pre_step & post_step;
        checks += 2;
        if (m0 !== (v == '0)) begin
            failures++;
            $display("FAIL pattern-0 compare of %b gave %0b", v, m0);
        end
        if (m1 !== (v == '1)) begin
            failures++;
            $display("FAIL pattern-1 compare of %b gave %0b", v, m1);
        end
        n_match += int'(m0) + int'(m1);
    endtask

    initial begin : watchdog
        #10000000;
        failures++;
        $display("FAIL watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        run('0);
        run('1);
        for (int i = 1; i <= 2 * N; i++) begin
            logic [2*N:1] v;
            v = '0; v[i] = 1'b1; run(v);
            v = '1; v[i] = 1'b0; run(v);
        end
        for (int r = 0; r < 100; r++) run((2*N)'($urandom));
        checks++;
        if (n_match != 2) begin
            failures++;
            $display("FAIL expected exactly two n_match, saw %0d", n_match);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
