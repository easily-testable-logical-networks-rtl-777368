// tb_lff_or -- drives the long flip-flop OR with all-0, all-1, one-hot,
// one-cold and random vectors and compares y with the reduction | x,
// allowing 100 time units of settling after each new vector.
// The expected value is the reduction OR computed by the testbench; the
// test vectors, the size N = 8 and the settling time are this bench's choice.
module tb_lff_or;
    localparam int unsigned N = 8;
    logic [N:1] x;
    logic       y;
    int checks = 0, failures = 0;

    lff_or #(.N(N)) dut (.*);

    task automatic apply(input logic [N:1] v);
        x = v;
        #100;
        checks++;
        if (y !== (| v)) begin
            failures++;
            $display("FAIL x=%b y=%0b expected %0b", v, y, | v);
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
        apply('0);
        apply('1);
        for (int i = 1; i <= N; i++) begin
            logic [N:1] v;
            v = '0; v[i] = 1'b1; apply(v);
            v = '1; v[i] = 1'b0; apply(v);
        end
        for (int r = 0; r < 200; r++) apply(N'($urandom));
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
