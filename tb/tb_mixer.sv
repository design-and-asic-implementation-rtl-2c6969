// tb_mixer: checks the registered multiplication of the mixer.
//
// Random and corner 14-bit samples are multiplied by random and corner
// 8-bit sine words. One tick after the operands are applied, p must be the
// exact signed product and y the product shifted right by 7 (floor); with
// no tick the outputs must hold.
`timescale 1ns/1ps
module tb_mixer;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1, tick = 0;
    sample_t a, y;
    sine_t b;
    logic signed [21:0] p;
    int checks = 0, failures = 0;

    always #7.8125 clk = ~clk;

    mixer dut (.clk, .rst, .tick, .a, .b, .p, .y);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
    endtask

    task automatic one(int av, int bv);
        longint e;
        @(negedge clk) begin a = sample_t'(av); b = sine_t'(bv); tick = 1; end
        @(negedge clk) tick = 0;
        e = longint'(av) * longint'(bv);
        check(longint'(p) == e, $sformatf("%0d*%0d = %0d exp %0d", av, bv, p, e));
        check(longint'(y) == asr(e, 7), $sformatf("y %0d exp %0d", y, asr(e, 7)));
        @(negedge clk) begin a = ~a; b = ~b; end
        @(negedge clk);
        check(longint'(p) == e, "holds without tick");
    endtask

    initial begin
        a = '0; b = '0;
        repeat (2) @(posedge clk);
        @(negedge clk) rst = 0;
        check(p == 0, "reset state");
        one(8191, 127); one(-8192, 127); one(-8192, -127); one(8191, -127);
        one(0, 55); one(1, 1); one(-1, 1); one(-1, -1);
        for (int i = 0; i < 500; i++)
            one(int'($urandom_range(0, 16383)) - 8192, int'($urandom_range(0, 254)) - 127);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (10000) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
