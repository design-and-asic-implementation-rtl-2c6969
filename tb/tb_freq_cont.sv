// tb_freq_cont: checks the kHz-to-phase-step conversion of freq_cont.
//
// Two instances, one for the 1280 kHz DDS and one for the 64 kHz DDS, get
// random and corner frequency settings. The expected step is
// floor(f * 256 / fs) mod 256, worked out here; the register must only
// move on a tick and must clear on reset. Known points: 320 kHz -> 64,
// 105 kHz -> 21, 200 kHz -> 40, 500 kHz -> 100, 20 kHz at 64 kHz -> 80.
`timescale 1ns/1ps
module tb_freq_cont;
    import duc_ddc_pkg::*;

    logic clk = 0, rst = 1, tick = 0;
    freq_t f;
    phase_t step_hi, step_lo;
    int checks = 0, failures = 0;

    always #7.8125 clk = ~clk;

    freq_cont                 dut_hi (.clk, .rst, .tick, .freq_khz(f), .step(step_hi));
    freq_cont #(.FS_KHZ(64))  dut_lo (.clk, .rst, .tick, .freq_khz(f), .step(step_lo));

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; $display("FAIL: %s", what); end
    endtask

    task automatic apply(int fk);
        int exp_hi, exp_lo;
        phase_t old_hi, old_lo;
        @(negedge clk) begin f = freq_t'(fk); tick = 0; end
        old_hi = step_hi; old_lo = step_lo;
        @(negedge clk);
        check(step_hi == old_hi && step_lo == old_lo, "no change without tick");
        tick = 1;
        @(negedge clk) tick = 0;
        exp_hi = ((fk * 256) / 1280) % 256;
        exp_lo = ((fk * 256) / 64) % 256;
        check(step_hi == phase_t'(exp_hi), $sformatf("f=%0d hi step %0d exp %0d", fk, step_hi, exp_hi));
        check(step_lo == phase_t'(exp_lo), $sformatf("f=%0d lo step %0d exp %0d", fk, step_lo, exp_lo));
    endtask

    initial begin
        f = '0;
        repeat (2) @(posedge clk);
        @(negedge clk) rst = 0;
        apply(320); check(step_hi == 64, "320 kHz -> 64");
        apply(105); check(step_hi == 21, "105 kHz -> 21");
        apply(200); check(step_hi == 40, "200 kHz -> 40");
        apply(500); check(step_hi == 100, "500 kHz -> 100");
        apply(20);  check(step_lo == 80, "20 kHz at 64 kHz -> 80");
        apply(0);
        apply(16383);
        for (int i = 0; i < 200; i++) apply(int'($urandom_range(0, 16383)));
        @(negedge clk) rst = 1;
        @(negedge clk) rst = 0;
        check(step_hi == 0 && step_lo == 0, "reset clears");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (5000) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
