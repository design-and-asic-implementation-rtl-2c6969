// tb_dds: checks the phase accumulator and the sine table of the DDS.
//
// The step is changed several times (including 21, which at a 1280 kHz
// sample rate gives 105 kHz with about 12 phase steps per period). After
// every tick the phase must be the running sum of the steps mod 256 and the
// sine output round(127 sin(2 pi p / 256)) of the previous phase, worked
// out here with real arithmetic. A full sweep with step 1 visits every
// table entry. For step 21 the number of ticks between upward zero
// crossings of the sine must be 12 or 13 (1280/105 = 12.19).
`timescale 1ns/1ps
module tb_dds;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1, tick = 0;
    phase_t step, phase;
    sine_t sine;
    int checks = 0, failures = 0;
    int ph_model = 0;

    always #7.8125 clk = ~clk;

    dds dut (.clk, .rst, .tick, .step, .phase, .sine);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
    endtask

    int last_cross = -1, tick_no = 0, n_cross = 0;
    logic signed [7:0] prev_sine = 0;

    task automatic do_tick(bit measure);
        int old_ph;
        @(negedge clk) tick = 1;
        @(negedge clk) tick = 0;
        old_ph   = ph_model;
        ph_model = (ph_model + int'(step)) % 256;
        tick_no++;
        check(int'(phase) == ph_model, $sformatf("phase %0d exp %0d", phase, ph_model));
        check(longint'(sine) == sine_ref(old_ph), $sformatf("sine(%0d)=%0d exp %0d", old_ph, sine, sine_ref(old_ph)));
        if (measure && prev_sine < 0 && sine >= 0) begin
            if (last_cross >= 0) begin
                check((tick_no - last_cross) inside {12, 13}, $sformatf("105 kHz period %0d ticks", tick_no - last_cross));
                n_cross++;
            end
            last_cross = tick_no;
        end
        prev_sine = sine;
        // no change between ticks
        repeat (3) @(negedge clk);
        check(int'(phase) == ph_model, "phase holds between ticks");
    endtask

    initial begin
        step = 8'd1;
        repeat (2) @(posedge clk);
        @(negedge clk) rst = 0;
        check(phase == 0 && sine == 0, "reset state");
        for (int i = 0; i < 260; i++) do_tick(0);   // every table entry
        step = 8'd21;
        for (int i = 0; i < 200; i++) do_tick(1);
        check(n_cross >= 10, "105 kHz periods measured");
        step = 8'd80;
        for (int i = 0; i < 50; i++) do_tick(0);
        for (int j = 0; j < 5; j++) begin
            step = phase_t'($urandom);
            for (int i = 0; i < 40; i++) do_tick(0);
        end
        @(negedge clk) rst = 1;
        @(negedge clk) rst = 0;
        check(phase == 0 && sine == 0, "reset clears");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (20000) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
