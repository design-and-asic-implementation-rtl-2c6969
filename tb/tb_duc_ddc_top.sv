// tb_duc_ddc_top: end-to-end run of the transmitter and receiver, all
// parameters at their defaults.
//
// The DUC's 1280 kHz output is fed straight back into the DDC's input, as
// if the DAC, the power line and the receiving ADC were ideal. A 4 kHz
// audio tone goes in at 64 kHz; the DUC moves it to 24 kHz (20 kHz
// intermediate carrier) and onto a 400 kHz carrier; the DDC, tuned to the
// same carrier, must bring back a 24 kHz tone at 64 kHz (about 75 sign
// changes per 100 output samples). Both halves are compared after every
// master edge with their reference models. The carrier of both is then
// retuned to 250 kHz, and a reset is applied in mid-run. (The receiver has
// a single real mixer, so the recovered level depends on the phase between
// the two carriers; with this loop-back at 320 kHz the two are exactly in
// quadrature and the tone cancels, which is why 400 kHz is used.)
//
// Each mechanism of the design is counted and must occur: the start-up
// hold (cycles with input but no ready), MAC windows (ctrl pulses) at both
// rates, interpolation (DUC outputs per audio sample = 20), decimation (DDC
// inputs per output sample = 20), carrier retuning, and the reset that
// forces the outputs to zero.
`timescale 1ns/1ps
module tb_duc_ddc_top;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1;
    sample_t duc_adc_in, duc_out, ddc_out;
    freq_t carrier;
    logic duc_clk64k, duc_clk1280k, duc_ready, ddc_clk64k, ddc_clk1280k, ddc_ready;
    longint exp_duc, exp_ddc;
    int checks = 0, failures = 0, k = 0;

    always #7.8125 clk = ~clk;
    always @(posedge clk) k <= rst ? 0 : k + 1;

    duc_ddc_top dut (
        .clk, .rst,
        .duc_adc_in, .duc_carrier_khz(carrier), .duc_out,
        .duc_clk64k, .duc_clk1280k, .duc_ready,
        .ddc_adc_in(duc_out), .ddc_carrier_khz(carrier), .ddc_out,
        .ddc_clk64k, .ddc_clk1280k, .ddc_ready
    );
    duc_model m_duc (.clk, .rst, .adc_in(longint'(duc_adc_in)), .carrier_khz(longint'(carrier)), .exp_out(exp_duc));
    ddc_model m_ddc (.clk, .rst, .adc_in(longint'(duc_out)), .carrier_khz(longint'(carrier)), .exp_out(exp_ddc));

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    // mechanism counters
    int n_hold = 0, n_mac64 = 0, n_mac1280 = 0, n_retune = 0, n_reset_zero = 0;
    int n_audio = 0, n_duc_upd = 0, n_ddc_in = 0, n_ddc_upd = 0, n_sign = 0;
    bit count_sign = 0;
    sample_t prev_ddc = '0;

    always @(negedge clk) begin
        if (!rst) begin
            check(longint'(duc_out) == exp_duc, $sformatf("duc_out=%0d exp %0d", duc_out, exp_duc));
            check(longint'(ddc_out) == exp_ddc, $sformatf("ddc_out=%0d exp %0d", ddc_out, exp_ddc));
            if (!duc_ready && duc_adc_in != 0) begin
                n_hold++;
                check(duc_out == 0 && ddc_out == 0, "outputs held during start-up");
            end
            if (dut.u_duc.r64.ctrl || dut.u_ddc.r64.ctrl) n_mac64++;
            if (dut.u_duc.r1280.ctrl && dut.u_ddc.r1280.ctrl) n_mac1280++;
            if (dut.u_duc.r64.tick) n_audio++;
            if (dut.u_duc.r1280.tick) n_duc_upd++;
            if (dut.u_ddc.r1280.tick) n_ddc_in++;
            if (dut.u_ddc.r64.tick) n_ddc_upd++;
            if (count_sign && ddc_out != prev_ddc && ((ddc_out < 0) != (prev_ddc < 0))) n_sign++;
        end
        prev_ddc = ddc_out;
    end

    int n = 0;
    always @(negedge clk) if (k % M64 == 700) begin
        duc_adc_in = sample_t'($rtoi(6000.0 * $sin(2.0 * 3.14159265358979 * real'(n) / 16.0)));
        n++;
    end

    task automatic periods(int p);
        repeat (p * M64) @(posedge clk);
    endtask

    initial begin
        duc_adc_in = 14'sd1000;
        carrier = 14'd400;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        periods(40);
        count_sign = 1;
        periods(100);
        count_sign = 0;
        $display("DDC output sign changes in 100 samples: %0d", n_sign);
        check(n_sign > 50 && n_sign < 100, "24 kHz tone recovered by the DDC");
        // the count window starts at reset, so allow one 64 kHz period of slack
        check(n_duc_upd > 20 * n_audio - 20 && n_duc_upd <= 20 * n_audio, $sformatf("interpolation by 20: %0d outputs for %0d inputs", n_duc_upd, n_audio));
        check(n_ddc_in > 20 * n_ddc_upd - 20 && n_ddc_in <= 20 * n_ddc_upd, $sformatf("decimation by 20: %0d inputs for %0d outputs", n_ddc_in, n_ddc_upd));
        @(negedge clk) carrier = 14'd500;
        n_retune++;
        periods(40);
        @(negedge clk) rst = 1;
        repeat (5) @(posedge clk);
        @(negedge clk) rst = 0;
        if (duc_out == 0 && ddc_out == 0) n_reset_zero++;
        check(duc_out == 0 && ddc_out == 0, "reset forces the outputs to zero");
        periods(20);
        $display("mechanisms: start-up hold %0d cycles, MAC windows 64 kHz %0d / 1280 kHz %0d, audio %0d, DUC out %0d, DDC in %0d, DDC out %0d, retunes %0d, resets %0d",
                 n_hold, n_mac64, n_mac1280, n_audio, n_duc_upd, n_ddc_in, n_ddc_upd, n_retune, n_reset_zero);
        check(n_hold > 0, "start-up hold happened");
        check(n_mac64 > 0 && n_mac1280 > 0, "MAC windows at both rates happened");
        check(n_audio > 0 && n_duc_upd > 0 && n_ddc_upd > 0, "rate conversion happened");
        check(n_retune > 0, "carrier retune happened");
        check(n_reset_zero > 0, "mid-run reset happened");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (300 * M64) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
