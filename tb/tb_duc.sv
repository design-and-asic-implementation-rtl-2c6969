// tb_duc: runs the up-converter against its reference model.
//
// A 4 kHz audio tone (amplitude 6000, 16 samples per period at 64 kHz) is
// applied, changed once per 64 kHz period, first on a 320 kHz carrier, then
// retuned to 200 and 500 kHz, with one reset in mid-run. After every master
// edge duc_out must equal the output of duc_model. Also checked: nothing
// comes out and ready stays low for the 500 start-up cycles; the output
// changes on 1280 kHz ticks only; it carries energy (is not stuck at 0).
// The latency of every stage is checked on the design's internal
// registers: one 64 kHz cycle each for input, mixer, highpass,
// compensation and the five combs (9), one 1280 kHz cycle each for the
// five integrators, the carrier mixer and the output highpass (7).
`timescale 1ns/1ps
module tb_duc;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1;
    sample_t adc_in, duc_out;
    freq_t carrier;
    logic clk64k, clk1280k, ready;
    longint exp_out;
    int checks = 0, failures = 0, k = 0, n_nonzero = 0, n_change = 0;

    always #7.8125 clk = ~clk;
    always @(posedge clk) k <= rst ? 0 : k + 1;

    duc dut (.clk, .rst, .adc_in, .carrier_khz(carrier), .duc_out, .clk64k, .clk1280k, .ready);
    duc_model ref_m (.clk, .rst, .adc_in(longint'(adc_in)), .carrier_khz(longint'(carrier)), .exp_out);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    sample_t prev_out = '0;
    always @(negedge clk) if (!rst) begin
        check(longint'(duc_out) == exp_out, $sformatf("duc_out=%0d exp %0d", duc_out, exp_out));
        if (k < START) check(!ready && duc_out == 0, "held during clock start-up");
        if (duc_out != prev_out) begin
            n_change++;
            check((k - 1) % M1280 == 0, "output changes only on 1280 kHz ticks");
        end
        if (duc_out != 0) n_nonzero++;
        prev_out = duc_out;
    end else prev_out = duc_out;


    // Stage-by-stage latency. Just after each tick, every stage must hold the
    // function of what the stage before it held just before that tick: one
    // sample clock per stage. Counted over the chain that gives the
    // 9 cycles of 64 kHz (input, mixer, highpass, compensation, five combs)
    // and 7 of 1280 kHz (five integrators, carrier mixer, highpass).
    function automatic longint w44(longint v);
        return (v <<< 20) >>> 20;
    endfunction
    longint pre_x, pre_if_sine, pre_if_mix, pre_if_hp, pre_comp, pre_cm [5];
    longint pre_ig [5], pre_up, pre_rf_sine, pre_rf_mix;
    longint if_h [24], hp_h [24], rf_h [24], last_comp, last_cm [5];
    int n_lat = 0;
    always @(negedge clk) begin
        if (rst) begin
            pre_x = 0; pre_if_sine = 0; pre_if_mix = 0; pre_if_hp = 0; pre_comp = 0;
            pre_up = 0; pre_rf_sine = 0; pre_rf_mix = 0; last_comp = 0;
            for (int i = 0; i < 24; i++) begin if_h[i] = 0; hp_h[i] = 0; rf_h[i] = 0; end
            for (int i = 0; i < 5; i++) begin pre_cm[i] = 0; pre_ig[i] = 0; last_cm[i] = 0; end
        end else begin
            bit t64, t1280;
            t64   = k - 1 >= START && (k - 1) % M64 == M64 / 2;
            t1280 = k - 1 >= START && (k - 1) % M1280 == 0;
            if (t64) begin
                for (int i = 23; i > 0; i--) begin if_h[i] = if_h[i-1]; hp_h[i] = hp_h[i-1]; end
                if_h[0] = pre_if_mix;
                hp_h[0] = pre_if_hp;
                check(dut.x_in == adc_in, "input register: one 64 kHz cycle");
                check(longint'(dut.if_prod) == pre_x * pre_if_sine, "20 kHz mixer: one 64 kHz cycle");
                check(longint'(dut.if_hp) == fir_ref(FIR_HPF_DUC_IF, if_h), "highpass: one 64 kHz cycle");
                check(longint'(dut.comp) == fir_ref(FIR_COMP_DUC, hp_h), "compensation: one 64 kHz cycle");
                check(longint'(dut.u_cic.comb[0]) == w44(pre_comp - last_comp), "comb 1: one 64 kHz cycle");
                last_comp = pre_comp;
                for (int i = 1; i < 5; i++) begin
                    check(longint'(dut.u_cic.comb[i]) == w44(pre_cm[i-1] - last_cm[i-1]),
                          $sformatf("comb %0d: one 64 kHz cycle", i + 1));
                    last_cm[i-1] = pre_cm[i-1];
                end
            end
            if (t1280) begin
                for (int i = 23; i > 0; i--) rf_h[i] = rf_h[i-1];
                rf_h[0] = pre_rf_mix;
                check(longint'(dut.u_cic.integ[0]) == w44(pre_ig[0] + (t64 ? pre_cm[4] : 0)),
                      "integrator 1: one 1280 kHz cycle");
                for (int i = 1; i < 5; i++)
                    check(longint'(dut.u_cic.integ[i]) == w44(pre_ig[i] + pre_ig[i-1]),
                          $sformatf("integrator %0d: one 1280 kHz cycle", i + 1));
                check(longint'(dut.rf_prod) == pre_up * pre_rf_sine, "carrier mixer: one 1280 kHz cycle");
                check(longint'(duc_out) == fir_ref(FIR_HPF_DUC_RF, rf_h), "output highpass: one 1280 kHz cycle");
                n_lat++;
            end
            pre_x = longint'(dut.x_in); pre_if_sine = longint'(dut.if_sine);
            pre_if_mix = longint'(dut.if_mix); pre_if_hp = longint'(dut.if_hp);
            pre_comp = longint'(dut.comp); pre_up = longint'(dut.up);
            pre_rf_sine = longint'(dut.rf_sine); pre_rf_mix = longint'(dut.rf_mix);
            for (int i = 0; i < 5; i++) begin
                pre_cm[i] = longint'(dut.u_cic.comb[i]);
                pre_ig[i] = longint'(dut.u_cic.integ[i]);
            end
        end
    end

    int n = 0;
    always @(negedge clk) if (k % M64 == 700) begin
        adc_in = sample_t'($rtoi(6000.0 * $sin(2.0 * 3.14159265358979 * real'(n) / 16.0)));
        n++;
    end

    task automatic periods(int p);
        repeat (p * M64) @(posedge clk);
    endtask

    initial begin
        adc_in = 14'sd1234;   // non-zero input during start-up
        carrier = 14'd320;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        periods(60);
        @(negedge clk) carrier = 14'd200;
        periods(30);
        @(negedge clk) rst = 1;
        repeat (5) @(posedge clk);
        @(negedge clk) rst = 0;
        check(duc_out == 0, "reset forces output to zero");
        periods(30);
        @(negedge clk) carrier = 14'd500;
        periods(30);
        check(n_nonzero > 1000, $sformatf("output active (%0d non-zero cycles)", n_nonzero));
        check(n_lat > 1000, "stage latencies checked");
        $display("stage latency checks on %0d ticks", n_lat);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (200 * M64) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
