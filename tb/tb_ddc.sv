// tb_ddc: runs the down-converter against its reference model.
//
// The 1280 kHz input is a 344 kHz tone (amplitude 5000) plus a DC offset of
// 1500 and a little random noise, i.e. a 24 kHz tone on a 320 kHz carrier.
// The DDC is tuned to 320 kHz, then retuned to 300 kHz, with one reset in
// mid-run. After every master edge ddc_out must equal the output of
// ddc_model. Also checked: held during the 500 start-up cycles, the output
// changes on 64 kHz ticks only, and a 24 kHz tone comes out: such a tone
// changes sign 48000 times a second, about 75 times in 100 output samples;
// more than 50 are required. The latency of every stage is checked on
// the design's internal registers: one 1280 kHz cycle each for input,
// mixer, highpass, compensation and the five integrators (9), one 64 kHz
// cycle for each of the five combs (5).
`timescale 1ns/1ps
module tb_ddc;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1;
    sample_t adc_in, ddc_out;
    freq_t carrier;
    logic clk64k, clk1280k, ready;
    longint exp_out;
    int checks = 0, failures = 0, k = 0, n_sign = 0;

    always #7.8125 clk = ~clk;
    always @(posedge clk) k <= rst ? 0 : k + 1;

    ddc dut (.clk, .rst, .adc_in, .carrier_khz(carrier), .ddc_out, .clk64k, .clk1280k, .ready);
    ddc_model ref_m (.clk, .rst, .adc_in(longint'(adc_in)), .carrier_khz(longint'(carrier)), .exp_out);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    sample_t prev_out = '0;
    bit count_sign = 0;
    always @(negedge clk) begin
        if (!rst) begin
            check(longint'(ddc_out) == exp_out, $sformatf("ddc_out=%0d exp %0d", ddc_out, exp_out));
            if (k < START) check(!ready && ddc_out == 0, "held during clock start-up");
            if (ddc_out != prev_out) begin
                check((k - 1) % M64 == M64 / 2, "output changes only on 64 kHz ticks");
                if (count_sign && ((ddc_out < 0) != (prev_out < 0))) n_sign++;
            end
        end
        prev_out = ddc_out;
    end


    // Stage-by-stage latency. Just after each tick, every stage must hold the
    // function of what the stage before it held just before that tick: one
    // sample clock per stage. Counted over the chain that gives the
    // 9 cycles of 1280 kHz (input, mixer, highpass, compensation, five
    // integrators) and 5 of 64 kHz (five combs).
    function automatic longint w44(longint v);
        return (v <<< 20) >>> 20;
    endfunction
    longint pre_x, pre_sine, pre_mix, pre_hp, pre_comp, pre_ig [5], pre_cm [5];
    longint mix_h [24], hp_h [24], last_ig4, last_cm [5];
    int n_lat = 0;
    always @(negedge clk) begin
        if (rst) begin
            pre_x = 0; pre_sine = 0; pre_mix = 0; pre_hp = 0; pre_comp = 0; last_ig4 = 0;
            for (int i = 0; i < 24; i++) begin mix_h[i] = 0; hp_h[i] = 0; end
            for (int i = 0; i < 5; i++) begin pre_ig[i] = 0; pre_cm[i] = 0; last_cm[i] = 0; end
        end else begin
            if (k - 1 >= START && (k - 1) % M1280 == 0) begin
                for (int i = 23; i > 0; i--) begin mix_h[i] = mix_h[i-1]; hp_h[i] = hp_h[i-1]; end
                mix_h[0] = pre_mix;
                hp_h[0]  = pre_hp;
                check(dut.x_in == adc_in, "input register: one 1280 kHz cycle");
                check(longint'(dut.prod) == pre_x * pre_sine, "mixer: one 1280 kHz cycle");
                check(longint'(dut.hp) == fir_ref(FIR_HPF_DDC, mix_h), "highpass: one 1280 kHz cycle");
                check(longint'(dut.comp) == fir_ref(FIR_COMP_DDC, hp_h), "compensation: one 1280 kHz cycle");
                check(longint'(dut.u_cic.integ[0]) == w44(pre_ig[0] + pre_comp), "integrator 1: one 1280 kHz cycle");
                for (int i = 1; i < 5; i++)
                    check(longint'(dut.u_cic.integ[i]) == w44(pre_ig[i] + pre_ig[i-1]),
                          $sformatf("integrator %0d: one 1280 kHz cycle", i + 1));
                n_lat++;
            end
            if (k - 1 >= START && (k - 1) % M64 == M64 / 2) begin
                check(longint'(dut.u_cic.comb[0]) == w44(pre_ig[4] - last_ig4), "comb 1: one 64 kHz cycle");
                last_ig4 = pre_ig[4];
                for (int i = 1; i < 5; i++) begin
                    check(longint'(dut.u_cic.comb[i]) == w44(pre_cm[i-1] - last_cm[i-1]),
                          $sformatf("comb %0d: one 64 kHz cycle", i + 1));
                    last_cm[i-1] = pre_cm[i-1];
                end
            end
            pre_x = longint'(dut.x_in); pre_sine = longint'(dut.lo_sine); pre_mix = longint'(dut.mix);
            pre_hp = longint'(dut.hp); pre_comp = longint'(dut.comp);
            for (int i = 0; i < 5; i++) begin
                pre_ig[i] = longint'(dut.u_cic.integ[i]);
                pre_cm[i] = longint'(dut.u_cic.comb[i]);
            end
        end
    end

    int n = 0;
    always @(negedge clk) if (k % M1280 == 30) begin
        adc_in = sample_t'($rtoi(1500.0 + 5000.0 * $sin(2.0 * 3.14159265358979 * 344.0 * real'(n) / 1280.0))
                           + int'($urandom_range(0, 40)) - 20);
        n++;
    end

    task automatic periods(int p);
        repeat (p * M64) @(posedge clk);
    endtask

    initial begin
        adc_in = 14'sd2222;
        carrier = 14'd320;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        periods(20);
        count_sign = 1;
        periods(100);
        count_sign = 0;
        $display("sign changes in 100 samples: %0d", n_sign);
        check(n_sign > 50, $sformatf("24 kHz tone at the output (%0d sign changes)", n_sign));
        @(negedge clk) carrier = 14'd300;
        periods(30);
        @(negedge clk) rst = 1;
        repeat (5) @(posedge clk);
        @(negedge clk) rst = 0;
        check(ddc_out == 0, "reset forces output to zero");
        periods(30);
        check(n_lat > 1000, "stage latencies checked");
        $display("stage latency checks on %0d ticks", n_lat);
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
