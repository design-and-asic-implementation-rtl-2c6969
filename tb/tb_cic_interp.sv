// tb_cic_interp: checks the 5-stage CIC interpolator by 20.
//
// The testbench makes its own strobes with the design's rate ratio: a
// high-rate tick every 2 master cycles and a low-rate tick on every 20th of
// them (the rate change, not the absolute rate, is what the filter sees).
// A reference model written here with 64-bit integers runs the comb,
// zero-stuffing and integrator equations; after every high-rate tick the
// output must equal sat14(integ5 >>> 18). Random input, a DC level and a
// full-scale DC level are applied; for DC the output must settle to
// floor(X * 20^4 / 2^18) (the DC gain of 0.61 keeps it in range). An
// isolated step must reach the output after five low-rate ticks (the one
// that loads the combs counted as the first) and then five high-rate ticks
// (the one that takes the comb output counted as the first), i.e. on
// master edge 5*PL + 4*PH after the loading edge (seen on the last integrator,
// since the first output samples are too small to show after the shift).
`timescale 1ns/1ps
module tb_cic_interp;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    localparam int PH = 2, PL = 40;

    logic clk = 0, rst = 1;
    int k = 0;
    rate_t r_lo, r_hi;
    sample_t x, y;
    int checks = 0, failures = 0;

    always #7.8125 clk = ~clk;
    always @(posedge clk) k <= rst ? 0 : k + 1;
    always_comb begin
        r_hi.tick = !rst && (k % PH == 0);  r_hi.fd = r_hi.tick;  r_hi.ctrl = !rst && (k % PH == 1);
        r_lo.tick = !rst && (k % PL == 0);  r_lo.fd = r_lo.tick;  r_lo.ctrl = !rst && (k % PL == PL/2);
    end

    cic_interp dut (.clk, .rst, .r_lo, .r_hi, .x, .y);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    longint cm [5], dl [5], ig [5];
    initial for (int i = 0; i < 5; i++) begin cm[i] = 0; dl[i] = 0; ig[i] = 0; end

    always @(posedge clk) if (!rst) begin
        longint cm_o [5], ig_o [5], cin;
        cm_o = cm; ig_o = ig;
        if (r_lo.tick) begin
            for (int i = 0; i < 5; i++) begin
                cin   = (i == 0) ? longint'(x) : cm_o[i-1];
                cm[i] = cin - dl[i];
                dl[i] = cin;
            end
        end
        if (r_hi.tick) begin
            ig[0] = ig_o[0] + (r_lo.tick ? cm_o[4] : 0);
            for (int i = 1; i < 5; i++) ig[i] = ig_o[i] + ig_o[i-1];
        end
    end

    always @(negedge clk) if (!rst && (k % PH == 1))
        check(longint'(y) == sat14(asr(ig[4], 18)), $sformatf("y=%0d exp %0d", y, sat14(asr(ig[4], 18))));

    task automatic lo_ticks(int n);
        repeat (n * PL) @(posedge clk);
    endtask

    initial begin
        int lat;
        x = '0;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        // step latency: wait for a low-rate tick, change x just after it
        @(posedge clk iff r_lo.tick);
        @(negedge clk) x = 14'sd4000;
        @(posedge clk iff r_lo.tick);      // edge 0: loads the comb section
        lat = 0;
        do begin
            @(posedge clk); lat++;
            @(negedge clk);
        end while (dut.integ[4] == 0 && lat < 20 * PL);
        // combs: edges 0, PL .. 4 PL; integrators: edges 5 PL .. 5 PL + 4 PH
        check(lat == 5 * PL + 4 * PH, $sformatf("step latency %0d edges, expected %0d", lat, 5 * PL + 4 * PH));
        lo_ticks(20);
        check(longint'(y) == asr(4000 * 160000, 18), $sformatf("DC gain: y=%0d exp %0d", y, asr(4000 * 160000, 18)));
        @(negedge clk) x = -14'sd3000;
        lo_ticks(20);
        check(longint'(y) == asr(-3000 * 160000, 18), $sformatf("DC gain neg: y=%0d", y));
        @(negedge clk) x = 14'sd8191;
        lo_ticks(20);
        check(longint'(y) == asr(8191 * 160000, 18), "full scale DC stays in range");
        for (int i = 0; i < 200; i++) begin
            @(negedge clk) x = sample_t'($urandom);
            lo_ticks(1);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (30000) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
