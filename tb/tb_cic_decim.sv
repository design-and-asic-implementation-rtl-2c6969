// tb_cic_decim: checks the 5-stage CIC decimator by 20.
//
// Own strobes with the design's rate ratio: a high-rate tick every 2 master
// cycles and a low-rate tick on every 20th of them. A reference model
// written here runs the integrator and comb equations on 44-bit wrapping
// integers (as long DC inputs make the integrators wrap); after every
// low-rate tick the output must equal sat14(comb5 >>> 22). For a DC level
// X the output must settle to floor(X * 20^5 / 2^22). A step loaded on a
// high-rate tick that coincides with a low-rate tick passes the five
// integrators (edges 0 .. 4*PH) and is taken by the combs on the next
// low-rate tick, reaching the last comb on edge 5*PL.
`timescale 1ns/1ps
module tb_cic_decim;
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

    cic_decim dut (.clk, .rst, .r_lo, .r_hi, .x, .y);

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    function automatic longint w44(longint v);
        return (v <<< 20) >>> 20;
    endfunction

    longint cm [5], dl [5], ig [5];
    initial for (int i = 0; i < 5; i++) begin cm[i] = 0; dl[i] = 0; ig[i] = 0; end

    always @(posedge clk) if (!rst) begin
        longint cm_o [5], ig_o [5], cin;
        cm_o = cm; ig_o = ig;
        if (r_hi.tick) begin
            ig[0] = w44(ig_o[0] + longint'(x));
            for (int i = 1; i < 5; i++) ig[i] = w44(ig_o[i] + ig_o[i-1]);
        end
        if (r_lo.tick) begin
            for (int i = 0; i < 5; i++) begin
                cin   = (i == 0) ? ig_o[4] : cm_o[i-1];
                cm[i] = w44(cin - dl[i]);
                dl[i] = cin;
            end
        end
    end

    always @(negedge clk) if (!rst && (k % PL == 1))
        check(longint'(y) == sat14(asr(cm[4], 22)), $sformatf("y=%0d exp %0d", y, sat14(asr(cm[4], 22))));

    task automatic lo_ticks(int n);
        repeat (n * PL) @(posedge clk);
    endtask

    initial begin
        int lat;
        x = '0;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        lo_ticks(3);
        @(posedge clk iff r_lo.tick);
        repeat (PL - 1) @(posedge clk);
        @(negedge clk) x = 14'sd4000;       // loaded on the next edge, a low-rate tick
        @(posedge clk);                     // edge 0
        lat = 0;
        do begin
            @(posedge clk); lat++;
            @(negedge clk);
        end while (dut.comb[4] == 0 && lat < 20 * PL);
        check(lat == 5 * PL, $sformatf("step latency %0d edges, expected %0d", lat, 5 * PL));
        lo_ticks(20);
        check(longint'(y) == asr(4000 * 3200000, 22), $sformatf("DC gain: y=%0d exp %0d", y, asr(4000 * 3200000, 22)));
        @(negedge clk) x = -14'sd8192;
        lo_ticks(400);                      // long enough for the integrators to wrap
        check(longint'(y) == asr(-8192 * 3200000, 22), $sformatf("DC gain neg: y=%0d", y));
        for (int i = 0; i < 2000; i++) begin
            @(negedge clk) x = sample_t'($urandom);
            repeat (PH) @(posedge clk);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end

    initial begin
        repeat (40000) @(posedge clk);
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
    end
endmodule
