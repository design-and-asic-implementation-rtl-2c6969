// tb_mac_fir: checks the MAC-based FIR filter with every coefficient set.
//
// The testbench makes its own sample-clock strobes: tick/fd every P master
// cycles and ctrl P/2 cycles after them, P = 50 (1280 kHz) for the five
// filters below and P = 1000 (64 kHz) for a sixth. Random samples, with
// full-scale alternating bursts that drive the output into saturation, are
// changed right after every tick and so taken on the following ctrl. On
// every fd the output must equal
//     sat14( (sum_k c[k] * x[n-k]) >>> 15 )
// computed here, x[n] being the sample of the period that this fd closes:
// one sample clock of latency. The MAC must
// be busy for exactly 24 master cycles after each ctrl, so that it ends
// within the 25-cycle half period of the 1280 kHz clock.
`timescale 1ns/1ps
module tb_mac_fir;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    localparam int NF = 5;
    localparam fir_sel_e SEL [NF] = '{FIR_HPF_DUC_IF, FIR_COMP_DUC, FIR_HPF_DUC_RF, FIR_HPF_DDC, FIR_COMP_DDC};

    logic clk = 0, rst = 1;
    int k = 0;
    rate_t r50, r1000;
    sample_t x;
    sample_t y [NF+1];
    logic busy [NF+1];
    int checks = 0, failures = 0, n_sat = 0, n_ops = 0;

    always #7.8125 clk = ~clk;
    always @(posedge clk) k <= rst ? 0 : k + 1;

    always_comb begin
        r50.tick   = !rst && (k % 50 == 0);
        r50.fd     = r50.tick;
        r50.ctrl   = !rst && (k % 50 == 25);
        r1000.tick = !rst && (k % 1000 == 0);
        r1000.fd   = r1000.tick;
        r1000.ctrl = !rst && (k % 1000 == 500);
    end

    for (genvar g = 0; g < NF; g++) begin : g_f
        mac_fir #(.FILTER(SEL[g])) dut (.clk, .rst, .rate(r50), .x, .y(y[g]), .busy(busy[g]));
    end
    mac_fir #(.FILTER(FIR_COMP_DUC)) dut_slow (.clk, .rst, .rate(r1000), .x, .y(y[NF]), .busy(busy[NF]));

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin failures++; if (failures < 20) $display("FAIL k=%0d: %s", k, what); end
    endtask

    longint h50 [24], h1000 [24];
    longint e50 [NF], e1000;
    int busy_len = 0;

    initial begin
        for (int i = 0; i < 24; i++) begin h50[i] = 0; h1000[i] = 0; end
        for (int i = 0; i < NF; i++) e50[i] = 0;
        e1000 = 0;
    end

    // Reference model, evaluated on the same edges as the design.
    always @(posedge clk) begin
        if (!rst && r50.ctrl) begin
            for (int i = 23; i > 0; i--) h50[i] = h50[i-1];
            h50[0] = longint'(x);
        end
        if (!rst && r50.fd) for (int i = 0; i < NF; i++) e50[i] = fir_ref(SEL[i], h50);
        if (!rst && r1000.ctrl) begin
            for (int i = 23; i > 0; i--) h1000[i] = h1000[i-1];
            h1000[0] = longint'(x);
        end
        if (!rst && r1000.fd) e1000 = fir_ref(FIR_COMP_DUC, h1000);
    end

    int sample_no = 0;
    always @(negedge clk) if (!rst) begin
        if (busy[0]) busy_len++;
        if (k % 50 == 25) begin
            if (sample_no > 1) check(busy_len == 24, $sformatf("MAC busy %0d cycles, expected 24", busy_len));
            busy_len = 0;
        end
        if (k % 50 == 0) begin
            for (int i = 0; i < NF; i++) begin
                check(longint'(y[i]) == e50[i], $sformatf("filter %0d y=%0d exp %0d", i, y[i], e50[i]));
                if (y[i] == 14'sh1fff || y[i] == -14'sh2000) n_sat++;
                n_ops++;
            end
            sample_no++;
            // next input: random, with full-scale alternating bursts
            if ((sample_no / 40) % 3 == 2) x = (sample_no % 2) ? 14'sh1fff : -14'sh2000;
            else                           x = sample_t'($urandom);
        end
        if (k % 1000 == 0) check(longint'(y[NF]) == e1000, $sformatf("slow filter y=%0d exp %0d", y[NF], e1000));
    end

    initial begin
        x = '0;
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        repeat (30 * 1000 + 10) @(posedge clk);
        check(n_sat > 0, "saturation exercised");
        $display("MAC operations %0d, saturated outputs %0d", n_ops, n_sat);
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
