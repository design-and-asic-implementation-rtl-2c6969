// tb_clock_gen: checks the clock divider against the division rule.
//
// A cycle counter k restarts with every reset. From it the testbench works
// out, for every master cycle, what each output must be: ready from cycle
// 500 on, the 1280 kHz clock high for k mod 50 < 25, the 64 kHz clock high
// for k mod 1000 >= 500, tick/fd on the rising and ctrl on the falling
// edges, nothing before ready. It also counts 20 rising edges of clk1280k
// per period of clk64k, and applies a second reset in mid-run.
`timescale 1ns/1ps
module tb_clock_gen;
    import duc_ddc_pkg::*;
    import tb_pkg::*;

    logic clk = 0, rst = 1;
    logic clk64k, clk1280k, ready;
    rate_t r64, r1280;
    int checks = 0, failures = 0;
    int k = 0;

    always #7.8125 clk = ~clk;

    clock_gen dut (.clk, .rst, .clk64k, .clk1280k, .r64, .r1280, .ready);

    always @(posedge clk) k <= rst ? 0 : k + 1;

    task automatic check(bit ok, string what);
        checks++;
        if (!ok) begin
            failures++;
            if (failures < 20) $display("FAIL k=%0d: %s", k, what);
        end
    endtask

    int n1280_rise = 0, n64_rise = 0;
    logic c1280_q = 0, c64_q = 0;
    always @(negedge clk) begin
        if (!rst) begin
            bit rdy;
            rdy = (k >= START);
            check(ready == rdy, "ready");
            check(clk1280k == ((k % M1280) < M1280/2), "clk1280k level");
            check(clk64k   == ((k % M64) >= M64/2), "clk64k level");
            check(r1280.tick == (rdy && (k % M1280) == 0), "r1280.tick");
            check(r1280.fd   == (rdy && (k % M1280) == 0), "r1280.fd");
            check(r1280.ctrl == (rdy && (k % M1280) == M1280/2), "r1280.ctrl");
            check(r64.tick == (rdy && (k % M64) == M64/2), "r64.tick");
            check(r64.fd   == (rdy && (k % M64) == M64/2), "r64.fd");
            check(r64.ctrl == (rdy && (k % M64) == 0), "r64.ctrl");
            // 20 rising edges of 1280 kHz in each 64 kHz period
            if (clk64k && !c64_q) begin
                if (n64_rise > 0) check(n1280_rise == 20, $sformatf("20 edges per period, got %0d", n1280_rise));
                n64_rise++;
                n1280_rise = 0;
            end
            if (clk1280k && !c1280_q) n1280_rise++;
        end else begin
            check(!ready && !r64.tick && !r1280.tick && !r64.ctrl && !r1280.ctrl, "quiet in reset");
            n64_rise = 0;
        end
        c1280_q = clk1280k;
        c64_q   = clk64k;
    end

    initial begin
        repeat (3) @(posedge clk);
        @(negedge clk) rst = 0;
        repeat (5300) @(posedge clk);
        @(negedge clk) rst = 1;
        repeat (4) @(posedge clk);
        @(negedge clk) rst = 0;
        repeat (3200) @(posedge clk);
        check(n64_rise >= 3, "64 kHz edges seen after second reset");
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
