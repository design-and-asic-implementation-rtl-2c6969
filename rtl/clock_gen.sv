// clock_gen: sample-clock generation and MAC control for the DUC and DDC.
//
// The 64 MHz master clock is divided by DIV_1280K (50) and DIV_64K (1000)
// with two free-running counters that start together at reset, so every
// rising edge of the 64 kHz clock falls on a rising edge of the 1280 kHz
// clock (20 of the latter per period of the former). Both divided clocks
// have a 50 % duty cycle and are brought out on clk1280k / clk64k.
//
// The datapath itself stays on the master clock. For each sample clock the
// block emits one-master-cycle strobes (duc_ddc_pkg::rate_t):
//   tick : the sample clock has just risen (sample registers load)
//   ctrl : the sample clock has just fallen (MAC filters take their input
//          and start)
//   fd   : the next rising edge (MAC filters capture their result)
// so a MAC filter has half a sample period, 25 master cycles at 1280 kHz
// and 500 at 64 kHz, between ctrl and fd. Following the description, the
// 64 kHz clock first rises 500 master cycles after reset ("the clock
// divider takes 500 clock cycles ... to generate 64 KHz clock"); `ready`
// goes high on that cycle and stays high, and no strobe is emitted before
// it, which holds the whole datapath until the clocks exist.
//
// What follows the description: the division ratios, the ctrl-at-falling /
// fd-at-rising timing, the 500-cycle start-up and the synchronous,
// active-high reset. This design's own choice: strobes in place of flops
// clocked by the divided clocks (the divided clocks are still generated),
// and the phase of the two counters (1280 kHz starts high, 64 kHz low).
module clock_gen
    import duc_ddc_pkg::*;
#(
    parameter int DIV_64K_P   = DIV_64K,    // master cycles per 64 kHz period
    parameter int DIV_1280K_P = DIV_1280K   // master cycles per 1280 kHz period
) (
    input  logic  clk,        // 64 MHz master clock
    input  logic  rst,        // synchronous, active high
    output logic  clk64k,
    output logic  clk1280k,
    output rate_t r64,
    output rate_t r1280,
    output logic  ready
);
    localparam int H64   = DIV_64K_P / 2;
    localparam int H1280 = DIV_1280K_P / 2;

    logic [$clog2(DIV_64K_P)-1:0]   cnt64;
    logic [$clog2(DIV_1280K_P)-1:0] cnt1280;
    logic started;

    always_ff @(posedge clk) begin
        if (rst) begin
            cnt64   <= '0;
            cnt1280 <= '0;
            started <= 1'b0;
        end else begin
            cnt64   <= (cnt64 == ($bits(cnt64))'(DIV_64K_P - 1)) ? '0 : cnt64 + 1'b1;
            cnt1280 <= (cnt1280 == ($bits(cnt1280))'(DIV_1280K_P - 1)) ? '0 : cnt1280 + 1'b1;
            if (cnt64 == ($bits(cnt64))'(H64 - 1)) started <= 1'b1;
        end
    end

    // 1280 kHz: high for counts 0..H-1, rises at count 0.
    // 64 kHz  : low  for counts 0..H-1, rises at count H (500).
    assign clk1280k = !rst && (cnt1280 < ($bits(cnt1280))'(H1280));
    assign clk64k   = !rst && (cnt64 >= ($bits(cnt64))'(H64));

    logic rise64, fall64, rise1280, fall1280;
    assign rise64   = (cnt64 == ($bits(cnt64))'(H64));
    assign fall64   = (cnt64 == '0);
    assign rise1280 = (cnt1280 == '0);
    assign fall1280 = (cnt1280 == ($bits(cnt1280))'(H1280));

    assign ready = started && !rst;

    always_comb begin
        r64.tick   = ready && rise64;
        r64.ctrl   = ready && fall64;
        r64.fd     = ready && rise64;
        r1280.tick = ready && rise1280;
        r1280.ctrl = ready && fall1280;
        r1280.fd   = ready && rise1280;
    end

    // Every 64 kHz edge must coincide with a 1280 kHz rising edge.
    initial assert (DIV_64K_P % DIV_1280K_P == 0 && (DIV_64K_P / 2) % DIV_1280K_P == 0)
        else $error("clock_gen: 64 kHz edges must align with 1280 kHz rising edges");
endmodule
