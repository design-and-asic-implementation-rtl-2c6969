// cic_interp: 5-stage CIC interpolator, rate change 20 (64 kHz -> 1280 kHz).
//
// Comb (differentiator) section at the low rate: five pipelined stages
//     comb[i] <= in_i - in_i(previous tick),  in_0 = x, in_i = comb[i-1]
// one register each, five 64 kHz ticks of latency. The comb output is then
// zero-stuffed: on the 1280 kHz tick that coincides with a 64 kHz tick the
// integrators take the comb output, on the other 19 they take zero.
// Integrator section at the high rate: five pipelined stages
//     integ[i] <= integ[i] + integ[i-1],  integ[-1] = stuffed sample
// five 1280 kHz ticks of latency. All registers are CIC_W (44) bits wide;
// the integrators wrap, which the combs undo exactly as long as the true
// result fits. The DC gain is R^(N-1) = 20^4 = 160000; y is integ[4]
// shifted right by OUT_SHIFT (default 18, gain 0.61) and saturated to 14
// bits.
//
// From the description: five stages, rate change 20, combs at 64 kHz and
// integrators at 1280 kHz, five cycles of latency in each section. The 44-
// bit width is read from the CIC decimator's waveform and used here too;
// unit differential delay, the output scaling and zero-stuffing on the
// coinciding tick are this design's own choices.
module cic_interp
    import duc_ddc_pkg::*;
#(
    parameter int OUT_SHIFT = 18
) (
    input  logic    clk,
    input  logic    rst,     // synchronous, active high
    input  rate_t   r_lo,    // 64 kHz strobes (only tick is used)
    input  rate_t   r_hi,    // 1280 kHz strobes (only tick is used)
    input  sample_t x,       // taken on r_lo.tick
    output sample_t y        // new value after each r_hi.tick
);
    typedef logic signed [CIC_W-1:0] acc_t;

    acc_t comb  [CIC_N];
    acc_t dly   [CIC_N];
    acc_t integ [CIC_N];
    acc_t cin   [CIC_N];
    acc_t stuffed;

    always_comb begin
        cin[0] = acc_t'(x);
        for (int i = 1; i < CIC_N; i++) cin[i] = comb[i-1];
        stuffed = r_lo.tick ? comb[CIC_N-1] : '0;
    end

    always_ff @(posedge clk) begin
        if (rst) begin
            for (int i = 0; i < CIC_N; i++) begin
                comb[i] <= '0;
                dly[i]  <= '0;
            end
        end else if (r_lo.tick) begin
            for (int i = 0; i < CIC_N; i++) begin
                comb[i] <= cin[i] - dly[i];
                dly[i]  <= cin[i];
            end
        end
    end

    always_ff @(posedge clk) begin
        if (rst) begin
            for (int i = 0; i < CIC_N; i++) integ[i] <= '0;
        end else if (r_hi.tick) begin
            integ[0] <= integ[0] + stuffed;
            for (int i = 1; i < CIC_N; i++) integ[i] <= integ[i] + integ[i-1];
        end
    end

    always_comb y = sat_sample(64'(integ[CIC_N-1] >>> OUT_SHIFT));

    // A low-rate tick must always fall on a high-rate tick.
    assert property (@(posedge clk) disable iff (rst) r_lo.tick |-> r_hi.tick);
endmodule
