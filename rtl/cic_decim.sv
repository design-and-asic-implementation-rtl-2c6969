// cic_decim: 5-stage CIC decimator, rate change 20 (1280 kHz -> 64 kHz).
//
// Integrator section at the high rate: five pipelined stages
//     integ[i] <= integ[i] + integ[i-1],  integ[-1] = x
// five 1280 kHz ticks of latency. On every 64 kHz tick (which coincides
// with every 20th 1280 kHz tick) the last integrator is sampled into the
// comb section: five pipelined stages
//     comb[i] <= in_i - in_i(previous tick),  in_0 = integ[4]
// five 64 kHz ticks of latency. All registers are CIC_W (44) bits wide and
// the integrators wrap, which the combs undo. The DC gain is R^N = 20^5 =
// 3.2e6; y is comb[4] shifted right by OUT_SHIFT (default 22, gain 0.76)
// and saturated to 14 bits.
//
// From the description: five stages, rate change 20, integrators at
// 1280 kHz and combs at 64 kHz, five cycles of latency in each section, the
// 44-bit width of the integrator and differentiator registers. Unit
// differential delay and the output scaling are this design's own choices.
module cic_decim
    import duc_ddc_pkg::*;
#(
    parameter int OUT_SHIFT = 22
) (
    input  logic    clk,
    input  logic    rst,     // synchronous, active high
    input  rate_t   r_lo,    // 64 kHz strobes (only tick is used)
    input  rate_t   r_hi,    // 1280 kHz strobes (only tick is used)
    input  sample_t x,       // taken on r_hi.tick
    output sample_t y        // new value after each r_lo.tick
);
    typedef logic signed [CIC_W-1:0] acc_t;

    acc_t integ [CIC_N];
    acc_t comb  [CIC_N];
    acc_t dly   [CIC_N];
    acc_t cin   [CIC_N];

    always_comb begin
        cin[0] = integ[CIC_N-1];
        for (int i = 1; i < CIC_N; i++) cin[i] = comb[i-1];
    end

    always_ff @(posedge clk) begin
        if (rst) begin
            for (int i = 0; i < CIC_N; i++) integ[i] <= '0;
        end else if (r_hi.tick) begin
            integ[0] <= integ[0] + acc_t'(x);
            for (int i = 1; i < CIC_N; i++) integ[i] <= integ[i] + integ[i-1];
        end
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

    always_comb y = sat_sample(64'(comb[CIC_N-1] >>> OUT_SHIFT));

    assert property (@(posedge clk) disable iff (rst) r_lo.tick |-> r_hi.tick);
endmodule
