// ddc: digital down-converter for power-line carrier reception.
//
// Takes 14-bit samples at 1280 kHz of a 200..500 kHz carrier and delivers
// 14-bit samples at 64 kHz. The chain, all on the 64 MHz master clock with
// sample strobes from clock_gen:
//   1280 kHz : input register -> mixer with the programmable DDS carrier
//              -> highpass MAC filter -> CIC compensation MAC filter ->
//              CIC integrators
//   64 kHz   : CIC combs (decimation by 20) -> output
// Latency from an input sample to the output, once the clocks run: 9 ticks
// of 1280 kHz (input register, mixer, highpass, compensation, five
// integrators) plus 5 ticks of 64 kHz (five combs). Nothing is captured
// during the 500 master cycles clock_gen needs to start up. carrier_khz is
// the carrier frequency in kHz, registered on the 1280 kHz clock like the
// input; ddc_out changes on 64 kHz ticks.
//
// The block order, the decimation by 20 done entirely in the CIC filter,
// the registering of input and frequency setting at 1280 kHz and the stage
// latencies follow the description. It calls the filter after the mixer a
// highpass that keeps the upper band (carrier + signal); since the CIC
// decimator that follows is a lowpass, this design uses a highpass with a
// low (15 kHz) cutoff that removes DC and keeps the difference band. The
// coefficients and the scaling between stages are this design's own.
//
// The DDS phase, the full-width mixer product and the MAC busy flags are
// outputs of the building blocks that this chain does not need; they are
// left unconnected here (lint reports them as unused) and serve as
// observation points.
module ddc
    import duc_ddc_pkg::*;
(
    input  logic    clk,          // 64 MHz master clock
    input  logic    rst,          // synchronous, active high
    input  sample_t adc_in,       // 1280 kHz received sample, two's complement
    input  freq_t   carrier_khz,  // carrier frequency, kHz
    output sample_t ddc_out,      // 64 kHz output sample
    output logic    clk64k,
    output logic    clk1280k,
    output logic    ready         // clocks generated, conversion running
);
    rate_t r64, r1280;

    clock_gen u_clk (
        .clk, .rst, .clk64k, .clk1280k, .r64, .r1280, .ready
    );

    sample_t x_in;
    always_ff @(posedge clk) begin
        if (rst)             x_in <= '0;
        else if (r1280.tick) x_in <= adc_in;
    end

    phase_t lo_step, lo_phase;
    sine_t  lo_sine;
    freq_cont #(.FS_KHZ(FS_HIGH_KHZ)) u_freq (
        .clk, .rst, .tick(r1280.tick), .freq_khz(carrier_khz), .step(lo_step)
    );
    dds u_dds (
        .clk, .rst, .tick(r1280.tick), .step(lo_step), .phase(lo_phase), .sine(lo_sine)
    );

    sample_t mix;
    logic signed [DATA_W+SINE_W-1:0] prod;
    mixer u_mix (
        .clk, .rst, .tick(r1280.tick), .a(x_in), .b(lo_sine), .p(prod), .y(mix)
    );

    sample_t hp, comp;
    logic    hp_busy, comp_busy;
    mac_fir #(.FILTER(FIR_HPF_DDC)) u_hpf (
        .clk, .rst, .rate(r1280), .x(mix), .y(hp), .busy(hp_busy)
    );
    mac_fir #(.FILTER(FIR_COMP_DDC)) u_comp (
        .clk, .rst, .rate(r1280), .x(hp), .y(comp), .busy(comp_busy)
    );

    cic_decim u_cic (
        .clk, .rst, .r_lo(r64), .r_hi(r1280), .x(comp), .y(ddc_out)
    );
endmodule
