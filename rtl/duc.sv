// duc: digital up-converter for power-line carrier transmission.
//
// Takes 14-bit audio samples (300 Hz..4 kHz) at 64 kHz and delivers 14-bit
// samples at 1280 kHz carrying the audio on a programmable 200..500 kHz
// carrier. The chain, all on the 64 MHz master clock with sample strobes
// from clock_gen:
//   64 kHz   : input register -> mixer with a constant 20 kHz DDS carrier
//              -> highpass MAC filter (keeps the upper band, 20 kHz +
//              audio) -> CIC compensation MAC filter -> CIC combs
//   1280 kHz : CIC integrators (interpolation by 20) -> mixer with the
//              programmable DDS carrier -> highpass MAC filter -> output
//              register
// Latency from an input sample to the output, once the clocks run: 9 ticks
// of 64 kHz (input register, mixer, highpass, compensation, five combs)
// plus 7 ticks of 1280 kHz (five integrators, mixer, highpass). Nothing is
// captured during the 500 master cycles clock_gen needs to start up.
// carrier_khz is the carrier frequency in kHz, registered on the 64 kHz
// clock like the audio input; duc_out changes on 1280 kHz ticks.
//
// The block order, the 20 kHz intermediate carrier, the interpolation by
// 20 done entirely in the CIC filter, the registering of input and
// frequency setting at 64 kHz and the stage latencies follow the
// description. Filter coefficients and the scaling between stages are this
// design's own (see duc_ddc_pkg and the leaf modules).
//
// The DDS phase, the full-width mixer product and the MAC busy flags are
// outputs of the building blocks that this chain does not need; they are
// left unconnected here (lint reports them as unused) and serve as
// observation points.
module duc
    import duc_ddc_pkg::*;
(
    input  logic    clk,          // 64 MHz master clock
    input  logic    rst,          // synchronous, active high
    input  sample_t adc_in,       // 64 kHz audio sample, two's complement
    input  freq_t   carrier_khz,  // carrier frequency, kHz
    output sample_t duc_out,      // 1280 kHz modulated carrier, to the DAC
    output logic    clk64k,
    output logic    clk1280k,
    output logic    ready         // clocks generated, conversion running
);
    rate_t r64, r1280;

    clock_gen u_clk (
        .clk, .rst, .clk64k, .clk1280k, .r64, .r1280, .ready
    );

    // ---- 64 kHz section ----------------------------------------------------
    sample_t x_in;
    always_ff @(posedge clk) begin
        if (rst)           x_in <= '0;
        else if (r64.tick) x_in <= adc_in;
    end

    phase_t if_step, if_phase;
    sine_t  if_sine;
    freq_cont #(.FS_KHZ(FS_LOW_KHZ)) u_if_freq (
        .clk, .rst, .tick(r64.tick), .freq_khz(freq_t'(IF_KHZ)), .step(if_step)
    );
    dds u_if_dds (
        .clk, .rst, .tick(r64.tick), .step(if_step), .phase(if_phase), .sine(if_sine)
    );

    sample_t if_mix;
    logic signed [DATA_W+SINE_W-1:0] if_prod;
    mixer u_if_mix (
        .clk, .rst, .tick(r64.tick), .a(x_in), .b(if_sine), .p(if_prod), .y(if_mix)
    );

    sample_t if_hp, comp;
    logic    if_hp_busy, comp_busy;
    mac_fir #(.FILTER(FIR_HPF_DUC_IF)) u_if_hpf (
        .clk, .rst, .rate(r64), .x(if_mix), .y(if_hp), .busy(if_hp_busy)
    );
    mac_fir #(.FILTER(FIR_COMP_DUC)) u_comp (
        .clk, .rst, .rate(r64), .x(if_hp), .y(comp), .busy(comp_busy)
    );

    // ---- interpolation 64 kHz -> 1280 kHz ------------------------------------
    sample_t up;
    cic_interp u_cic (
        .clk, .rst, .r_lo(r64), .r_hi(r1280), .x(comp), .y(up)
    );

    // ---- 1280 kHz section ----------------------------------------------------
    phase_t rf_step, rf_phase;
    sine_t  rf_sine;
    freq_cont #(.FS_KHZ(FS_HIGH_KHZ)) u_rf_freq (
        .clk, .rst, .tick(r64.tick), .freq_khz(carrier_khz), .step(rf_step)
    );
    dds u_rf_dds (
        .clk, .rst, .tick(r1280.tick), .step(rf_step), .phase(rf_phase), .sine(rf_sine)
    );

    sample_t rf_mix;
    logic signed [DATA_W+SINE_W-1:0] rf_prod;
    mixer u_rf_mix (
        .clk, .rst, .tick(r1280.tick), .a(up), .b(rf_sine), .p(rf_prod), .y(rf_mix)
    );

    logic rf_hp_busy;
    mac_fir #(.FILTER(FIR_HPF_DUC_RF)) u_rf_hpf (
        .clk, .rst, .rate(r1280), .x(rf_mix), .y(duc_out), .busy(rf_hp_busy)
    );
endmodule
