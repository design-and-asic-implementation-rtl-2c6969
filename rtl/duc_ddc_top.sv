// duc_ddc_top: the up-converter and the down-converter of a power-line
// carrier link, side by side.
//
// The transmitter (duc) turns 64 kHz audio samples into 1280 kHz samples of
// a 200..500 kHz carrier for a DAC; the receiver (ddc) turns 1280 kHz ADC
// samples of such a carrier back into 64 kHz samples. The two were built as
// separate chips; here they share the 64 MHz master clock and the
// synchronous reset and keep their own clock generators, data ports and
// carrier settings. The ADCs, the DAC, the level shifters of the 0.9 V core
// and the scan logic are outside this RTL; their signals are the ports.
module duc_ddc_top
    import duc_ddc_pkg::*;
(
    input  logic    clk,              // 64 MHz master clock
    input  logic    rst,              // synchronous, active high
    // transmitter
    input  sample_t duc_adc_in,       // 64 kHz audio sample
    input  freq_t   duc_carrier_khz,
    output sample_t duc_out,          // 1280 kHz sample to the DAC
    output logic    duc_clk64k,
    output logic    duc_clk1280k,
    output logic    duc_ready,
    // receiver
    input  sample_t ddc_adc_in,       // 1280 kHz sample from the ADC
    input  freq_t   ddc_carrier_khz,
    output sample_t ddc_out,          // 64 kHz output sample
    output logic    ddc_clk64k,
    output logic    ddc_clk1280k,
    output logic    ddc_ready
);
    duc u_duc (
        .clk, .rst,
        .adc_in(duc_adc_in), .carrier_khz(duc_carrier_khz), .duc_out,
        .clk64k(duc_clk64k), .clk1280k(duc_clk1280k), .ready(duc_ready)
    );

    ddc u_ddc (
        .clk, .rst,
        .adc_in(ddc_adc_in), .carrier_khz(ddc_carrier_khz), .ddc_out,
        .clk64k(ddc_clk64k), .clk1280k(ddc_clk1280k), .ready(ddc_ready)
    );
endmodule
