// dds: direct digital synthesizer.
//
// An 8-bit phase accumulator advances by `step` on every sample tick and
// addresses a 256-entry table of 8-bit two's complement sine samples
// (duc_ddc_pkg::sine_lut, a case construct holding
// round(127 sin(2 pi k / 256))). The output frequency is
// step * fs / 256: at fs = 1280 kHz a step of 21 gives 105 kHz, about 12
// table steps per period. `phase` and `sine` are registers; `sine` is the
// table entry of the phase before the current one, so both change on the
// same tick and the sine lags the phase by one sample.
//
// From the description: phase accumulation, a 256 x 8-bit two's complement
// table, the table held in a case construct, the frequency number as the
// stride through the table. This design's own choice: accumulator width
// equal to the table address (no fractional phase bits), the peak value
// 127 and the zero reset state.
module dds
    import duc_ddc_pkg::*;
(
    input  logic   clk,
    input  logic   rst,     // synchronous, active high
    input  logic   tick,    // sample strobe
    input  phase_t step,    // phase increment per sample
    output phase_t phase,   // phase accumulator
    output sine_t  sine     // sine sample
);
    always_ff @(posedge clk) begin
        if (rst) begin
            phase <= '0;
            sine  <= '0;
        end else if (tick) begin
            phase <= phase + step;
            sine  <= sine_lut(phase);
        end
    end
endmodule
