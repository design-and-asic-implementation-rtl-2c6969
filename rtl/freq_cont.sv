// freq_cont: carrier frequency setting for a DDS.
//
// The frequency setting is a plain number of kHz (freq_khz). On every tick
// of the sample clock that the DDS runs at, the setting is registered and
// turned into the DDS phase increment
//     step = floor(freq_khz * 2^PHASE_W / FS_KHZ)
// i.e. the number of table entries the DDS advances per sample. With the
// 8-bit phase of the DDS and FS_KHZ = 1280 the resolution is 5 kHz, so the
// 200..500 kHz carrier range maps to steps 40..100 and the 20 kHz constant
// carrier of the DUC, run at FS_KHZ = 64, to step 80. The result is
// available one sample tick after the setting changes.
//
// The description names this block (FreqContDUC, FreqContDDC) and says the
// frequency settings are registered on the input sample clock. That the
// setting is in kHz is this design's reading of the DDC waveform, which
// shows the setting as 14'h0140 (320, a carrier inside the 200..500 kHz
// band); the divide by FS_KHZ is a constant division.
module freq_cont
    import duc_ddc_pkg::*;
#(
    parameter int FS_KHZ = FS_HIGH_KHZ   // sample rate of the DDS it feeds
) (
    input  logic   clk,
    input  logic   rst,        // synchronous, active high
    input  logic   tick,       // sample strobe of the register clock
    input  freq_t  freq_khz,   // carrier frequency in kHz
    output phase_t step        // DDS phase increment
);
    localparam int PROD_W = FREQ_W + PHASE_W;

    logic [PROD_W-1:0] scaled;
    always_comb scaled = PROD_W'({freq_khz, {PHASE_W{1'b0}}} / PROD_W'(FS_KHZ));

    always_ff @(posedge clk) begin
        if (rst)       step <= '0;
        else if (tick) step <= phase_t'(scaled);
    end
endmodule
