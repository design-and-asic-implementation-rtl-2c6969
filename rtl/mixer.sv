// mixer: digital mixer, one registered multiplication per sample.
//
// On every sample tick the 14-bit sample `a` is multiplied by the 8-bit
// DDS sine sample `b`, both signed, and the full 22-bit product is stored
// in `p`; the result is there one sample clock after the operands, as the
// description's mixer waveform shows. `y` is the product brought back to a
// 14-bit sample: the sine word is a Q1.7 fraction, so y = p >>> 7, which
// cannot overflow because the table never holds -128.
//
// From the description: 14-bit a, 8-bit b, one clock of latency. The
// waveform prints the product bus as P[35:0]; here it is the 22 bits a
// 14 x 8 product needs, and the scaling of y is this design's own choice.
module mixer
    import duc_ddc_pkg::*;
(
    input  logic    clk,
    input  logic    rst,     // synchronous, active high
    input  logic    tick,    // sample strobe
    input  sample_t a,       // data sample
    input  sine_t   b,       // carrier sample
    output logic signed [DATA_W+SINE_W-1:0] p,   // full product
    output sample_t y        // product scaled to a sample
);
    always_ff @(posedge clk) begin
        if (rst)       p <= '0;
        else if (tick) p <= a * b;
    end

    always_comb y = sample_t'(p >>> SINE_FRAC);
endmodule
