// ddc_model: cycle-accurate reference model of the down-converter chain,
// used by the testbenches only.
//
// Own master-cycle counter and strobes as in duc_model. One register per
// sample tick in the order of the design's latency list: input, mixer,
// highpass, compensation, five integrators (1280 kHz), five combs
// (64 kHz). Integrators and combs wrap at 44 bits like the hardware
// registers. exp_out is what ddc_out must be after the edge.
//
// A filter stage samples its input on ctrl, half a period after the tick
// that updated that input, so the model shifts each filter's history
// with the value the stage before it produced on the same tick.
module ddc_model
    import tb_pkg::*;
(
    input  logic   clk,
    input  logic   rst,
    input  longint adc_in,
    input  longint carrier_khz,
    output longint exp_out
);
    int k = 0;
    longint x_in, step, ph, sine, p, h1 [24], y1, h2 [24], y2;
    longint cm [5], dl [5], ig [5];

    function automatic longint w44(longint v);
        return (v <<< 20) >>> 20;
    endfunction

    task automatic clear();
        x_in = 0; step = 0; ph = 0; sine = 0; p = 0; y1 = 0; y2 = 0;
        for (int i = 0; i < 24; i++) begin h1[i] = 0; h2[i] = 0; end
        for (int i = 0; i < 5; i++) begin cm[i] = 0; dl[i] = 0; ig[i] = 0; end
    endtask
    initial clear();

    assign exp_out = sat14(asr(cm[4], 22));

    always @(posedge clk) begin
        if (rst) begin
            k = 0;
            clear();
        end else begin
            bit rdy, t64, t1280;
            longint o_x_in, o_step, o_ph, o_sine, o_p, o_y1, o_y2, o_cm [5], o_ig [5], cin;
            rdy   = (k >= START);
            t64   = rdy && (k % M64 == M64 / 2);
            t1280 = rdy && (k % M1280 == 0);
            o_x_in = x_in; o_step = step; o_ph = ph; o_sine = sine; o_p = p;
            o_y1 = y1; o_y2 = y2; o_cm = cm; o_ig = ig;
            if (t1280) begin
                x_in = adc_in;
                step = (carrier_khz * 256 / 1280) % 256;
                ph   = (o_ph + o_step) % 256;
                sine = sine_ref(int'(o_ph));
                p    = o_x_in * o_sine;
                y1 = fir_ref(duc_ddc_pkg::FIR_HPF_DDC, h1);
                for (int i = 23; i > 0; i--) h1[i] = h1[i-1];
                h1[0] = asr(p, 7);
                y2 = fir_ref(duc_ddc_pkg::FIR_COMP_DDC, h2);
                for (int i = 23; i > 0; i--) h2[i] = h2[i-1];
                h2[0] = y1;
                ig[0] = w44(o_ig[0] + o_y2);
                for (int i = 1; i < 5; i++) ig[i] = w44(o_ig[i] + o_ig[i-1]);
            end
            if (t64) begin
                for (int i = 0; i < 5; i++) begin
                    cin   = (i == 0) ? o_ig[4] : o_cm[i-1];
                    cm[i] = w44(cin - dl[i]);
                    dl[i] = cin;
                end
            end
            k++;
        end
    end
endmodule
