// duc_model: cycle-accurate reference model of the up-converter chain,
// used by the testbenches only.
//
// It keeps its own master-cycle counter and derives the sample strobes
// from the division rule (start after 500 cycles, 64 kHz tick at
// k mod 1000 = 500, 1280 kHz tick at k mod 50 = 0). Each stage is one
// register per sample tick, in the order of the latency list of the
// design: input, 20 kHz mixer, highpass, compensation, five combs (64 kHz),
// five integrators, carrier mixer, highpass (1280 kHz). The arithmetic is
// plain 64-bit integer arithmetic with a real-valued sine, so it does not
// share code with the RTL. exp_out is what duc_out must be after the edge.
//
// A filter stage samples its input on ctrl, half a period after the tick
// that updated that input, so the model shifts each filter's history
// with the value the stage before it produced on the same tick.
module duc_model
    import tb_pkg::*;
(
    input  logic   clk,
    input  logic   rst,
    input  longint adc_in,
    input  longint carrier_khz,
    output longint exp_out
);
    int k = 0;
    longint x_in, if_step, if_ph, if_sine, if_p, h1 [24], y1, h2 [24], y2;
    longint cm [5], dl [5], ig [5];
    longint rf_step, rf_ph, rf_sine, rf_p, h3 [24], y3;

    task automatic clear();
        x_in = 0; if_step = 0; if_ph = 0; if_sine = 0; if_p = 0; y1 = 0; y2 = 0;
        rf_step = 0; rf_ph = 0; rf_sine = 0; rf_p = 0; y3 = 0;
        for (int i = 0; i < 24; i++) begin h1[i] = 0; h2[i] = 0; h3[i] = 0; end
        for (int i = 0; i < 5; i++) begin cm[i] = 0; dl[i] = 0; ig[i] = 0; end
    endtask
    initial clear();

    assign exp_out = y3;

    always @(posedge clk) begin
        if (rst) begin
            k = 0;
            clear();
        end else begin
            bit rdy, t64, t1280;
            longint o_x_in, o_if_step, o_if_ph, o_if_sine, o_if_p, o_y1, o_y2;
            longint o_cm [5], o_ig [5], o_rf_step, o_rf_ph, o_rf_sine, o_rf_p, cin, up;
            rdy   = (k >= START);
            t64   = rdy && (k % M64 == M64 / 2);
            t1280 = rdy && (k % M1280 == 0);
            o_x_in = x_in; o_if_step = if_step; o_if_ph = if_ph; o_if_sine = if_sine; o_if_p = if_p;
            o_y1 = y1; o_y2 = y2; o_cm = cm; o_ig = ig;
            o_rf_step = rf_step; o_rf_ph = rf_ph; o_rf_sine = rf_sine; o_rf_p = rf_p;
            if (t64) begin
                x_in    = adc_in;
                if_step = (20 * 256 / 64) % 256;
                if_ph   = (o_if_ph + o_if_step) % 256;
                if_sine = sine_ref(int'(o_if_ph));
                if_p    = o_x_in * o_if_sine;
                y1 = fir_ref(duc_ddc_pkg::FIR_HPF_DUC_IF, h1);
                for (int i = 23; i > 0; i--) h1[i] = h1[i-1];
                h1[0] = asr(if_p, 7);
                y2 = fir_ref(duc_ddc_pkg::FIR_COMP_DUC, h2);
                for (int i = 23; i > 0; i--) h2[i] = h2[i-1];
                h2[0] = y1;
                for (int i = 0; i < 5; i++) begin
                    cin   = (i == 0) ? o_y2 : o_cm[i-1];
                    cm[i] = cin - dl[i];
                    dl[i] = cin;
                end
                rf_step = (carrier_khz * 256 / 1280) % 256;
            end
            if (t1280) begin
                ig[0] = o_ig[0] + (t64 ? o_cm[4] : 0);
                for (int i = 1; i < 5; i++) ig[i] = o_ig[i] + o_ig[i-1];
                up      = sat14(asr(o_ig[4], 18));
                rf_ph   = (o_rf_ph + o_rf_step) % 256;
                rf_sine = sine_ref(int'(o_rf_ph));
                rf_p    = up * o_rf_sine;
                y3 = fir_ref(duc_ddc_pkg::FIR_HPF_DUC_RF, h3);
                for (int i = 23; i > 0; i--) h3[i] = h3[i-1];
                h3[0] = asr(rf_p, 7);
            end
            k++;
        end
    end
endmodule
