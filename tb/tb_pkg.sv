// tb_pkg: reference arithmetic shared by the testbenches.
//
// Everything here is computed from first principles (real-valued sine,
// plain integer arithmetic), not taken from the RTL, so the testbenches can
// compare the design against it. Only the FIR coefficient values are read
// from duc_ddc_pkg, since they are data, not behaviour.
package tb_pkg;
    localparam int M64   = 1000;   // master cycles per 64 kHz period
    localparam int M1280 = 50;     // master cycles per 1280 kHz period
    localparam int START = 500;    // master cycles before the clocks run

    function automatic longint sat14(longint v);
        if (v > 8191)  return 8191;
        if (v < -8192) return -8192;
        return v;
    endfunction

    // Arithmetic shift right of a signed value (floor division by 2^n).
    function automatic longint asr(longint v, int n);
        return v >>> n;
    endfunction

    // round(127 * sin(2 pi k / 256))
    function automatic longint sine_ref(int k);
        real v;
        v = 127.0 * $sin(2.0 * 3.14159265358979323846 * real'(k % 256) / 256.0);
        return longint'($floor(v + 0.5));
    endfunction

    function automatic longint coef_ref(duc_ddc_pkg::fir_sel_e sel, int k);
        return longint'(duc_ddc_pkg::fir_coef(sel, 5'(k)));
    endfunction

    // Output of a 24-tap filter whose history h[0] is the newest sample.
    function automatic longint fir_ref(duc_ddc_pkg::fir_sel_e sel, longint h[24]);
        longint acc = 0;
        for (int k = 0; k < 24; k++) acc += h[k] * coef_ref(sel, k);
        return sat14(asr(acc, 15));
    endfunction
endpackage
