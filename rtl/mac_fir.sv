// mac_fir: 24-tap FIR filter built around one multiply-accumulate unit.
//
// Samples arrive at a slow sample clock while the multiply-accumulate runs
// at the 64 MHz master clock, one tap per cycle:
//   ctrl : the input x is shifted into the 24-word shift register, the
//          accumulator is cleared and the MAC starts (falling edge of the
//          sample clock, half a period after the upstream stage updated x)
//   then : 24 cycles of acc += sr[k] * c[k], k = 0..23
//   fd   : y takes the accumulated sum (next rising edge)
// The shift register is only written on ctrl and only read in the 24 cycles
// after it, so reads and writes never race. At 1280 kHz the window from
// ctrl to fd is 25 master cycles, exactly the clear plus the 24 products;
// at 64 kHz it is 500 cycles and the MAC idles once done. With x[n] the
// sample present during period n, y[n+1] = sat( (sum_k c[k] * x[n-k]) >>> 15 ):
// one sample clock from the rising edge that updates x to the rising edge
// that updates y. Coefficients are 16-bit Q1.15, the accumulator 36 bits;
// the result is truncated and saturated to 14 bits.
//
// From the description: the shift register fed by the slow clock, MAC at
// the fast clock, ctrl at the falling and fd at the rising edge of the slow
// clock, 24 coefficients in a case construct, 14-bit data, 16-bit
// coefficients, one sample clock of latency (the capture on ctrl is what gives the
// single cycle the latency lists ask for). The coefficient values, the
// accumulator width and the output scaling are this design's own.
module mac_fir
    import duc_ddc_pkg::*;
#(
    parameter fir_sel_e FILTER = FIR_HPF_DUC_IF   // coefficient set
) (
    input  logic    clk,    // 64 MHz master clock
    input  logic    rst,    // synchronous, active high
    input  rate_t   rate,   // ctrl / fd of the sample clock (tick unused)
    input  sample_t x,      // input sample, taken on rate.ctrl
    output sample_t y,      // filtered sample, updated on rate.fd
    output logic    busy    // MAC in progress
);
    localparam int ACC_W = DATA_W + COEF_W + 6;

    sample_t                 sr [NTAPS];
    logic signed [ACC_W-1:0] acc;
    tap_idx_t                idx;

    always_ff @(posedge clk) begin
        if (rst) begin
            for (int k = 0; k < NTAPS; k++) sr[k] <= '0;
        end else if (rate.ctrl) begin
            sr[0] <= x;
            for (int k = 1; k < NTAPS; k++) sr[k] <= sr[k-1];
        end
    end

    coef_t                   c;
    logic signed [ACC_W-1:0] prod;
    always_comb begin
        c    = fir_coef(FILTER, idx);
        prod = sr[idx] * c;   // operands widened to ACC_W by the assignment
    end

    always_ff @(posedge clk) begin
        if (rst) begin
            acc  <= '0;
            idx  <= '0;
            busy <= 1'b0;
        end else if (rate.ctrl) begin
            acc  <= '0;
            idx  <= '0;
            busy <= 1'b1;
        end else if (busy) begin
            acc <= acc + prod;
            idx <= idx + 1'b1;
            if (idx == tap_idx_t'(NTAPS - 1)) busy <= 1'b0;
        end
    end

    always_ff @(posedge clk) begin
        if (rst)          y <= '0;
        else if (rate.fd) y <= sat_sample(64'(acc >>> COEF_FRAC));
    end

    // The MAC must be finished when its result is captured, and before the
    // shift register moves again.
    assert property (@(posedge clk) disable iff (rst) rate.fd |-> !busy);
    assert property (@(posedge clk) disable iff (rst) rate.ctrl |-> !busy);
endmodule
