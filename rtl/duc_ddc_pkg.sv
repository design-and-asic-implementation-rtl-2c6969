// duc_ddc_pkg: shared types, sizes and constant tables of the DUC/DDC pair.
//
// Sizes that come from the design description: 14-bit samples in and out,
// a 64 MHz master clock divided by 1000 (64 kHz) and by 50 (1280 kHz), a
// 256-entry sine table of 8-bit words, 24-tap MAC filters with 16-bit
// coefficients, 5-stage CIC filters with a rate change of 20 and a 44-bit
// register width. The tables below are held in case constructs, as the
// design description does for its coefficient storage and look-up tables.
//
// The coefficient values themselves are this design's own: the description
// names the filters (highpass, CIC compensation) but gives no coefficients.
// They were obtained as follows and quantised to signed Q1.15 (x 32768,
// rounded):
//   highpass filters : 23-tap Hamming-windowed sinc highpass, plus a 24th
//                      zero tap (an even-length symmetric FIR cannot pass
//                      the Nyquist frequency)
//   compensation     : 24-tap frequency-sampling FIR whose gain follows
//                      H(24 kHz)/H(f) up to 24 kHz, H being the droop
//                      |sin(pi f R / 1280k) / (R sin(pi f / 1280k))|^5 of
//                      the CIC filter, and falls to zero above it
// The sine table holds round(127 * sin(2 pi k / 256)), k = 0..255.
package duc_ddc_pkg;

    // ---- sizes -----------------------------------------------------------
    localparam int DATA_W      = 14;    // ADC / DAC sample width
    localparam int COEF_W      = 16;    // MAC filter coefficient width
    localparam int COEF_FRAC   = 15;    // coefficient fraction bits
    localparam int NTAPS       = 24;    // MAC filter length
    localparam int PHASE_W     = 8;     // DDS phase accumulator / table address
    localparam int SINE_W      = 8;     // DDS sine word
    localparam int SINE_FRAC   = 7;     // sine word fraction bits
    localparam int FREQ_W      = 14;    // carrier frequency setting, in kHz
    localparam int CIC_N       = 5;     // CIC stages
    localparam int CIC_R       = 20;    // CIC rate change
    localparam int CIC_W       = 44;    // CIC register width
    localparam int DIV_64K     = 1000;  // 64 MHz / 1000 = 64 kHz
    localparam int DIV_1280K   = 50;    // 64 MHz / 50   = 1280 kHz
    localparam int FS_LOW_KHZ  = 64;
    localparam int FS_HIGH_KHZ = 1280;
    localparam int IF_KHZ      = 20;    // constant intermediate carrier of the DUC

    typedef logic signed [DATA_W-1:0] sample_t;
    typedef logic signed [COEF_W-1:0] coef_t;
    typedef logic signed [SINE_W-1:0] sine_t;
    typedef logic [PHASE_W-1:0]       phase_t;
    typedef logic [FREQ_W-1:0]        freq_t;
    typedef logic [4:0]               tap_idx_t;

    // Strobes of one sample clock, all one master-clock cycle wide.
    //   tick : the sample clock has just risen; sample registers load
    //   ctrl : the sample clock has just fallen; MAC filters take their
    //          input and start
    //   fd   : end of the MAC window; filters capture their result (same
    //          cycle as tick)
    typedef struct packed {
        logic tick;
        logic ctrl;
        logic fd;
    } rate_t;

    // Which coefficient set a MAC filter uses.
    typedef enum logic [2:0] {
        FIR_HPF_DUC_IF = 3'd0,  // DUC, after the 20 kHz mixer, 64 kHz
        FIR_COMP_DUC   = 3'd1,  // DUC, CIC compensation, 64 kHz
        FIR_HPF_DUC_RF = 3'd2,  // DUC, after the carrier mixer, 1280 kHz
        FIR_HPF_DDC    = 3'd3,  // DDC, after the carrier mixer, 1280 kHz
        FIR_COMP_DDC   = 3'd4   // DDC, CIC compensation, 1280 kHz
    } fir_sel_e;

    // Saturate a wide signed value to a 14-bit sample.
    function automatic sample_t sat_sample(logic signed [63:0] v);
        localparam logic signed [63:0] MAXV = 64'sd8191;
        localparam logic signed [63:0] MINV = -64'sd8192;
        if (v > MAXV)      return sample_t'(MAXV);
        else if (v < MINV) return sample_t'(MINV);
        else               return sample_t'(v);
    endfunction

    // ---- FIR coefficient tables (signed Q1.15) ----
    function automatic coef_t fir_coef(fir_sel_e sel, tap_idx_t idx);
        coef_t c;
        c = '0;
        unique case (sel)
            // highpass, fs 64 kHz, cutoff 20 kHz
            FIR_HPF_DUC_IF: begin
                case (idx)
                     0: c = -16'sd29;  1: c = -16'sd73;  2: c = 16'sd164;  3: c = 16'sd0;
                     4: c = -16'sd481;  5: c = 16'sd584;  6: c = 16'sd484;  7: c = -16'sd1908;
                     8: c = 16'sd1120;  9: c = 16'sd3422; 10: c = -16'sd9467; 11: c = 16'sd12301;
                    12: c = -16'sd9467; 13: c = 16'sd3422; 14: c = 16'sd1120; 15: c = -16'sd1908;
                    16: c = 16'sd484; 17: c = 16'sd584; 18: c = -16'sd481; 19: c = 16'sd0;
                    20: c = 16'sd164; 21: c = -16'sd73; 22: c = -16'sd29; 23: c = 16'sd0;
                    default: c = '0;
                endcase
            end
            // inverse CIC droop to 24 kHz (unity at 24 kHz), fs 64 kHz
            FIR_COMP_DUC: begin
                case (idx)
                     0: c = 16'sd1;  1: c = 16'sd11;  2: c = -16'sd16;  3: c = -16'sd27;
                     4: c = 16'sd185;  5: c = -16'sd481;  6: c = 16'sd785;  7: c = -16'sd744;
                     8: c = -16'sd179;  9: c = 16'sd2499; 10: c = -16'sd6266; 11: c = 16'sd9147;
                    12: c = 16'sd9147; 13: c = -16'sd6266; 14: c = 16'sd2499; 15: c = -16'sd179;
                    16: c = -16'sd744; 17: c = 16'sd785; 18: c = -16'sd481; 19: c = 16'sd185;
                    20: c = -16'sd27; 21: c = -16'sd16; 22: c = 16'sd11; 23: c = 16'sd1;
                    default: c = '0;
                endcase
            end
            // highpass, fs 1280 kHz, cutoff 150 kHz
            FIR_HPF_DUC_RF: begin
                case (idx)
                     0: c = -16'sd73;  1: c = -16'sd91;  2: c = -16'sd60;  3: c = 16'sd119;
                     4: c = 16'sd469;  5: c = 16'sd788;  6: c = 16'sd648;  7: c = -16'sd371;
                     8: c = -16'sd2345;  9: c = -16'sd4802; 10: c = -16'sd6861; 11: c = 16'sd25039;
                    12: c = -16'sd6861; 13: c = -16'sd4802; 14: c = -16'sd2345; 15: c = -16'sd371;
                    16: c = 16'sd648; 17: c = 16'sd788; 18: c = 16'sd469; 19: c = 16'sd119;
                    20: c = -16'sd60; 21: c = -16'sd91; 22: c = -16'sd73; 23: c = 16'sd0;
                    default: c = '0;
                endcase
            end
            // highpass, fs 1280 kHz, cutoff 15 kHz
            FIR_HPF_DDC: begin
                case (idx)
                     0: c = -16'sd55;  1: c = -16'sd69;  2: c = -16'sd109;  3: c = -16'sd173;
                     4: c = -16'sd256;  5: c = -16'sd352;  6: c = -16'sd454;  7: c = -16'sd552;
                     8: c = -16'sd640;  9: c = -16'sd708; 10: c = -16'sd752; 11: c = 16'sd31947;
                    12: c = -16'sd752; 13: c = -16'sd708; 14: c = -16'sd640; 15: c = -16'sd552;
                    16: c = -16'sd454; 17: c = -16'sd352; 18: c = -16'sd256; 19: c = -16'sd173;
                    20: c = -16'sd109; 21: c = -16'sd69; 22: c = -16'sd55; 23: c = 16'sd0;
                    default: c = '0;
                endcase
            end
            // inverse CIC droop to 24 kHz (unity at 24 kHz), fs 1280 kHz
            FIR_COMP_DDC: begin
                case (idx)
                     0: c = -16'sd3;  1: c = 16'sd12;  2: c = 16'sd43;  3: c = 16'sd109;
                     4: c = 16'sd220;  5: c = 16'sd383;  6: c = 16'sd593;  7: c = 16'sd833;
                     8: c = 16'sd1079;  9: c = 16'sd1300; 10: c = 16'sd1468; 11: c = 16'sd1558;
                    12: c = 16'sd1558; 13: c = 16'sd1468; 14: c = 16'sd1300; 15: c = 16'sd1079;
                    16: c = 16'sd833; 17: c = 16'sd593; 18: c = 16'sd383; 19: c = 16'sd220;
                    20: c = 16'sd109; 21: c = 16'sd43; 22: c = 16'sd12; 23: c = -16'sd3;
                    default: c = '0;
                endcase
            end
            default: c = '0;
        endcase
        return c;
    endfunction

    // ---- 256 x 8-bit sine table: round(127 * sin(2*pi*k/256)) ----
    function automatic sine_t sine_lut(phase_t ph);
        sine_t s;
        case (ph)
            8'd0: s = 8'sd0; 8'd1: s = 8'sd3; 8'd2: s = 8'sd6; 8'd3: s = 8'sd9; 8'd4: s = 8'sd12; 8'd5: s = 8'sd16; 8'd6: s = 8'sd19; 8'd7: s = 8'sd22;
            8'd8: s = 8'sd25; 8'd9: s = 8'sd28; 8'd10: s = 8'sd31; 8'd11: s = 8'sd34; 8'd12: s = 8'sd37; 8'd13: s = 8'sd40; 8'd14: s = 8'sd43; 8'd15: s = 8'sd46;
            8'd16: s = 8'sd49; 8'd17: s = 8'sd51; 8'd18: s = 8'sd54; 8'd19: s = 8'sd57; 8'd20: s = 8'sd60; 8'd21: s = 8'sd63; 8'd22: s = 8'sd65; 8'd23: s = 8'sd68;
            8'd24: s = 8'sd71; 8'd25: s = 8'sd73; 8'd26: s = 8'sd76; 8'd27: s = 8'sd78; 8'd28: s = 8'sd81; 8'd29: s = 8'sd83; 8'd30: s = 8'sd85; 8'd31: s = 8'sd88;
            8'd32: s = 8'sd90; 8'd33: s = 8'sd92; 8'd34: s = 8'sd94; 8'd35: s = 8'sd96; 8'd36: s = 8'sd98; 8'd37: s = 8'sd100; 8'd38: s = 8'sd102; 8'd39: s = 8'sd104;
            8'd40: s = 8'sd106; 8'd41: s = 8'sd107; 8'd42: s = 8'sd109; 8'd43: s = 8'sd111; 8'd44: s = 8'sd112; 8'd45: s = 8'sd113; 8'd46: s = 8'sd115; 8'd47: s = 8'sd116;
            8'd48: s = 8'sd117; 8'd49: s = 8'sd118; 8'd50: s = 8'sd120; 8'd51: s = 8'sd121; 8'd52: s = 8'sd122; 8'd53: s = 8'sd122; 8'd54: s = 8'sd123; 8'd55: s = 8'sd124;
            8'd56: s = 8'sd125; 8'd57: s = 8'sd125; 8'd58: s = 8'sd126; 8'd59: s = 8'sd126; 8'd60: s = 8'sd126; 8'd61: s = 8'sd127; 8'd62: s = 8'sd127; 8'd63: s = 8'sd127;
            8'd64: s = 8'sd127; 8'd65: s = 8'sd127; 8'd66: s = 8'sd127; 8'd67: s = 8'sd127; 8'd68: s = 8'sd126; 8'd69: s = 8'sd126; 8'd70: s = 8'sd126; 8'd71: s = 8'sd125;
            8'd72: s = 8'sd125; 8'd73: s = 8'sd124; 8'd74: s = 8'sd123; 8'd75: s = 8'sd122; 8'd76: s = 8'sd122; 8'd77: s = 8'sd121; 8'd78: s = 8'sd120; 8'd79: s = 8'sd118;
            8'd80: s = 8'sd117; 8'd81: s = 8'sd116; 8'd82: s = 8'sd115; 8'd83: s = 8'sd113; 8'd84: s = 8'sd112; 8'd85: s = 8'sd111; 8'd86: s = 8'sd109; 8'd87: s = 8'sd107;
            8'd88: s = 8'sd106; 8'd89: s = 8'sd104; 8'd90: s = 8'sd102; 8'd91: s = 8'sd100; 8'd92: s = 8'sd98; 8'd93: s = 8'sd96; 8'd94: s = 8'sd94; 8'd95: s = 8'sd92;
            8'd96: s = 8'sd90; 8'd97: s = 8'sd88; 8'd98: s = 8'sd85; 8'd99: s = 8'sd83; 8'd100: s = 8'sd81; 8'd101: s = 8'sd78; 8'd102: s = 8'sd76; 8'd103: s = 8'sd73;
            8'd104: s = 8'sd71; 8'd105: s = 8'sd68; 8'd106: s = 8'sd65; 8'd107: s = 8'sd63; 8'd108: s = 8'sd60; 8'd109: s = 8'sd57; 8'd110: s = 8'sd54; 8'd111: s = 8'sd51;
            8'd112: s = 8'sd49; 8'd113: s = 8'sd46; 8'd114: s = 8'sd43; 8'd115: s = 8'sd40; 8'd116: s = 8'sd37; 8'd117: s = 8'sd34; 8'd118: s = 8'sd31; 8'd119: s = 8'sd28;
            8'd120: s = 8'sd25; 8'd121: s = 8'sd22; 8'd122: s = 8'sd19; 8'd123: s = 8'sd16; 8'd124: s = 8'sd12; 8'd125: s = 8'sd9; 8'd126: s = 8'sd6; 8'd127: s = 8'sd3;
            8'd128: s = 8'sd0; 8'd129: s = -8'sd3; 8'd130: s = -8'sd6; 8'd131: s = -8'sd9; 8'd132: s = -8'sd12; 8'd133: s = -8'sd16; 8'd134: s = -8'sd19; 8'd135: s = -8'sd22;
            8'd136: s = -8'sd25; 8'd137: s = -8'sd28; 8'd138: s = -8'sd31; 8'd139: s = -8'sd34; 8'd140: s = -8'sd37; 8'd141: s = -8'sd40; 8'd142: s = -8'sd43; 8'd143: s = -8'sd46;
            8'd144: s = -8'sd49; 8'd145: s = -8'sd51; 8'd146: s = -8'sd54; 8'd147: s = -8'sd57; 8'd148: s = -8'sd60; 8'd149: s = -8'sd63; 8'd150: s = -8'sd65; 8'd151: s = -8'sd68;
            8'd152: s = -8'sd71; 8'd153: s = -8'sd73; 8'd154: s = -8'sd76; 8'd155: s = -8'sd78; 8'd156: s = -8'sd81; 8'd157: s = -8'sd83; 8'd158: s = -8'sd85; 8'd159: s = -8'sd88;
            8'd160: s = -8'sd90; 8'd161: s = -8'sd92; 8'd162: s = -8'sd94; 8'd163: s = -8'sd96; 8'd164: s = -8'sd98; 8'd165: s = -8'sd100; 8'd166: s = -8'sd102; 8'd167: s = -8'sd104;
            8'd168: s = -8'sd106; 8'd169: s = -8'sd107; 8'd170: s = -8'sd109; 8'd171: s = -8'sd111; 8'd172: s = -8'sd112; 8'd173: s = -8'sd113; 8'd174: s = -8'sd115; 8'd175: s = -8'sd116;
            8'd176: s = -8'sd117; 8'd177: s = -8'sd118; 8'd178: s = -8'sd120; 8'd179: s = -8'sd121; 8'd180: s = -8'sd122; 8'd181: s = -8'sd122; 8'd182: s = -8'sd123; 8'd183: s = -8'sd124;
            8'd184: s = -8'sd125; 8'd185: s = -8'sd125; 8'd186: s = -8'sd126; 8'd187: s = -8'sd126; 8'd188: s = -8'sd126; 8'd189: s = -8'sd127; 8'd190: s = -8'sd127; 8'd191: s = -8'sd127;
            8'd192: s = -8'sd127; 8'd193: s = -8'sd127; 8'd194: s = -8'sd127; 8'd195: s = -8'sd127; 8'd196: s = -8'sd126; 8'd197: s = -8'sd126; 8'd198: s = -8'sd126; 8'd199: s = -8'sd125;
            8'd200: s = -8'sd125; 8'd201: s = -8'sd124; 8'd202: s = -8'sd123; 8'd203: s = -8'sd122; 8'd204: s = -8'sd122; 8'd205: s = -8'sd121; 8'd206: s = -8'sd120; 8'd207: s = -8'sd118;
            8'd208: s = -8'sd117; 8'd209: s = -8'sd116; 8'd210: s = -8'sd115; 8'd211: s = -8'sd113; 8'd212: s = -8'sd112; 8'd213: s = -8'sd111; 8'd214: s = -8'sd109; 8'd215: s = -8'sd107;
            8'd216: s = -8'sd106; 8'd217: s = -8'sd104; 8'd218: s = -8'sd102; 8'd219: s = -8'sd100; 8'd220: s = -8'sd98; 8'd221: s = -8'sd96; 8'd222: s = -8'sd94; 8'd223: s = -8'sd92;
            8'd224: s = -8'sd90; 8'd225: s = -8'sd88; 8'd226: s = -8'sd85; 8'd227: s = -8'sd83; 8'd228: s = -8'sd81; 8'd229: s = -8'sd78; 8'd230: s = -8'sd76; 8'd231: s = -8'sd73;
            8'd232: s = -8'sd71; 8'd233: s = -8'sd68; 8'd234: s = -8'sd65; 8'd235: s = -8'sd63; 8'd236: s = -8'sd60; 8'd237: s = -8'sd57; 8'd238: s = -8'sd54; 8'd239: s = -8'sd51;
            8'd240: s = -8'sd49; 8'd241: s = -8'sd46; 8'd242: s = -8'sd43; 8'd243: s = -8'sd40; 8'd244: s = -8'sd37; 8'd245: s = -8'sd34; 8'd246: s = -8'sd31; 8'd247: s = -8'sd28;
            8'd248: s = -8'sd25; 8'd249: s = -8'sd22; 8'd250: s = -8'sd19; 8'd251: s = -8'sd16; 8'd252: s = -8'sd12; 8'd253: s = -8'sd9; 8'd254: s = -8'sd6; 8'd255: s = -8'sd3;
            default: s = '0;
        endcase
        return s;
    endfunction

endpackage
