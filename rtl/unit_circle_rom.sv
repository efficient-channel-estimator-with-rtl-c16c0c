// unit_circle_rom: e^{+j*pi*idx/M} for idx = 0 .. 2M-1, the 2M-th roots of unity.
//
// One table serves every coefficient the estimator needs: the rotation
// diagonal e^{j n phi} with phi = +-pi/M (the Phi-generators), the FFT twiddle
// factors e^{-j 2 pi n / 2D} and the DFT-matrix columns e^{j 2 pi m b / M} of
// the F-generator are all powers of e^{j pi / M}.
// The table holds 256 words, {cos, sin} of pi*n/128 in Q1.14, computed as
// round(16384*cos(pi*n/128)) and round(16384*sin(pi*n/128)); for M < 128 it is
// read with stride 128/M. The read is combinational (a ROM written as a case
// table, so that synthesis sees its contents).
// The table itself is this design's choice; the paper names the generators
// but not how they produce their values.
module unit_circle_rom
  import adma_pkg::*;
#(
  parameter int unsigned M = 128   // DFT size, a power of two, 2 .. 128
) (
  input  logic [$clog2(2*M)-1:0] idx,
  output ccoef_t                 w
);
  localparam int unsigned TABLE_M = 128;
  localparam int unsigned STRIDE  = TABLE_M / M;

  logic [$clog2(2*TABLE_M)-1:0] addr;
  logic [2*CW-1:0]              word;

  always_comb begin
    addr = ($clog2(2*TABLE_M))'(idx * STRIDE);
    unique case (addr)
      8'd0: word = 32'h40000000;
      8'd1: word = 32'h3ffb0192;
      8'd2: word = 32'h3fec0324;
      8'd3: word = 32'h3fd404b5;
      8'd4: word = 32'h3fb10646;
      8'd5: word = 32'h3f8507d6;
      8'd6: word = 32'h3f4f0964;
      8'd7: word = 32'h3f0f0af1;
      8'd8: word = 32'h3ec50c7c;
      8'd9: word = 32'h3e720e06;
      8'd10: word = 32'h3e150f8d;
      8'd11: word = 32'h3daf1112;
      8'd12: word = 32'h3d3f1294;
      8'd13: word = 32'h3cc51413;
      8'd14: word = 32'h3c421590;
      8'd15: word = 32'h3bb61709;
      8'd16: word = 32'h3b21187e;
      8'd17: word = 32'h3a8219ef;
      8'd18: word = 32'h39db1b5d;
      8'd19: word = 32'h392b1cc6;
      8'd20: word = 32'h38711e2b;
      8'd21: word = 32'h37b01f8c;
      8'd22: word = 32'h36e520e7;
      8'd23: word = 32'h3612223d;
      8'd24: word = 32'h3537238e;
      8'd25: word = 32'h345324da;
      8'd26: word = 32'h33682620;
      8'd27: word = 32'h32742760;
      8'd28: word = 32'h3179289a;
      8'd29: word = 32'h307629ce;
      8'd30: word = 32'h2f6c2afb;
      8'd31: word = 32'h2e5a2c21;
      8'd32: word = 32'h2d412d41;
      8'd33: word = 32'h2c212e5a;
      8'd34: word = 32'h2afb2f6c;
      8'd35: word = 32'h29ce3076;
      8'd36: word = 32'h289a3179;
      8'd37: word = 32'h27603274;
      8'd38: word = 32'h26203368;
      8'd39: word = 32'h24da3453;
      8'd40: word = 32'h238e3537;
      8'd41: word = 32'h223d3612;
      8'd42: word = 32'h20e736e5;
      8'd43: word = 32'h1f8c37b0;
      8'd44: word = 32'h1e2b3871;
      8'd45: word = 32'h1cc6392b;
      8'd46: word = 32'h1b5d39db;
      8'd47: word = 32'h19ef3a82;
      8'd48: word = 32'h187e3b21;
      8'd49: word = 32'h17093bb6;
      8'd50: word = 32'h15903c42;
      8'd51: word = 32'h14133cc5;
      8'd52: word = 32'h12943d3f;
      8'd53: word = 32'h11123daf;
      8'd54: word = 32'h0f8d3e15;
      8'd55: word = 32'h0e063e72;
      8'd56: word = 32'h0c7c3ec5;
      8'd57: word = 32'h0af13f0f;
      8'd58: word = 32'h09643f4f;
      8'd59: word = 32'h07d63f85;
      8'd60: word = 32'h06463fb1;
      8'd61: word = 32'h04b53fd4;
      8'd62: word = 32'h03243fec;
      8'd63: word = 32'h01923ffb;
      8'd64: word = 32'h00004000;
      8'd65: word = 32'hfe6e3ffb;
      8'd66: word = 32'hfcdc3fec;
      8'd67: word = 32'hfb4b3fd4;
      8'd68: word = 32'hf9ba3fb1;
      8'd69: word = 32'hf82a3f85;
      8'd70: word = 32'hf69c3f4f;
      8'd71: word = 32'hf50f3f0f;
      8'd72: word = 32'hf3843ec5;
      8'd73: word = 32'hf1fa3e72;
      8'd74: word = 32'hf0733e15;
      8'd75: word = 32'heeee3daf;
      8'd76: word = 32'hed6c3d3f;
      8'd77: word = 32'hebed3cc5;
      8'd78: word = 32'hea703c42;
      8'd79: word = 32'he8f73bb6;
      8'd80: word = 32'he7823b21;
      8'd81: word = 32'he6113a82;
      8'd82: word = 32'he4a339db;
      8'd83: word = 32'he33a392b;
      8'd84: word = 32'he1d53871;
      8'd85: word = 32'he07437b0;
      8'd86: word = 32'hdf1936e5;
      8'd87: word = 32'hddc33612;
      8'd88: word = 32'hdc723537;
      8'd89: word = 32'hdb263453;
      8'd90: word = 32'hd9e03368;
      8'd91: word = 32'hd8a03274;
      8'd92: word = 32'hd7663179;
      8'd93: word = 32'hd6323076;
      8'd94: word = 32'hd5052f6c;
      8'd95: word = 32'hd3df2e5a;
      8'd96: word = 32'hd2bf2d41;
      8'd97: word = 32'hd1a62c21;
      8'd98: word = 32'hd0942afb;
      8'd99: word = 32'hcf8a29ce;
      8'd100: word = 32'hce87289a;
      8'd101: word = 32'hcd8c2760;
      8'd102: word = 32'hcc982620;
      8'd103: word = 32'hcbad24da;
      8'd104: word = 32'hcac9238e;
      8'd105: word = 32'hc9ee223d;
      8'd106: word = 32'hc91b20e7;
      8'd107: word = 32'hc8501f8c;
      8'd108: word = 32'hc78f1e2b;
      8'd109: word = 32'hc6d51cc6;
      8'd110: word = 32'hc6251b5d;
      8'd111: word = 32'hc57e19ef;
      8'd112: word = 32'hc4df187e;
      8'd113: word = 32'hc44a1709;
      8'd114: word = 32'hc3be1590;
      8'd115: word = 32'hc33b1413;
      8'd116: word = 32'hc2c11294;
      8'd117: word = 32'hc2511112;
      8'd118: word = 32'hc1eb0f8d;
      8'd119: word = 32'hc18e0e06;
      8'd120: word = 32'hc13b0c7c;
      8'd121: word = 32'hc0f10af1;
      8'd122: word = 32'hc0b10964;
      8'd123: word = 32'hc07b07d6;
      8'd124: word = 32'hc04f0646;
      8'd125: word = 32'hc02c04b5;
      8'd126: word = 32'hc0140324;
      8'd127: word = 32'hc0050192;
      8'd128: word = 32'hc0000000;
      8'd129: word = 32'hc005fe6e;
      8'd130: word = 32'hc014fcdc;
      8'd131: word = 32'hc02cfb4b;
      8'd132: word = 32'hc04ff9ba;
      8'd133: word = 32'hc07bf82a;
      8'd134: word = 32'hc0b1f69c;
      8'd135: word = 32'hc0f1f50f;
      8'd136: word = 32'hc13bf384;
      8'd137: word = 32'hc18ef1fa;
      8'd138: word = 32'hc1ebf073;
      8'd139: word = 32'hc251eeee;
      8'd140: word = 32'hc2c1ed6c;
      8'd141: word = 32'hc33bebed;
      8'd142: word = 32'hc3beea70;
      8'd143: word = 32'hc44ae8f7;
      8'd144: word = 32'hc4dfe782;
      8'd145: word = 32'hc57ee611;
      8'd146: word = 32'hc625e4a3;
      8'd147: word = 32'hc6d5e33a;
      8'd148: word = 32'hc78fe1d5;
      8'd149: word = 32'hc850e074;
      8'd150: word = 32'hc91bdf19;
      8'd151: word = 32'hc9eeddc3;
      8'd152: word = 32'hcac9dc72;
      8'd153: word = 32'hcbaddb26;
      8'd154: word = 32'hcc98d9e0;
      8'd155: word = 32'hcd8cd8a0;
      8'd156: word = 32'hce87d766;
      8'd157: word = 32'hcf8ad632;
      8'd158: word = 32'hd094d505;
      8'd159: word = 32'hd1a6d3df;
      8'd160: word = 32'hd2bfd2bf;
      8'd161: word = 32'hd3dfd1a6;
      8'd162: word = 32'hd505d094;
      8'd163: word = 32'hd632cf8a;
      8'd164: word = 32'hd766ce87;
      8'd165: word = 32'hd8a0cd8c;
      8'd166: word = 32'hd9e0cc98;
      8'd167: word = 32'hdb26cbad;
      8'd168: word = 32'hdc72cac9;
      8'd169: word = 32'hddc3c9ee;
      8'd170: word = 32'hdf19c91b;
      8'd171: word = 32'he074c850;
      8'd172: word = 32'he1d5c78f;
      8'd173: word = 32'he33ac6d5;
      8'd174: word = 32'he4a3c625;
      8'd175: word = 32'he611c57e;
      8'd176: word = 32'he782c4df;
      8'd177: word = 32'he8f7c44a;
      8'd178: word = 32'hea70c3be;
      8'd179: word = 32'hebedc33b;
      8'd180: word = 32'hed6cc2c1;
      8'd181: word = 32'heeeec251;
      8'd182: word = 32'hf073c1eb;
      8'd183: word = 32'hf1fac18e;
      8'd184: word = 32'hf384c13b;
      8'd185: word = 32'hf50fc0f1;
      8'd186: word = 32'hf69cc0b1;
      8'd187: word = 32'hf82ac07b;
      8'd188: word = 32'hf9bac04f;
      8'd189: word = 32'hfb4bc02c;
      8'd190: word = 32'hfcdcc014;
      8'd191: word = 32'hfe6ec005;
      8'd192: word = 32'h0000c000;
      8'd193: word = 32'h0192c005;
      8'd194: word = 32'h0324c014;
      8'd195: word = 32'h04b5c02c;
      8'd196: word = 32'h0646c04f;
      8'd197: word = 32'h07d6c07b;
      8'd198: word = 32'h0964c0b1;
      8'd199: word = 32'h0af1c0f1;
      8'd200: word = 32'h0c7cc13b;
      8'd201: word = 32'h0e06c18e;
      8'd202: word = 32'h0f8dc1eb;
      8'd203: word = 32'h1112c251;
      8'd204: word = 32'h1294c2c1;
      8'd205: word = 32'h1413c33b;
      8'd206: word = 32'h1590c3be;
      8'd207: word = 32'h1709c44a;
      8'd208: word = 32'h187ec4df;
      8'd209: word = 32'h19efc57e;
      8'd210: word = 32'h1b5dc625;
      8'd211: word = 32'h1cc6c6d5;
      8'd212: word = 32'h1e2bc78f;
      8'd213: word = 32'h1f8cc850;
      8'd214: word = 32'h20e7c91b;
      8'd215: word = 32'h223dc9ee;
      8'd216: word = 32'h238ecac9;
      8'd217: word = 32'h24dacbad;
      8'd218: word = 32'h2620cc98;
      8'd219: word = 32'h2760cd8c;
      8'd220: word = 32'h289ace87;
      8'd221: word = 32'h29cecf8a;
      8'd222: word = 32'h2afbd094;
      8'd223: word = 32'h2c21d1a6;
      8'd224: word = 32'h2d41d2bf;
      8'd225: word = 32'h2e5ad3df;
      8'd226: word = 32'h2f6cd505;
      8'd227: word = 32'h3076d632;
      8'd228: word = 32'h3179d766;
      8'd229: word = 32'h3274d8a0;
      8'd230: word = 32'h3368d9e0;
      8'd231: word = 32'h3453db26;
      8'd232: word = 32'h3537dc72;
      8'd233: word = 32'h3612ddc3;
      8'd234: word = 32'h36e5df19;
      8'd235: word = 32'h37b0e074;
      8'd236: word = 32'h3871e1d5;
      8'd237: word = 32'h392be33a;
      8'd238: word = 32'h39dbe4a3;
      8'd239: word = 32'h3a82e611;
      8'd240: word = 32'h3b21e782;
      8'd241: word = 32'h3bb6e8f7;
      8'd242: word = 32'h3c42ea70;
      8'd243: word = 32'h3cc5ebed;
      8'd244: word = 32'h3d3fed6c;
      8'd245: word = 32'h3dafeeee;
      8'd246: word = 32'h3e15f073;
      8'd247: word = 32'h3e72f1fa;
      8'd248: word = 32'h3ec5f384;
      8'd249: word = 32'h3f0ff50f;
      8'd250: word = 32'h3f4ff69c;
      8'd251: word = 32'h3f85f82a;
      8'd252: word = 32'h3fb1f9ba;
      8'd253: word = 32'h3fd4fb4b;
      8'd254: word = 32'h3fecfcdc;
      8'd255: word = 32'h3ffbfe6e;
      default: word = 32'h40000000;
    endcase
    w.re = coef_t'(word[2*CW-1:CW]);
    w.im = coef_t'(word[CW-1:0]);
  end

  initial assert (M >= 2 && M <= TABLE_M && (M & (M - 1)) == 0)
    else $error("unit_circle_rom: M must be a power of two up to %0d", TABLE_M);
endmodule
