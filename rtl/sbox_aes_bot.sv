// sbox_aes_bot -- linear output ("bottom") layer of the AES S-box.
//
// Compresses the 18 products of the shared middle layer (sbox_mid) to the
// S-box output byte with 34 XOR and 4 XNOR gates, the paper's Table II count
// for its AES bottom layer; the XNORs add the affine constant 0x63. The gate
// list is the published Boyar-Peralta bottom section.
//
// Interface: m[17:0] = {M63, ..., M46} from sbox_mid, s[7:0] the S-box output
// (s[7] is Boyar-Peralta's S0). Purely combinational.
module sbox_aes_bot (
  input  logic [17:0] m,
  output logic [7:0]  s
);
  logic m46, m47, m48, m49, m50, m51, m52, m53, m54, m55, m56, m57, m58;
  logic m59, m60, m61, m62, m63;
  logic l0, l1, l2, l3, l4, l5, l6, l7, l8, l9, l10, l11, l12, l13, l14;
  logic l15, l16, l17, l18, l19, l20, l21, l22, l23, l24, l25, l26, l27;
  logic l28, l29;

  assign {m63, m62, m61, m60, m59, m58, m57, m56, m55, m54, m53, m52, m51,
          m50, m49, m48, m47, m46} = m;

  assign l0  = m61 ^ m62;
  assign l1  = m50 ^ m56;
  assign l2  = m46 ^ m48;
  assign l3  = m47 ^ m55;
  assign l4  = m54 ^ m58;
  assign l5  = m49 ^ m61;
  assign l6  = m62 ^ l5;
  assign l7  = m46 ^ l3;
  assign l8  = m51 ^ m59;
  assign l9  = m52 ^ m53;
  assign l10 = m53 ^ l4;
  assign l11 = m60 ^ l2;
  assign l12 = m48 ^ m51;
  assign l13 = m50 ^ l0;
  assign l14 = m52 ^ m61;
  assign l15 = m55 ^ l1;
  assign l16 = m56 ^ l0;
  assign l17 = m57 ^ l1;
  assign l18 = m58 ^ l8;
  assign l19 = m63 ^ l4;
  assign l20 = l0 ^ l1;
  assign l21 = l1 ^ l7;
  assign l22 = l3 ^ l12;
  assign l23 = l18 ^ l2;
  assign l24 = l15 ^ l9;
  assign l25 = l6 ^ l10;
  assign l26 = l7 ^ l9;
  assign l27 = l8 ^ l10;
  assign l28 = l11 ^ l14;
  assign l29 = l11 ^ l17;

  assign s[7] = l6 ^ l24;
  assign s[6] = ~(l16 ^ l26);
  assign s[5] = ~(l19 ^ l28);
  assign s[4] = l6 ^ l21;
  assign s[3] = l20 ^ l22;
  assign s[2] = l25 ^ l29;
  assign s[1] = ~(l13 ^ l27);
  assign s[0] = ~(l6 ^ l23);
endmodule
