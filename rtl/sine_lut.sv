// sine_lut: 1,024-point full-cycle sine table with two combinational read
// ports, shared by every block that needs a carrier, a chirp or an FFT
// twiddle factor.
//
// Entry k is round(2047 * sin(2*pi*k/1024)) as a 12-bit two's-complement
// number; a cosine is read at address k+256. Only the first quarter wave
// (257 values, k = 0..256) is stored, as a constant case table; the other
// quarters follow from sin(pi - x) = sin(x) and sin(x + pi) = -sin(x), which
// reproduce the rounded full table exactly. Reads are combinational (a
// distributed ROM) with no clock. The table size and amplitude are this
// design's choice; the paper only requires chirps and downchirps, which are
// built from this table by phase arithmetic.
module sine_lut
  import ptn_pkg::*;
(
  input  logic [9:0]              addr_a,
  output logic signed [LUT_W-1:0] sin_a,
  input  logic [9:0]              addr_b,
  output logic signed [LUT_W-1:0] sin_b
);
  // First quarter wave, 0 <= i <= 256 (all values are non-negative).
  function automatic logic [LUT_W-2:0] quarter(input logic [8:0] i);
    logic [LUT_W-2:0] q;
    case (i)
      9'd0: q = 11'd0;
      9'd1: q = 11'd13;
      9'd2: q = 11'd25;
      9'd3: q = 11'd38;
      9'd4: q = 11'd50;
      9'd5: q = 11'd63;
      9'd6: q = 11'd75;
      9'd7: q = 11'd88;
      9'd8: q = 11'd100;
      9'd9: q = 11'd113;
      9'd10: q = 11'd126;
      9'd11: q = 11'd138;
      9'd12: q = 11'd151;
      9'd13: q = 11'd163;
      9'd14: q = 11'd176;
      9'd15: q = 11'd188;
      9'd16: q = 11'd201;
      9'd17: q = 11'd213;
      9'd18: q = 11'd226;
      9'd19: q = 11'd238;
      9'd20: q = 11'd251;
      9'd21: q = 11'd263;
      9'd22: q = 11'd275;
      9'd23: q = 11'd288;
      9'd24: q = 11'd300;
      9'd25: q = 11'd313;
      9'd26: q = 11'd325;
      9'd27: q = 11'd338;
      9'd28: q = 11'd350;
      9'd29: q = 11'd362;
      9'd30: q = 11'd375;
      9'd31: q = 11'd387;
      9'd32: q = 11'd399;
      9'd33: q = 11'd412;
      9'd34: q = 11'd424;
      9'd35: q = 11'd436;
      9'd36: q = 11'd449;
      9'd37: q = 11'd461;
      9'd38: q = 11'd473;
      9'd39: q = 11'd485;
      9'd40: q = 11'd497;
      9'd41: q = 11'd510;
      9'd42: q = 11'd522;
      9'd43: q = 11'd534;
      9'd44: q = 11'd546;
      9'd45: q = 11'd558;
      9'd46: q = 11'd570;
      9'd47: q = 11'd582;
      9'd48: q = 11'd594;
      9'd49: q = 11'd606;
      9'd50: q = 11'd618;
      9'd51: q = 11'd630;
      9'd52: q = 11'd642;
      9'd53: q = 11'd654;
      9'd54: q = 11'd666;
      9'd55: q = 11'd678;
      9'd56: q = 11'd690;
      9'd57: q = 11'd701;
      9'd58: q = 11'd713;
      9'd59: q = 11'd725;
      9'd60: q = 11'd737;
      9'd61: q = 11'd748;
      9'd62: q = 11'd760;
      9'd63: q = 11'd772;
      9'd64: q = 11'd783;
      9'd65: q = 11'd795;
      9'd66: q = 11'd807;
      9'd67: q = 11'd818;
      9'd68: q = 11'd830;
      9'd69: q = 11'd841;
      9'd70: q = 11'd852;
      9'd71: q = 11'd864;
      9'd72: q = 11'd875;
      9'd73: q = 11'd887;
      9'd74: q = 11'd898;
      9'd75: q = 11'd909;
      9'd76: q = 11'd920;
      9'd77: q = 11'd932;
      9'd78: q = 11'd943;
      9'd79: q = 11'd954;
      9'd80: q = 11'd965;
      9'd81: q = 11'd976;
      9'd82: q = 11'd987;
      9'd83: q = 11'd998;
      9'd84: q = 11'd1009;
      9'd85: q = 11'd1020;
      9'd86: q = 11'd1031;
      9'd87: q = 11'd1042;
      9'd88: q = 11'd1052;
      9'd89: q = 11'd1063;
      9'd90: q = 11'd1074;
      9'd91: q = 11'd1085;
      9'd92: q = 11'd1095;
      9'd93: q = 11'd1106;
      9'd94: q = 11'd1116;
      9'd95: q = 11'd1127;
      9'd96: q = 11'd1137;
      9'd97: q = 11'd1148;
      9'd98: q = 11'd1158;
      9'd99: q = 11'd1168;
      9'd100: q = 11'd1179;
      9'd101: q = 11'd1189;
      9'd102: q = 11'd1199;
      9'd103: q = 11'd1209;
      9'd104: q = 11'd1219;
      9'd105: q = 11'd1229;
      9'd106: q = 11'd1239;
      9'd107: q = 11'd1249;
      9'd108: q = 11'd1259;
      9'd109: q = 11'd1269;
      9'd110: q = 11'd1279;
      9'd111: q = 11'd1289;
      9'd112: q = 11'd1299;
      9'd113: q = 11'd1308;
      9'd114: q = 11'd1318;
      9'd115: q = 11'd1328;
      9'd116: q = 11'd1337;
      9'd117: q = 11'd1347;
      9'd118: q = 11'd1356;
      9'd119: q = 11'd1365;
      9'd120: q = 11'd1375;
      9'd121: q = 11'd1384;
      9'd122: q = 11'd1393;
      9'd123: q = 11'd1402;
      9'd124: q = 11'd1411;
      9'd125: q = 11'd1421;
      9'd126: q = 11'd1430;
      9'd127: q = 11'd1439;
      9'd128: q = 11'd1447;
      9'd129: q = 11'd1456;
      9'd130: q = 11'd1465;
      9'd131: q = 11'd1474;
      9'd132: q = 11'd1483;
      9'd133: q = 11'd1491;
      9'd134: q = 11'd1500;
      9'd135: q = 11'd1508;
      9'd136: q = 11'd1517;
      9'd137: q = 11'd1525;
      9'd138: q = 11'd1533;
      9'd139: q = 11'd1542;
      9'd140: q = 11'd1550;
      9'd141: q = 11'd1558;
      9'd142: q = 11'd1566;
      9'd143: q = 11'd1574;
      9'd144: q = 11'd1582;
      9'd145: q = 11'd1590;
      9'd146: q = 11'd1598;
      9'd147: q = 11'd1606;
      9'd148: q = 11'd1614;
      9'd149: q = 11'd1621;
      9'd150: q = 11'd1629;
      9'd151: q = 11'd1637;
      9'd152: q = 11'd1644;
      9'd153: q = 11'd1652;
      9'd154: q = 11'd1659;
      9'd155: q = 11'd1666;
      9'd156: q = 11'd1674;
      9'd157: q = 11'd1681;
      9'd158: q = 11'd1688;
      9'd159: q = 11'd1695;
      9'd160: q = 11'd1702;
      9'd161: q = 11'd1709;
      9'd162: q = 11'd1716;
      9'd163: q = 11'd1723;
      9'd164: q = 11'd1729;
      9'd165: q = 11'd1736;
      9'd166: q = 11'd1743;
      9'd167: q = 11'd1749;
      9'd168: q = 11'd1756;
      9'd169: q = 11'd1762;
      9'd170: q = 11'd1769;
      9'd171: q = 11'd1775;
      9'd172: q = 11'd1781;
      9'd173: q = 11'd1787;
      9'd174: q = 11'd1793;
      9'd175: q = 11'd1799;
      9'd176: q = 11'd1805;
      9'd177: q = 11'd1811;
      9'd178: q = 11'd1817;
      9'd179: q = 11'd1823;
      9'd180: q = 11'd1828;
      9'd181: q = 11'd1834;
      9'd182: q = 11'd1840;
      9'd183: q = 11'd1845;
      9'd184: q = 11'd1850;
      9'd185: q = 11'd1856;
      9'd186: q = 11'd1861;
      9'd187: q = 11'd1866;
      9'd188: q = 11'd1871;
      9'd189: q = 11'd1876;
      9'd190: q = 11'd1881;
      9'd191: q = 11'd1886;
      9'd192: q = 11'd1891;
      9'd193: q = 11'd1896;
      9'd194: q = 11'd1901;
      9'd195: q = 11'd1905;
      9'd196: q = 11'd1910;
      9'd197: q = 11'd1914;
      9'd198: q = 11'd1919;
      9'd199: q = 11'd1923;
      9'd200: q = 11'd1927;
      9'd201: q = 11'd1932;
      9'd202: q = 11'd1936;
      9'd203: q = 11'd1940;
      9'd204: q = 11'd1944;
      9'd205: q = 11'd1948;
      9'd206: q = 11'd1951;
      9'd207: q = 11'd1955;
      9'd208: q = 11'd1959;
      9'd209: q = 11'd1962;
      9'd210: q = 11'd1966;
      9'd211: q = 11'd1969;
      9'd212: q = 11'd1973;
      9'd213: q = 11'd1976;
      9'd214: q = 11'd1979;
      9'd215: q = 11'd1983;
      9'd216: q = 11'd1986;
      9'd217: q = 11'd1989;
      9'd218: q = 11'd1992;
      9'd219: q = 11'd1994;
      9'd220: q = 11'd1997;
      9'd221: q = 11'd2000;
      9'd222: q = 11'd2003;
      9'd223: q = 11'd2005;
      9'd224: q = 11'd2008;
      9'd225: q = 11'd2010;
      9'd226: q = 11'd2012;
      9'd227: q = 11'd2015;
      9'd228: q = 11'd2017;
      9'd229: q = 11'd2019;
      9'd230: q = 11'd2021;
      9'd231: q = 11'd2023;
      9'd232: q = 11'd2025;
      9'd233: q = 11'd2027;
      9'd234: q = 11'd2028;
      9'd235: q = 11'd2030;
      9'd236: q = 11'd2032;
      9'd237: q = 11'd2033;
      9'd238: q = 11'd2035;
      9'd239: q = 11'd2036;
      9'd240: q = 11'd2037;
      9'd241: q = 11'd2038;
      9'd242: q = 11'd2039;
      9'd243: q = 11'd2040;
      9'd244: q = 11'd2041;
      9'd245: q = 11'd2042;
      9'd246: q = 11'd2043;
      9'd247: q = 11'd2044;
      9'd248: q = 11'd2045;
      9'd249: q = 11'd2045;
      9'd250: q = 11'd2046;
      9'd251: q = 11'd2046;
      9'd252: q = 11'd2046;
      9'd253: q = 11'd2047;
      9'd254: q = 11'd2047;
      9'd255: q = 11'd2047;
      9'd256: q = 11'd2047;
      default: q = '0;
    endcase
    return q;
  endfunction

  function automatic logic signed [LUT_W-1:0] lookup(input logic [9:0] k);
    logic [LUT_W-2:0] mag;
    // quarters 1 and 3 run the table backwards
    mag = k[8] ? quarter(9'd256 - 9'(k[7:0])) : quarter(9'(k[7:0]));
    return k[9] ? -signed'({1'b0, mag}) : signed'({1'b0, mag});
  endfunction

  assign sin_a = lookup(addr_a);
  assign sin_b = lookup(addr_b);
endmodule
