// gps_parity_pkg: (32,26) Hamming parity of the GPS L1 C/A navigation
// message, shared by the navigation-data decoder and its testbench.
//
// A word is 30 bits, D1 first transmitted; here w[29] = D1 .. w[0] = D30.
// Data bits are sent xor'ed with D30 of the previous word (D30*); the six
// parity bits D25..D30 follow the equations of the GPS interface
// specification, which also use D29* and D30*.
package gps_parity_pkg;

  function automatic logic [5:0] gps_parity(input logic d29s, input logic d30s,
                                            input logic [23:0] d);
    // d[23] = d1 .. d[0] = d24 (source data bits, already un-inverted)
    logic [24:1] b;
    logic [5:0]  p;
    for (int i = 1; i <= 24; i++) b[i] = d[24 - i];
    p[5] = d29s ^ b[1]^b[2]^b[3]^b[5]^b[6]^b[10]^b[11]^b[12]^b[13]^b[14]^b[17]^b[18]^b[20]^b[23];
    p[4] = d30s ^ b[2]^b[3]^b[4]^b[6]^b[7]^b[11]^b[12]^b[13]^b[14]^b[15]^b[18]^b[19]^b[21]^b[24];
    p[3] = d29s ^ b[1]^b[3]^b[4]^b[5]^b[7]^b[8]^b[12]^b[13]^b[14]^b[15]^b[16]^b[19]^b[20]^b[22];
    p[2] = d30s ^ b[2]^b[4]^b[5]^b[6]^b[8]^b[9]^b[13]^b[14]^b[15]^b[16]^b[17]^b[20]^b[21]^b[23];
    p[1] = d30s ^ b[1]^b[3]^b[5]^b[6]^b[7]^b[9]^b[10]^b[14]^b[15]^b[16]^b[17]^b[18]^b[21]^b[22]^b[24];
    p[0] = d29s ^ b[3]^b[5]^b[6]^b[8]^b[9]^b[10]^b[11]^b[13]^b[15]^b[19]^b[22]^b[23]^b[24];
    return p;
  endfunction

  // true when the 30-bit word w passes parity given the previous D29*, D30*
  function automatic logic gps_word_ok(input logic d29s, input logic d30s,
                                       input logic [29:0] w);
    logic [23:0] d;
    d = w[29:6] ^ {24{d30s}};
    return gps_parity(d29s, d30s, d) == w[5:0];
  endfunction

endpackage
