// dptc_pkg -- constants, types and small helper functions shared by the
// difference predicted trace compression (DPTC) modules.
//
// A trace of n-bit samples is stored as: the first sample with n bits, then
// groups of four differences. Each group starts with a 2-bit header; codes
// 01/10/11 mean "same width as the previous group -1/0/+1 bit", code 00 is
// followed by a k-bit field holding (dm - 2), where dm is the width change
// taken modulo n and k = ceil(log2(n-3)). Values are stored with m bits and
// a bias of 2^(m-1). Everything is packed LSB first into 32-bit words.
// The header codes, k and the bias follow the paper; reading the long-header
// change modulo n is this design's reading of k = ceil(log2(n-3)).
package dptc_pkg;

  // Width of one output word.
  localparam int unsigned WORD_W = 32;
  // Values per group.
  localparam int unsigned GROUP_SIZE = 4;
  // Width of the short header and of the code part of a long header.
  localparam int unsigned SHORT_HDR_W = 2;

  // Header codes (2 bits, stored first in the stream).
  localparam logic [1:0] HDR_CODE_LONG = 2'b00;
  localparam logic [1:0] HDR_CODE_DEC  = 2'b01;  // m = m_prev - 1
  localparam logic [1:0] HDR_CODE_SAME = 2'b10;  // m = m_prev
  localparam logic [1:0] HDR_CODE_INC  = 2'b11;  // m = m_prev + 1

  // Which header travels in front of an encoded value.
  typedef enum logic [1:0] {
    HDR_NONE  = 2'd0,   // value 2..4 of a group, or the first sample
    HDR_SHORT = 2'd1,   // 2-bit header
    HDR_LONG  = 2'd2    // 2-bit code + k-bit width change
  } hdr_kind_e;

  // Bits of the long-header width-change field: k = ceil(log2(n-3)).
  function automatic int unsigned k_bits(input int unsigned n);
    return $clog2(n - 3);
  endfunction

  // Full width of a long header: 2 + k.
  function automatic int unsigned long_hdr_bits(input int unsigned n);
    return SHORT_HDR_W + k_bits(n);
  endfunction

endpackage
