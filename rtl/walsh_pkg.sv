// walsh_pkg: widths and types shared by the Walsh controller and the Walsh
// system-identification (SID) datapath.
//
// The numeric defaults follow the published FPGA implementation: 8-bit Paley
// orders, 8-bit timing expansion t1, 4-bit modulation expansion t2, 4-bit
// repeat count, 14-bit weights and DAC words, a 13-bit phase into the sine /
// cosine table and 13-bit measured fidelities. The mode encoding is the one
// printed on the synthesizer's output multiplexers; code 2'b10 is unused and
// is this design's choice to output zero.
package walsh_pkg;

  localparam int ORDER_W  = 8;   // Paley order width (s, n <= 255)
  localparam int T1_W     = 8;   // timing clock expansion t1
  localparam int T2_W     = 4;   // modulation clock expansion t2
  localparam int REP_W    = 4;   // repeat count R
  localparam int XW       = 14;  // Walsh synthesis weight width
  localparam int DAC_W    = 14;  // I / Q output width
  localparam int PHASE_W  = 13;  // DDS phase input width
  localparam int QAM_OPW  = 7;   // MSBs kept by the QAM multipliers
  localparam int P_W      = 13;  // fidelity word width
  localparam int GTX_W    = 12;  // arcsin LUT output width
  localparam int DIV_W    = 14;  // divider operand / quotient width

  typedef enum logic [1:0] {
    MODE_AM  = 2'b00,
    MODE_PM  = 2'b01,
    MODE_OFF = 2'b10,
    MODE_QAM = 2'b11
  } mod_mode_e;

  // Bit width m(x) of an unsigned value: index of the highest set bit plus 1,
  // 0 for x == 0.
  function automatic logic [3:0] bit_width8(input logic [ORDER_W-1:0] x);
    logic [3:0] w;
    w = '0;
    for (int i = 0; i < ORDER_W; i++)
      if (x[i]) w = 4'(i + 1);
    return w;
  endfunction

  // Saturate a signed value to a narrower signed range.
  function automatic logic signed [XW-1:0] sat14(input logic signed [31:0] v);
    if (v > 32'sd8191)       return 14'sd8191;
    else if (v < -32'sd8192) return -14'sd8192;
    else                     return v[XW-1:0];
  endfunction

endpackage
