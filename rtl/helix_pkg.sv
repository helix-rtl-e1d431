// Shared constants and types of the Helix base-calling accelerator.
//
// DNA symbols are carried as 3-bit codes, the encoding the read-vote hardware
// compares bit by bit: T=000, A=001, C=010, G=100 and the CTC blank 101. The
// codes come from the paper's read-vote example; the enum and the helper
// functions are this design's own.
package helix_pkg;

  typedef enum logic [2:0] {
    SYM_T     = 3'b000,
    SYM_A     = 3'b001,
    SYM_C     = 3'b010,
    SYM_G     = 3'b100,
    SYM_BLANK = 3'b101
  } dna_sym_e;

  localparam int unsigned SYM_BITS   = 3;   // bits per encoded symbol
  localparam int unsigned XBAR_N     = 128; // crossbar rows and columns
  localparam int unsigned CELL_BITS  = 2;   // bits stored per crossbar cell
  localparam int unsigned ADC_BITS   = 5;   // SOT-MRAM ADC resolution
  localparam int unsigned Q_BITS     = 5;   // quantised input and weight width (SEAT)
  localparam int unsigned BL_W       = 9;   // width of a bit-line sum: 128 * 3 < 512
  localparam int unsigned ACC_W      = 16;  // output-register word

  // Symbol index 0..3 (A,C,G,T) used by the vote counters.
  function automatic logic [1:0] sym_index(dna_sym_e s);
    case (s)
      SYM_A:   return 2'd0;
      SYM_C:   return 2'd1;
      SYM_G:   return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  function automatic dna_sym_e index_sym(logic [1:0] i);
    case (i)
      2'd0:    return SYM_A;
      2'd1:    return SYM_C;
      2'd2:    return SYM_G;
      default: return SYM_T;
    endcase
  endfunction

  // Two-cell pattern of one symbol on the comparator array: code bit 2 first,
  // bit v as (v, ~v). Used both for stored cells (1 = HRS) and for the query
  // (1 = read bit-line driven high).
  function automatic logic [2*SYM_BITS-1:0] sym_pairs(dna_sym_e s);
    logic [2*SYM_BITS-1:0] p;
    for (int unsigned b = 0; b < SYM_BITS; b++) begin
      p[2*b]     = s[SYM_BITS-1-b];
      p[2*b + 1] = ~s[SYM_BITS-1-b];
    end
    return p;
  endfunction

endpackage
