// diva_pkg: types and constants shared by the DIVA-DRAM memory-controller blocks.
//
// The DIMM is a 64-bit DDR3 channel built from eight x8 data chips plus one x8
// ECC chip. A column access (burst of eight) moves eight beats of 72 bits: each
// beat is one (72,64) SECDED codeword, so a 64-byte cache line is eight
// codewords, 576 bits on the DRAM side and 512 bits on the host side.
//
// Timing values are in DRAM clock cycles of a DDR3-1600 part (tCK = 1.25 ns).
// The standard values 13.75/35.0/13.75/15.0 ns for tRCD/tRAS/tRP/tWR are the
// datasheet numbers the characterisation starts from; 11/28/11/12 cycles are
// those rounded up to whole cycles. The floors 5 ns (tRCD/tRP/tWR) and
// tRCD + 10 ns (tRAS) are the lowest settings of the characterisation set-up;
// here they bound how far the online profiler may lower a parameter.
//
// The SECDED code is an extended Hamming code (this design's choice; the
// paper only says SECDED with the check bits in a separate chip). Data bit i
// sits at Hamming position secded_dpos(i), the positions 1..71 that are not a
// power of two; the check bits take the power-of-two positions.
package diva_pkg;

  localparam int BEATS        = 8;    // burst length 8
  localparam int LANES        = 9;    // 8 data chips + 1 ECC chip, 8 bits each
  localparam int DATA_W       = 64;   // data bits per codeword (one beat)
  localparam int CW_W         = 72;   // codeword bits per beat
  localparam int LINE_W       = BEATS * DATA_W;  // 512-bit host line
  localparam int CODED_LINE_W = BEATS * CW_W;    // 576-bit DRAM line
  localparam int TW           = 6;    // width of one timing field in cycles

  // One set of the four timing parameters the profiler tunes.
  typedef struct packed {
    logic [TW-1:0] trcd;
    logic [TW-1:0] tras;
    logic [TW-1:0] trp;
    logic [TW-1:0] twr;
  } timing_t;

  localparam timing_t STD_TIMING = '{trcd: 6'd11, tras: 6'd28, trp: 6'd11, twr: 6'd12};
  localparam timing_t MIN_TIMING = '{trcd: 6'd4,  tras: 6'd12, trp: 6'd4,  twr: 6'd4};

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } dram_cmd_e;

  // Index of a timing field, in the order the profiler visits them.
  typedef enum logic [1:0] {
    P_TRCD = 2'd0,
    P_TRAS = 2'd1,
    P_TRP  = 2'd2,
    P_TWR  = 2'd3
  } tparam_e;

  function automatic logic [TW-1:0] tget(timing_t t, tparam_e p);
    case (p)
      P_TRCD:  return t.trcd;
      P_TRAS:  return t.tras;
      P_TRP:   return t.trp;
      default: return t.twr;
    endcase
  endfunction

  function automatic timing_t tset(timing_t t, tparam_e p, logic [TW-1:0] v);
    timing_t r;
    r = t;
    case (p)
      P_TRCD:  r.trcd = v;
      P_TRAS:  r.tras = v;
      P_TRP:   r.trp  = v;
      default: r.twr  = v;
    endcase
    return r;
  endfunction

  // Hamming positions (1..71) of the 64 data bits, 7 bits each: data bit i
  // sits at DPOS_TBL[7*i +: 7]. Computed once, at elaboration.
  function automatic logic [7*DATA_W-1:0] gen_dpos_tbl();
    logic [7*DATA_W-1:0] t;
    int n;
    t = '0;
    n = 0;
    for (int pos = 1; pos < 72; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        t[7*n +: 7] = 7'(pos);
        n++;
      end
    end
    return t;
  endfunction

  localparam logic [7*DATA_W-1:0] DPOS_TBL = gen_dpos_tbl();

  function automatic logic [6:0] secded_dpos(int i);
    return DPOS_TBL[7*i +: 7];
  endfunction

  // The seven Hamming check bits of a 64-bit data word.
  function automatic logic [6:0] secded_check(logic [DATA_W-1:0] d);
    logic [6:0] c;
    c = '0;
    for (int i = 0; i < DATA_W; i++)
      if (d[i]) c ^= DPOS_TBL[7*i +: 7];
    return c;
  endfunction

endpackage
