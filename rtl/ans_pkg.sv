// ans_pkg: types and constants shared by the coding-pair compressors and
// decompressors, the number-format interfaces and the streaming fabric.
//
// A coding pair is a short "code", which is entropy coded, plus up to
// AD_W bits of "additional data" that travel uncompressed. The number of
// additional-data bits is configured per code (0..AD_W). Inside the fabric
// the additional data is always carried left-aligned in an AD_W-bit field:
// the first stored bit (normally the sign) is bit AD_W-1, unused low bits
// are zero. The limits (64 codes, 8 bits of additional data, 8-bit tANS
// probabilities with 16-bit words, 16-bit rANS probabilities with 32-bit
// words) are those of the cores described in the paper; the rANS state
// size (RANS_Q) and the configuration bus layout are this design's choice.
//
// Configuration: every table in a channel is written through one bus,
// cfg_t. `chan` selects the channel, `unit` the table, `addr` the entry and
// `data` holds the fields laid out as documented next to each unit.
package ans_pkg;

  localparam int unsigned CODE_W = 6;              // up to 64 codes
  localparam int unsigned NCODES = 1 << CODE_W;
  localparam int unsigned AD_W   = 8;              // additional data, max bits
  localparam int unsigned ADL_W  = 4;              // holds 0..AD_W

  // tANS: 8-bit probabilities -> 256-entry state table, 16-bit words.
  localparam int unsigned TANS_R    = 8;
  localparam int unsigned TANS_L    = 1 << TANS_R;
  localparam int unsigned TANS_WORD = 16;
  localparam int unsigned TANS_KMAX = TANS_R + AD_W;      // bits pushed per pair, max

  // rANS: 16-bit probabilities, state in [2^(N+Q), 2^(N+Q+1)), 32-bit words.
  localparam int unsigned RANS_N    = 16;
  localparam int unsigned RANS_Q    = 8;
  localparam int unsigned RANS_SB   = RANS_N + RANS_Q;     // state offset bits
  localparam int unsigned RANS_WORD = 32;
  localparam int unsigned RANS_KMAX = RANS_N + AD_W;       // bits pushed per pair, max

  // Internal number width seen by the processors (bfloat16 or int16).
  localparam int unsigned VAL_W = 16;

  // Memory word: wide enough for the rANS word; tANS words use the low half.
  localparam int unsigned MEM_W  = 32;

  typedef struct packed {
    logic [CODE_W-1:0] code;
    logic [AD_W-1:0]   ad;     // left-aligned, zero padded
  } pair_t;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [6:0] man;
  } bf16_t;

  typedef enum logic [3:0] {
    U_ADL       = 4'd0,  // addr=code: data[3:0] additional-data bits of the code
    U_TANS_DEC  = 4'd1,  // addr=state: data[5:0] code, [9:6] nb, [17:10] next-state base
    U_TANS_ESYM = 4'd2,  // addr=code: data[7:0] n, [11:8] k, [19:12] cumulative count
    U_TANS_EST  = 4'd3,  // addr=slot: data[7:0] next state (offset from L)
    U_RANS_SYM  = 4'd4,  // addr=code: data[15:0] f, [31:16] cumulative, [36:32] k
    U_FPX_LUT   = 4'd5,  // addr=code: data[7:0] exponent, [8] direct, [24:9] direct value
    U_FXX_LUT   = 4'd6,  // addr=code: data[5:0] signed shift, [6] direct, [22:7] direct value
    U_FPR_LUT   = 4'd7,  // addr=exponent: data[5:0] code, [8:6] mantissa bits kept
    U_FXR_LUT   = 4'd8,  // addr=MSB position+1 (0 = zero): data[5:0] code, [8:6] mantissa bits kept
    U_CHAN      = 4'd9,  // addr 0: data[0] coder (0 tANS, 1 rANS), [1] format (0 float, 1 fixed)
                         // addr 1: data[31:0] number of values in the stream; addr 2: start
                         // addr 3 (decompression): [38:33] shift, [32] enter mid-stream, [31:0] entry header
                         // addr 3 (compression): [32] resume, [31:0] header; addr 4: partial word
    U_ARB       = 4'd10  // addr 0: data[31:0] base address (starts the channel); addr 1: word count
  } cfg_unit_e;

  typedef struct packed {
    logic      we;
    logic [7:0] chan;
    cfg_unit_e unit;
    logic [7:0] addr;
    logic [47:0] data;
  } cfg_t;

  typedef enum logic {CODER_TANS = 1'b0, CODER_RANS = 1'b1} coder_e;
  typedef enum logic {FMT_FLOAT = 1'b0, FMT_FIXED = 1'b1} format_e;

endpackage
