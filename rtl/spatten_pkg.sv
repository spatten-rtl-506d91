// spatten_pkg: constants and types shared by the SpAtten attention accelerator.
//
// The sizes follow the paper's main configuration: 16 HBM channels of 128 bits,
// 32 fetch ports with 64-deep FIFOs, 12-bit on-chip elements, 512 multipliers in
// each of the two matrix units, and a context of at most 1024 tokens. The memory
// request format (a word address plus a return tag made of port and reorder slot)
// is this design's own choice.
package spatten_pkg;
  parameter int EW      = 12;    // on-chip element width (bits)
  parameter int NCH     = 16;    // HBM channels
  parameter int NPORT   = 32;    // fetch ports / address and data FIFOs
  parameter int WORD_W  = 128;   // one HBM channel word
  parameter int ADDR_W  = 28;    // word address
  parameter int FDEPTH  = 64;    // address / data FIFO depth
  parameter int SLOT_W  = 6;     // log2(FDEPTH)
  parameter int PORT_W  = 5;     // log2(NPORT)
  parameter int MAXTOK  = 1024;  // longest context
  parameter int TOKW    = 10;    // log2(MAXTOK)
  parameter int MAXHEAD = 16;
  parameter int HEADW   = 4;
  parameter int MULTS   = 512;   // multipliers per matrix unit
  parameter int SEG     = 64;    // elements per fetched segment (minimum head dim)
  parameter int NSEGL   = MULTS / SEG;  // segments per SRAM line (8)

  typedef struct packed {
    logic [PORT_W-1:0] port;
    logic [SLOT_W-1:0] slot;
  } mem_tag_t;

  // 39 bits, fits the 8-byte address FIFO entry
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    mem_tag_t          tag;
  } mem_req_t;

  typedef enum logic [1:0] {KIND_Q = 2'd0, KIND_K = 2'd1, KIND_V = 2'd2} qkv_kind_e;

  // One vector to fetch: its kind, bit plane, head, token and destination slot.
  typedef struct packed {
    qkv_kind_e        kind;
    logic             lsb;
    logic [HEADW-1:0] head;
    logic [TOKW-1:0]  token;
    logic [TOKW-1:0]  slot;
  } fetch_cmd_t;

  // Where a fetched segment goes once converted.
  typedef struct packed {
    qkv_kind_e       kind;
    logic            lsb;
    logic [TOKW+2:0] seg;    // global segment index in the destination buffer
  } seg_desc_t;

  // Per-layer configuration of the accelerator.
  typedef struct packed {
    logic [1:0]       dlog;       // head dimension D = 64 << dlog
    logic [3:0]       msb_bits;   // MSB width: 4, 6, 8, 10 or 12 (LSB plane is 4 bits)
    logic             pq_en;      // progressive quantization on
    logic [EW-1:0]    thres;      // max-probability threshold, Q0.12
    logic [15:0]      scale;      // score dequantization / sqrt(D), Q0.16 per score LSB
    logic [4:0]       qk_shift;   // right shift of the raw dot product to 12 bits
    logic             gen_mode;   // generation stage: one query token
    logic [TOKW:0]    n_tokens;   // sentence length at new_sentence
    logic [TOKW-1:0]  q_token;    // query token in generation mode
    logic [HEADW:0]   n_heads;    // heads at new_sentence
    logic [8:0]       tok_keep;   // fraction of tokens kept per head, Q1.8 (256 = all)
    logic [8:0]       head_keep;  // fraction of heads kept at layer end, Q1.8
    logic [8:0]       v_keep;     // fraction of V vectors kept per query, Q1.8
  } cfg_t;

  // Words per 64-element segment for a plane of `bits` bits per element.
  function automatic int unsigned words_per_seg(input logic [3:0] bits);
    return int'(bits) / 2;
  endfunction
endpackage
