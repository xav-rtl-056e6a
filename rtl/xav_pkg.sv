// xav_pkg: types, sizes and the hash shared by the XAV matching engine.
//
// The engine finds fragments of regular expressions in packets in three
// steps: a pre-filter (one direct bitmap and two xor filters) marks the
// positions where a short literal may end, an anchor DFA started at each
// marked position confirms the fragment, and host software checks the rest.
// This package holds what several modules share: the default sizes, the
// configuration-bus encoding, the report record and the hash function of
// the xor filter units. The defaults for the number of matching units (64)
// and STT copies (6) follow the paper; the other widths are this design's
// own choices and are noted where they are set.
package xav_pkg;

  // Sizes that several modules use as parameter defaults.
  localparam int unsigned POS_W   = 11;  // byte position in a packet (2048-byte buffer)
  localparam int unsigned STATE_W = 14;  // anchor-DFA state number (uncompressed STT)
  localparam int unsigned FRAG_W  = 13;  // lsRE fragment id
  localparam int unsigned PKT_W   = 16;  // packet sequence id
  localparam int unsigned FP_W    = 8;   // xor filter fingerprint width
  localparam int unsigned SEG_W   = 11;  // log2 of the slots in one xor filter segment

  // Reserved states of the shared state transition table.
  localparam int unsigned DEAD_STATE = 0;  // trap state: ends a matching thread
  localparam int unsigned REV_START  = 1;  // initial state of the reverse DFA

  // Configuration bus targets. Every write is broadcast to all matching
  // units (filters) or all STT copies (transition table).
  typedef enum logic [2:0] {
    CFG_DFU       = 3'd0,  // addr = word index (1024 words), data[63:0] = bitmap word
    CFG_XFU4      = 3'd1,  // addr = slot (3 segments of 2^SEG_W), data[FP_W-1:0]
    CFG_XFU8      = 3'd2,  // same for the 8-byte unit
    CFG_XFU4_SEED = 3'd3,  // data = 64-bit hash seed
    CFG_XFU8_SEED = 3'd4,
    CFG_STT_TRANS = 3'd5,  // addr = {state, byte}, data[STATE_W-1:0] = next state
    CFG_STT_INFO  = 3'd6   // addr = state, data = stt_info_t
  } cfg_sel_e;

  // Per-state information of the shared STT. For a reverse-DFA accepting
  // state, frag is the fragment whose front part ends here and fwd_start the
  // forward-DFA state that matches its back part (DEAD_STATE if it has none).
  // For a forward-DFA accepting state, frag is the fragment that completes.
  typedef struct packed {
    logic               accept;
    logic [FRAG_W-1:0]  frag;
    logic [STATE_W-1:0] fwd_start;
  } stt_info_t;

  // A state transition query of one matching thread, and its result: the
  // next state together with that state's information word.
  typedef struct packed {
    logic [STATE_W-1:0] state;
    logic [7:0]         symbol;
  } stt_query_t;

  typedef struct packed {
    logic [STATE_W-1:0] next;
    stt_info_t          info;
  } stt_resp_t;

  // One lsRE fragment match sent to the host: packet, fragment and the first
  // and last byte positions of the text it matched.
  typedef struct packed {
    logic [PKT_W-1:0]  pkt;
    logic [FRAG_W-1:0] frag;
    logic [POS_W-1:0]  start_pos;
    logic [POS_W-1:0]  end_pos;
  } report_t;

  // 64-bit mixing hash of the xor filter units: the murmur3 finaliser applied
  // to (key xor seed), as in the reference xor-filter construction.
  function automatic logic [63:0] xav_hash(input logic [63:0] key, input logic [63:0] seed);
    logic [63:0] h;
    h = key ^ seed;
    h = h ^ (h >> 33);
    h = h * 64'hff51afd7ed558ccd;
    h = h ^ (h >> 33);
    h = h * 64'hc4ceb9fe1a85ec53;
    h = h ^ (h >> 33);
    return h;
  endfunction

endpackage
