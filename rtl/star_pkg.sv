// star_pkg: shared types and index arithmetic of the sub-entry sharing-aware
// (STAR) L3 TLB.
//
// The L3 TLB holds 1024 entries as 128 sets x 8 ways. Every entry carries 16
// sub-entries, each mapping one 64 KB page of a 1 MB aligned virtual range
// (the virtual page base, VPB). An entry may be shared by two base addresses.
// Its 2-bit layout field then says how the 4-bit sub-entry index of a virtual
// address is split into a 3-bit slot position and a 1-bit address identify
// bit (AIB) that is stored with the sub-entry:
//   LAYOUT_NONE (00): not shared, the 4-bit index selects the sub-entry.
//   LAYOUT_SEQ  (01): base 1 owns slots 0..7, base 2 slots 8..15; the low
//                     three index bits give the position, the top bit is AIB.
//   LAYOUT_STR  (10): base 1 owns the even slots, base 2 the odd ones; the
//                     top three index bits give the position, the low bit is
//                     AIB.
// Field widths (30-bit VPB, 7-bit set index, 16-bit page offset, 52-bit
// physical address space per sub-entry, 2-bit v/d per base) follow the
// paper's entry format. The process identifier stored with each base and the
// explicit valid bit of each sub-entry are this design's additions: the
// sharing policy prefers entries of the same process, and a valid bit lets a
// zero frame number be mapped.
//
// Address split used here (bit 0 = LSB of the virtual address):
//   [56:27] VPB | [26:20] set index | [19:16] sub-entry index | [15:0] offset
// so that the 16 sub-entries of an entry cover one 1 MB aligned range. The
// paper's format drawings place the sub-entry index above the set index; the
// text's "16 pages ... within the same 1 MB aligned range" is followed.
package star_pkg;

  localparam int unsigned VPB_W    = 30;
  localparam int unsigned SET_W    = 7;
  localparam int unsigned SUB_W    = 4;
  localparam int unsigned OFF_W    = 16;
  localparam int unsigned VA_W     = VPB_W + SET_W + SUB_W + OFF_W;  // 57
  localparam int unsigned PAS_W    = 52;
  localparam int unsigned PA_W     = PAS_W + OFF_W;
  localparam int unsigned PID_W    = 3;
  localparam int unsigned NSUB     = 16;
  localparam int unsigned NWAYS    = 8;
  localparam int unsigned NSETS    = 128;
  localparam int unsigned WAY_W    = $clog2(NWAYS);
  localparam int unsigned SHARE_MAX = 8;  // an entry may be shared below 8 used sub-entries

  typedef logic [VPB_W-1:0] vpb_t;
  typedef logic [SUB_W-1:0] sidx_t;
  typedef logic [PAS_W-1:0] pas_t;
  typedef logic [PID_W-1:0] pid_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef enum logic [1:0] {
    LAYOUT_NONE = 2'b00,
    LAYOUT_SEQ  = 2'b01,
    LAYOUT_STR  = 2'b10
  } layout_e;

  // Metadata of one base address: valid, dirty, process, virtual page base.
  typedef struct packed {
    logic v;
    logic d;
    pid_t pid;
    vpb_t vpb;
  } base_t;

  typedef struct packed {
    logic v;
    logic aib;
    pas_t pas;
  } sub_t;

  typedef struct packed {
    base_t [1:0]     base;    // base[0] = Base 1, base[1] = Base 2
    layout_e         layout;
    sub_t [NSUB-1:0] sub;
  } entry_t;

  typedef struct packed {
    entry_t [NWAYS-1:0]           way;
    logic [NWAYS-1:0][WAY_W-1:0]  age;  // LRU age, 0 = most recently used
  } set_t;

  // One-cycle event pulses of the TLB, for statistics.
  typedef struct packed {
    logic                  lookup;       // a lookup completed
    logic                  hit;          // ... and hit
    logic                  second_step;  // ... and needed the Base 2 check
    logic                  fill;         // a fill was applied
    logic                  base_hit;     // fill hit an existing base
    logic                  unshare;      // shared entry reverted to non-shared
    logic                  conflict;     // same-base translation overwritten
    logic                  vacant;       // fill used a free way
    logic                  share_seq;    // entry became shared, sequential
    logic                  share_str;    // entry became shared, stride
    logic                  reloc_evict;  // original translation evicted on sharing
    logic                  lru_evict;    // LRU entry evicted
    logic [$clog2(NSUB):0] evict_count;  // its used sub-entries
  } tlb_ev_t;

  // Split of a virtual address.
  function automatic vpb_t va_vpb(input logic [VA_W-1:0] va);
    return va[VA_W-1 -: VPB_W];
  endfunction
  function automatic logic [SET_W-1:0] va_set(input logic [VA_W-1:0] va);
    return va[OFF_W+SUB_W +: SET_W];
  endfunction
  function automatic sidx_t va_sidx(input logic [VA_W-1:0] va);
    return va[OFF_W +: SUB_W];
  endfunction

  // Slot of sub-entry index idx for base b under layout lay.
  function automatic sidx_t slot_of(input layout_e lay, input logic b, input sidx_t idx);
    case (lay)
      LAYOUT_SEQ: return {b, idx[2:0]};
      LAYOUT_STR: return {idx[3:1], b};
      default:    return idx;
    endcase
  endfunction

  // AIB that a translation with sub-entry index idx stores under layout lay.
  function automatic logic aib_of(input layout_e lay, input sidx_t idx);
    case (lay)
      LAYOUT_SEQ: return idx[3];
      LAYOUT_STR: return idx[0];
      default:    return 1'b0;
    endcase
  endfunction

  // Owner base of slot s under a shared layout.
  function automatic logic owner_of(input layout_e lay, input sidx_t s);
    return (lay == LAYOUT_SEQ) ? s[3] : s[0];
  endfunction

  // Original 4-bit sub-entry index of the translation in slot s with AIB a.
  function automatic sidx_t orig_idx(input layout_e lay, input sidx_t s, input logic a);
    case (lay)
      LAYOUT_SEQ: return {a, s[2:0]};
      LAYOUT_STR: return {s[3:1], a};
      default:    return s;
    endcase
  endfunction

  function automatic logic base_match(input base_t b, input pid_t pid, input vpb_t vpb);
    return b.v && b.pid == pid && b.vpb == vpb;
  endfunction

endpackage
