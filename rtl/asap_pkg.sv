// asap_pkg: types and constants shared by the ASAP edit-distance accelerator.
//
// The accelerator computes an (approximate) Levenshtein distance by racing a
// one-bit wavefront through a lattice of delay elements: every gap penalty is
// a number of clock cycles, and the distance is the time the wavefront needs
// to cross the lattice. This package holds the runtime configuration (the four
// delta-parameters, the alignment mode and the LV timeout), the nucleotide
// code, the layout of the work element descriptor (WED) in host memory and
// the counter-width formula.
//
// Follows the paper: 2-bit nucleotides (A, C, G, T), 1024-bit cache lines,
// 32-bit results, penalties that select a shift-register tap. Own choices:
// the numeric nucleotide code, the WED field layout, the mode encoding.
package asap_pkg;

  // Cache line of the host interface, in bits (128 bytes).
  localparam int unsigned LINE_W = 1024;
  // Result word written back to the host for every comparison.
  localparam int unsigned RES_W  = 32;

  // 2-bit nucleotide code (ambiguous bases are not representable).
  typedef enum logic [1:0] {
    NT_A = 2'd0,
    NT_C = 2'd1,
    NT_G = 2'd2,
    NT_T = 2'd3
  } nt_e;

  // Which lattice output ends the measurement.
  typedef enum logic {
    MODE_SW = 1'b0,  // first wavefront arrival anywhere on the last row
    MODE_NW = 1'b1   // wavefront arrival at the bottom-right element
  } align_mode_e;

  // Largest penalty width the configuration can carry; the lattice uses the
  // low PW bits of each field.
  localparam int unsigned PEN_FIELD_W = 8;

  // Runtime configuration of every lattice (the only runtime-programmable part).
  typedef struct packed {
    logic [PEN_FIELD_W-1:0] pen_match;
    logic [PEN_FIELD_W-1:0] pen_mismatch;
    logic [PEN_FIELD_W-1:0] pen_ins;
    logic [PEN_FIELD_W-1:0] pen_del;
    align_mode_e            mode;
    logic                   lv_en;     // Landau-Vishkin style timeout enabled
    logic [RES_W-1:0]       max_ld;    // timeout value (maximum permissible LD)
  } asap_cfg_t;

  // Work element descriptor: first cache line at the WED address.
  typedef struct packed {
    logic [LINE_W-233:0] rsvd;   // 792 bits, total is one line
    logic [7:0]          flags;        // bit0: NW mode, bit1: LV timeout enable
    logic [31:0]         max_ld;
    logic [7:0]          pen_del;
    logic [7:0]          pen_ins;
    logic [7:0]          pen_mismatch;
    logic [7:0]          pen_match;
    logic [31:0]         num_cases;
    logic [63:0]         out_ptr;
    logic [63:0]         in_ptr;
  } wed_t;

  // Status line written to WED address + 128 bytes when a job ends.
  localparam logic [31:0] STATUS_MAGIC = 32'hA5A0_D0DE;

  // Width of the delay-decoding counter. The first two terms are the bound
  // N_o = ceil(log2(min{d*lQ + d*lR, d*lQ + d*(lR-lQ)})) with every delta at its
  // largest value d; the last term adds the tile-boundary flip-flops (at most
  // two per tile crossed on the way) and one spare bit keeps it above zero.
  function automatic int unsigned counter_width(int unsigned lq, int unsigned lr,
                                                int unsigned dmax, int unsigned tile);
    int unsigned a, b, m;
    a = dmax * lq + dmax * lr;
    b = (lr >= lq) ? dmax * lq + dmax * (lr - lq) : a;
    m = (a < b) ? a : b;
    m = m + 2 * ((lq + lr) / tile + 1);
    return $clog2(m + 1) + 1;
  endfunction

endpackage
