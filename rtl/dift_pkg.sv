// dift_pkg: types, constants and address arithmetic shared by the DIFT shell
// and the accelerators it wraps.
//
// Memory is organised in 64-bit words; a tag is one full word. An
// accelerator addresses its DMA bursts by word index into its own buffer
// (the memory the driver allocated for the invocation, holding input and
// output). Over that whole buffer the tags are interleaved with the data: the
// first tag follows `first` data words, and after it every group of
// T = 2**lg_off data words is followed by one tag word. The accelerator only
// ever sees logical data indices, as if there were no tags; the shell
// converts them to physical indices with the functions below. Restricting the tag offset to powers of two (every offset evaluated
// for this scheme is one) makes the conversion a shift and a mask, with no
// divider in the request path.
package dift_pkg;

  localparam int unsigned WORD_W = 64;   // memory word and tag width
  localparam int unsigned IDX_W  = 32;   // word index and burst length width

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [IDX_W-1:0]  idx_t;

  // One DMA burst: first word index and length in words.
  typedef struct packed {
    idx_t index;
    idx_t length;
  } dma_req_t;

  // Physical word index of logical data word i.
  function automatic idx_t data_to_phys(idx_t i, idx_t first, logic [4:0] lg_off);
    idx_t d;
    if (i < first) return i;
    d = i - first;
    return first + 32'd1 + d + (d >> lg_off);
  endfunction

  // True when logical data word i is the last one before a tag word.
  function automatic logic ends_group(idx_t i, idx_t first, logic [4:0] lg_off);
    idx_t mask;
    mask = (32'd1 << lg_off) - 32'd1;
    if (i < first) return (i == first - 32'd1);
    return (((i - first) & mask) == mask);
  endfunction

  // Number of data words that come before the next tag, starting at logical
  // data word i (0 means the next physical word is a tag).
  function automatic idx_t data_before_tag(idx_t i, idx_t first, logic [4:0] lg_off);
    idx_t mask;
    mask = (32'd1 << lg_off) - 32'd1;
    if (i < first) return first - i;
    return (32'd1 << lg_off) - ((i - first) & mask);
  endfunction

  // Physical length of a burst of len data words starting at logical word i:
  // the span from the first to the last data word, plus the tag that closes
  // the last word's group when it directly follows it.
  function automatic idx_t phys_length(idx_t i, idx_t len, idx_t first, logic [4:0] lg_off);
    idx_t last;
    last = i + len - 32'd1;
    return data_to_phys(last, first, lg_off) - data_to_phys(i, first, lg_off) + 32'd1
           + idx_t'(ends_group(last, first, lg_off));
  endfunction

  // Q32.32 fixed-point product of two signed words.
  function automatic word_t fx_mul(word_t a, word_t b);
    logic signed [2*WORD_W-1:0] p;
    p = $signed(a) * $signed(b);
    return p[WORD_W+31:32];
  endfunction

endpackage
