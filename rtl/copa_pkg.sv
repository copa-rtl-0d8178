// copa_pkg: sizes and shared encodings of the CoPA NVB-Buffer controller.
//
// The NVB-Buffer (NVM-Backed Buffer) is a DRAM page buffer backed by a small
// STT-MRAM Persistent Journal Area (PJA) that keeps a copy of every dirty page.
// The default sizes are the evaluated configuration: 8 GB of DRAM buffer space,
// 512 MB of PJA and 4 KB pages made of 512 words of 64 bits. The page-address
// width, the clock and the command encodings below are choices of this design.
// Every PJA word is stored as a SEC-DED(72,64) codeword, as in the paper; the
// layout of that code (see secded_enc) is this design's choice.
package copa_pkg;

  // Logical page number of the storage device (4 KB pages); 32 bits covers 16 TB.
  localparam int unsigned CFG_PAGE_ADDR_W    = 32;
  // One PJA/DRAM data word and the number of words in a 4 KB page.
  localparam int unsigned CFG_WORD_W         = 64;
  localparam int unsigned CFG_WORDS_PER_PAGE = 512;
  // 8 GB / 4 KB and 512 MB / 4 KB.
  localparam int unsigned CFG_BUF_PAGES      = 2097152;
  localparam int unsigned CFG_PJA_PAGES      = 131072;
  // One CoPA time-step (30 s, the setting used for the response-time study)
  // counted in cycles of an assumed 100 MHz controller clock.
  localparam longint unsigned CFG_TIMESTEP_CYCLES = 64'd3_000_000_000;

  // Page moves the buffer manager asks of the external data mover.
  typedef enum logic [1:0] {
    DMA_HOST_WR = 2'd0,  // host page -> DRAM slot and PJA slot (journal write)
    DMA_HOST_RD = 2'd1,  // DRAM slot -> host (buffer hit)
    DMA_FILL    = 2'd2,  // main storage page -> DRAM slot (read miss)
    DMA_FLUSH   = 2'd3   // DRAM slot -> main storage page (dirty page written back)
  } dma_op_e;

  // Metadata commands from the buffer manager to the queue manager.
  typedef enum logic {
    QM_INSERT     = 1'b0,  // a page was written to the PJA
    QM_INVALIDATE = 1'b1   // a page left the PJA
  } qm_op_e;

  // Queue identifiers: QI selects which of them is the Sleepy queue.
  typedef enum logic {
    Q1 = 1'b0,
    Q2 = 1'b1
  } qid_e;

  // Number of Hamming check bits for a SEC-DED code over data_w data bits:
  // the smallest p with 2^p >= data_w + p + 1 (7 for 64 data bits). The
  // codeword adds one overall parity bit, so 64 data bits give 72 code bits.
  function automatic int unsigned secded_checks(input int unsigned data_w);
    int unsigned p;
    p = 1;
    while ((1 << p) < data_w + p + 1) p++;
    return p;
  endfunction

endpackage
