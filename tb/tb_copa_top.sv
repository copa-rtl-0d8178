// tb_copa_top: end-to-end test of the NVB-Buffer controller with CoPA.
//
// Reduced sizes: an 8-page DRAM buffer, a 4-page PJA, 8-word pages and
// 400-cycle time-steps. Around the controller the test keeps behavioural
// models of the DRAM buffer space, the STT-MRAM PJA, the main storage and the
// data mover that executes page moves (taken as done when accepted; a host
// write fills the page with fresh random data). PJA words are stored as
// SEC-DED codewords; the test encodes host data with its own encoder, written
// from the code's parity-check rule. While random reads and writes over 12
// pages run, it flips random bits (one, sometimes two in a word) in PJA pages
// to stand in for retention failures. It checks:
//   - every read returns the data last written to that page (or stored);
//   - no journal (PJA) page stays unwritten for 3 time-steps or more, plus
//     the time its refresh waits behind other page copies (the bound CoPA
//     guarantees, T_idle < 3 T_time-step);
//   - a refreshed PJA page equals the encoded DRAM replica;
//   - the journal encoder port matches the test's encoder on random words;
//   - a PJA word read through the recovery decoder gives the host data and
//     no flag when intact, the host data and "corrected" after one flip, and
//     "uncorrectable" after two;
//   - after traffic and fault injection stop, three time-steps later every
//     journal page matches the data the host last wrote, i.e. a power failure
//     at that point would recover every dirty page.
// It counts each mechanism (read/write hits and misses, clean and dirty
// buffer evictions, PJA evictions, inserts into the Sleepy and into the Awake
// queue, refresh periods, pages refreshed, Sleepy/Awake label swaps, requests
// stalled behind a refresh, corrupted pages healed, single errors corrected
// and double errors detected on recovery reads) and fails if one never
// occurred.
module tb_copa_top;
  import copa_pkg::*;

  localparam int unsigned AW = 16, WW = 64, WPP = 8, BP = 8, PP = 4, NPAGES = 12;
  localparam longint unsigned TS = 400;
  localparam int unsigned SLACK = PP * (3 * WPP + 8) + 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready, req_write = 1'b0;
  logic [AW-1:0] req_page = '0;
  logic rsp_valid, rsp_hit;
  logic dma_valid, dma_ready;
  dma_op_e dma_op;
  logic [AW-1:0] dma_page;
  logic [2:0] dma_buf;
  logic [1:0] dma_pja;
  logic rd_valid, rd_ready, rdata_valid;
  logic [5:0] rd_addr;
  logic [WW-1:0] rdata;
  logic wr_valid, wr_ready;
  logic [4:0] wr_addr;
  localparam int unsigned CW = 72;
  logic [CW-1:0] wdata;
  logic [WW-1:0] jnl_data, rec_data;
  logic [CW-1:0] jnl_code, rec_code;
  logic rec_ce, rec_ue;
  logic [1:0] sc;
  logic ts_tick, ref_start, ref_busy, page_ref;
  logic [AW-1:0] ref_page;
  logic [2:0] q1c, q2c;
  logic ev_b, ev_d, ev_p;

  copa_top #(.PAGE_ADDR_W(AW), .WORD_W(WW), .WORDS_PER_PAGE(WPP), .BUF_PAGES(BP),
             .PJA_PAGES(PP), .TIMESTEP_CYCLES(TS)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_write_i(req_write),
    .req_page_i(req_page), .rsp_valid_o(rsp_valid), .rsp_hit_o(rsp_hit),
    .dma_valid_o(dma_valid), .dma_ready_i(dma_ready), .dma_op_o(dma_op),
    .dma_page_o(dma_page), .dma_buf_slot_o(dma_buf), .dma_pja_slot_o(dma_pja),
    .dram_rd_valid_o(rd_valid), .dram_rd_ready_i(rd_ready), .dram_rd_addr_o(rd_addr),
    .dram_rd_data_valid_i(rdata_valid), .dram_rd_data_i(rdata),
    .pja_wr_valid_o(wr_valid), .pja_wr_ready_i(wr_ready), .pja_wr_addr_o(wr_addr),
    .pja_wr_data_o(wdata),
    .pja_jnl_data_i(jnl_data), .pja_jnl_code_o(jnl_code),
    .pja_rec_code_i(rec_code), .pja_rec_data_o(rec_data),
    .pja_rec_ce_o(rec_ce), .pja_rec_ue_o(rec_ue),
    .state_counter_o(sc), .timestep_tick_o(ts_tick), .refresh_start_o(ref_start),
    .refresh_page_o(ref_page), .refresh_busy_o(ref_busy), .page_refreshed_o(page_ref),
    .q1_count_o(q1c), .q2_count_o(q2c),
    .ev_buf_evict_o(ev_b), .ev_dirty_evict_o(ev_d), .ev_pja_evict_o(ev_p));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- memory, storage and data-mover models ----------------
  logic [WW-1:0] dram [BP*WPP];
  logic [CW-1:0] pja  [PP*WPP];
  int            nflip [PP*WPP];    // bits flipped since the word was written
  logic [WW-1:0] golden  [int];     // page*WPP+word -> last host data
  logic [WW-1:0] storage [int];
  bit            owned [PP];        // PJA slot holds a live journal page
  logic [AW-1:0] owner [PP];
  longint        last_wr [PP];      // cycle of the last write to the slot
  bit            corrupt [PP];
  longint        cyc = 0;
  longint        max_idle = 0;
  bit            inject = 1'b1;
  int n_rd_hit = 0, n_rd_miss = 0, n_wr_hit = 0, n_wr_miss = 0;
  int n_ev_clean = 0, n_ev_dirty = 0, n_ev_pja = 0, n_ins_sleepy = 0, n_ins_awake = 0;
  int n_periods = 0, n_pages_ref = 0, n_swaps = 0, n_stalled = 0, n_healed = 0, n_reads_ok = 0;
  int n_ce = 0, n_ue = 0;
  bit in_flight = 1'b0, stalled_this = 1'b0;

  function automatic logic [WW-1:0] stored(input logic [AW-1:0] p, input int w);
    int k = int'(p) * WPP + w;
    if (storage.exists(k)) return storage[k];
    return {32'hC0DE0000 | 32'(p), 32'(w)};
  endfunction

  // SEC-DED(72,64) reference: check bit 2^k covers every position with bit k
  // set, data on the other positions 1..71 in order, bit 0 overall parity
  function automatic logic [CW-1:0] ref_encode(input logic [WW-1:0] d);
    logic [CW-1:0] c;
    int j;
    c = '0;
    j = 0;
    for (int pos = 1; pos < CW; pos++)
      if (!$onehot(pos)) begin c[pos] = d[j]; j++; end
    for (int k = 0; k < 7; k++) begin
      bit p;
      p = 1'b0;
      for (int pos = 1; pos < CW; pos++) if (pos[k] && !$onehot(pos)) p ^= c[pos];
      c[1 << k] = p;
    end
    c[0] = ^c;
    return c;
  endfunction

  assign dma_ready = 1'b1;
  assign rd_ready  = 1'b1;
  assign wr_ready  = 1'b1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rdata_valid <= 1'b0;
    if (rd_valid && rd_ready) begin
      rdata_valid <= 1'b1;
      rdata       <= dram[rd_addr];
    end
    if (wr_valid && wr_ready) begin
      pja[wr_addr] <= wdata;
      nflip[wr_addr] <= 0;
      last_wr[wr_addr[4:3]] <= cyc;
    end
    if (dma_valid && dma_ready) begin
      unique case (dma_op)
        DMA_HOST_WR: begin
          for (int w = 0; w < WPP; w++) begin
            logic [WW-1:0] d;
            d = {$urandom, $urandom};
            dram[int'(dma_buf) * WPP + w] <= d;
            pja[int'(dma_pja) * WPP + w]  <= ref_encode(d);
            nflip[int'(dma_pja) * WPP + w] <= 0;
            golden[int'(dma_page) * WPP + w] = d;
          end
          checks++;
          if (owned[dma_pja] && owner[dma_pja] != dma_page) begin
            failures++; $display("FAIL PJA slot reused while owned");
          end
          owned[dma_pja]   <= 1'b1;
          owner[dma_pja]   <= dma_page;
          last_wr[dma_pja] <= cyc;
          corrupt[dma_pja] <= 1'b0;
          if (sc[0]) n_ins_awake++; else n_ins_sleepy++;
        end
        DMA_HOST_RD: begin
          bit ok;
          ok = 1'b1;
          for (int w = 0; w < WPP; w++) begin
            logic [WW-1:0] exp_d;
            int k;
            k = int'(dma_page) * WPP + w;
            exp_d = golden.exists(k) ? golden[k] : stored(dma_page, w);
            if (dram[int'(dma_buf) * WPP + w] != exp_d) ok = 1'b0;
          end
          checks++;
          if (!ok) begin failures++; $display("FAIL read hit returns wrong data"); end
          else n_reads_ok++;
        end
        DMA_FILL: begin
          for (int w = 0; w < WPP; w++) dram[int'(dma_buf) * WPP + w] <= stored(dma_page, w);
        end
        DMA_FLUSH: begin
          for (int w = 0; w < WPP; w++) storage[int'(dma_page) * WPP + w] = dram[int'(dma_buf) * WPP + w];
          for (int s = 0; s < PP; s++) if (owned[s] && owner[s] == dma_page) owned[s] <= 1'b0;
        end
      endcase
    end
    // retention failures
    if (inject && !wr_valid && !dma_valid && $urandom_range(0, 199) == 0) begin
      int s, w, a, b;
      s = $urandom_range(0, PP - 1);
      w = $urandom_range(0, WPP - 1);
      a = $urandom_range(0, CW - 1);
      b = $urandom_range(0, CW - 2);
      if (b >= a) b++;
      if (owned[s]) begin
        if ($urandom_range(0, 3) == 0) begin
          pja[s * WPP + w]   <= pja[s * WPP + w] ^ (CW'(1) << a) ^ (CW'(1) << b);
          nflip[s * WPP + w] <= nflip[s * WPP + w] + 2;
        end else begin
          pja[s * WPP + w]   <= pja[s * WPP + w] ^ (CW'(1) << a);
          nflip[s * WPP + w] <= nflip[s * WPP + w] + 1;
        end
        corrupt[s] <= 1'b1;
      end
    end
  end

  // ---------------- monitors ----------------
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < PP; s++) if (owned[s]) begin
      longint idle;
      idle = cyc - last_wr[s];
      if (idle > max_idle) max_idle = idle;
      if (idle >= 3 * longint'(TS) + SLACK) begin
        failures++;
        if (failures < 10) $display("FAIL PJA slot %0d idle for %0d cycles", s, idle);
      end
    end
    if (ts_tick && sc[0]) n_swaps++;          // QI flips: Sleepy/Awake swap labels
    if (ref_start) n_periods++;
    if (in_flight && ref_busy && !stalled_this) begin n_stalled++; stalled_this = 1'b1; end
    if (ev_b) begin
      // the evicted page is dirty when a flush follows; counted on the flush
      n_ev_clean++;
    end
    if (ev_d) begin n_ev_dirty++; n_ev_clean--; end
    if (ev_p) n_ev_pja++;
  end

  // a refreshed page equals its DRAM replica and the host data
  always @(posedge clk) if (page_ref) begin
    int s;
    s = int'(wr_addr[4:3]);
    #1;
    n_pages_ref++;
    for (int w = 0; w < WPP; w++)
      check(pja[s * WPP + w] == ref_encode(golden[int'(owner[s]) * WPP + w]), "refreshed page = host data");
    if (corrupt[s]) begin n_healed++; corrupt[s] = 1'b0; end
  end

  // journal encoder and recovery decoder, sampled on random words
  always @(negedge clk) if (rst_n && inject) begin
    int s, w, k;
    jnl_data = {$urandom, $urandom};
    s = $urandom_range(0, PP - 1);
    w = $urandom_range(0, WPP - 1);
    k = s * WPP + w;
    rec_code = pja[k];
    #1;
    check(jnl_code == ref_encode(jnl_data), "journal encoder");
    if (owned[s] && nflip[k] <= 2) begin
      logic [WW-1:0] exp_d;
      exp_d = golden[int'(owner[s]) * WPP + w];
      if (nflip[k] == 0)      check(rec_data == exp_d && !rec_ce && !rec_ue, "intact word decodes");
      else if (nflip[k] == 1) begin check(rec_data == exp_d && rec_ce && !rec_ue, "single error corrected"); n_ce++; end
      else                    begin check(rec_ue && !rec_ce, "double error detected"); n_ue++; end
    end
  end

  task automatic request(input bit wr, input logic [AW-1:0] p);
    bit hit;
    req_valid = 1'b1; req_write = wr; req_page = p;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    in_flight = 1'b1; stalled_this = 1'b0;
    while (!rsp_valid) @(negedge clk);
    in_flight = 1'b0;
    hit = rsp_hit;
    if (wr) begin if (hit) n_wr_hit++; else n_wr_miss++; end
    else    begin if (hit) n_rd_hit++; else n_rd_miss++; end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (owned[i]) begin owned[i] = 1'b0; corrupt[i] = 1'b0; last_wr[i] = 0; end
    foreach (nflip[i]) nflip[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!req_ready) @(negedge clk);
    // traffic for 24 time-steps, with bursts and pauses
    while (cyc < 24 * longint'(TS)) begin
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(10, 150)) @(negedge clk);
      request($urandom_range(0, 2) == 0, AW'($urandom_range(0, NPAGES - 1)));
    end
    // no more traffic or faults: within three time-steps every journal page
    // has been rewritten from DRAM
    inject = 1'b0;
    repeat (3 * TS + SLACK) @(negedge clk);
    for (int s = 0; s < PP; s++) if (owned[s])
      for (int w = 0; w < WPP; w++)
      begin
        check(pja[s * WPP + w] == ref_encode(golden[int'(owner[s]) * WPP + w]), "journal recoverable");
        rec_code = pja[s * WPP + w];
        #1;
        check(rec_data == golden[int'(owner[s]) * WPP + w] && !rec_ce && !rec_ue, "recovery read");
      end
    $display("max PJA idle %0d cycles (time-step %0d, bound %0d)", max_idle, TS, 3 * TS);
    $display("rd hit/miss %0d/%0d wr hit/miss %0d/%0d evict clean/dirty %0d/%0d pja evict %0d",
             n_rd_hit, n_rd_miss, n_wr_hit, n_wr_miss, n_ev_clean, n_ev_dirty, n_ev_pja);
    $display("recovery reads: single errors corrected %0d, double errors detected %0d", n_ce, n_ue);
    $display("inserts sleepy/awake %0d/%0d periods %0d pages refreshed %0d swaps %0d stalled %0d healed %0d",
             n_ins_sleepy, n_ins_awake, n_periods, n_pages_ref, n_swaps, n_stalled, n_healed);
    check(max_idle > 2 * longint'(TS), "idle time reaches past two time-steps (pages do age)");
    check(n_rd_hit > 0 && n_rd_miss > 0 && n_wr_hit > 0 && n_wr_miss > 0, "hits and misses");
    check(n_ev_clean > 0 && n_ev_dirty > 0 && n_ev_pja > 0, "evictions");
    check(n_ins_sleepy > 0 && n_ins_awake > 0, "Sleepy and Awake inserts");
    check(n_periods > 5 && n_pages_ref > 0 && n_swaps > 5, "refresh periods and swaps");
    check(n_stalled > 0, "a request stalled behind a refresh");
    check(n_healed > 0, "a corrupted journal page was healed");
    check(n_reads_ok > 0, "read data checked");
    check(n_ce > 0 && n_ue > 0, "recovery decoder corrected and detected errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
