// tb_nvb_buffer_manager: self-checking test of the NVB-Buffer manager.
//
// Sizes as in the paper's access-pattern example: a 4-page DRAM buffer and a
// 2-page PJA. The test first replays that example (write A, write B, read A,
// write C, read D, read A, read E, read F), in which B is flushed when it
// leaves the PJA, C is flushed when it leaves the buffer, and A ends up as the
// only page with a journal copy. It then runs 3000 random requests over 10
// pages. A reference model keeps both LRU lists as SystemVerilog queues and
// predicts, per request, the hit flag, the ordered page moves (op and page)
// and the ordered queue-manager commands (op and page). The test also checks
// that a page keeps its DRAM slot while buffered and that a PJA slot is never
// given to a second page while the first still owns it. Handshakes are
// answered with random delays.
module tb_nvb_buffer_manager;
  import copa_pkg::*;

  localparam int unsigned AW = 16, BP = 4, PP = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready, req_write = 1'b0;
  logic [AW-1:0] req_page = '0;
  logic rsp_valid, rsp_hit;
  logic dma_valid, dma_ready = 1'b0;
  dma_op_e dma_op;
  logic [AW-1:0] dma_page;
  logic [1:0] dma_buf;
  logic dma_pja;
  logic qm_valid, qm_ready = 1'b0;
  qm_op_e qm_op;
  logic [AW-1:0] qm_page;
  logic [1:0] qm_buf;
  logic qm_pja;
  logic ev_b, ev_d, ev_p;

  nvb_buffer_manager #(.PAGE_ADDR_W(AW), .BUF_PAGES(BP), .PJA_PAGES(PP)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_write_i(req_write),
    .req_page_i(req_page), .rsp_valid_o(rsp_valid), .rsp_hit_o(rsp_hit),
    .dma_valid_o(dma_valid), .dma_ready_i(dma_ready), .dma_op_o(dma_op),
    .dma_page_o(dma_page), .dma_buf_slot_o(dma_buf), .dma_pja_slot_o(dma_pja),
    .qm_valid_o(qm_valid), .qm_ready_i(qm_ready), .qm_op_o(qm_op),
    .qm_page_o(qm_page), .qm_buf_slot_o(qm_buf), .qm_pja_slot_o(qm_pja),
    .ev_buf_evict_o(ev_b), .ev_dirty_evict_o(ev_d), .ev_pja_evict_o(ev_p));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_rd_hit = 0, n_rd_miss = 0, n_wr_hit = 0, n_wr_miss = 0;
  int n_ev_b = 0, n_ev_d = 0, n_ev_p = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference model ----------------
  typedef struct packed { logic [AW-1:0] page; logic dirty; } bent_t;
  bent_t         m_buf [$];      // MRU first
  logic [AW-1:0] m_pja [$];      // MRU first
  // expected command streams
  typedef struct packed { logic [1:0] op; logic [AW-1:0] page; } cmd_t;
  cmd_t exp_dma [$];
  cmd_t exp_qm  [$];
  // slot bookkeeping
  int slot_of_page [int];
  logic [AW-1:0] pja_owner [PP];
  bit pja_owned [PP];

  function automatic int find_buf(input logic [AW-1:0] p);
    foreach (m_buf[i]) if (m_buf[i].page == p) return i;
    return -1;
  endfunction
  function automatic int find_pja(input logic [AW-1:0] p);
    foreach (m_pja[i]) if (m_pja[i] == p) return i;
    return -1;
  endfunction

  // predicts one request; returns the hit flag
  function automatic bit model(input bit wr, input logic [AW-1:0] p);
    int bi = find_buf(p);
    bent_t e;
    bit hit = (bi >= 0);
    bit need_pja;
    if (hit) begin
      e = m_buf[bi];
      m_buf.delete(bi);
      if (e.dirty) begin
        m_pja.delete(find_pja(p));
        m_pja.push_front(p);
      end
    end else begin
      if (m_buf.size() == BP) begin
        bent_t v;
        v = m_buf.pop_back();
        slot_of_page.delete(int'(v.page));
        if (v.dirty) begin
          exp_qm.push_back('{2'(QM_INVALIDATE), v.page});
          exp_dma.push_back('{2'(DMA_FLUSH), v.page});
          m_pja.delete(find_pja(v.page));
        end
      end
      e.page = p;
      e.dirty = 1'b0;
    end
    need_pja = wr && !e.dirty;
    if (need_pja && m_pja.size() == PP) begin
      logic [AW-1:0] pv;
      int vi;
      pv = m_pja.pop_back();
      vi = find_buf(pv);
      exp_qm.push_back('{2'(QM_INVALIDATE), pv});
      exp_dma.push_back('{2'(DMA_FLUSH), pv});
      m_buf[vi].dirty = 1'b0;
    end
    if (wr) begin
      if (need_pja) m_pja.push_front(p);
      e.dirty = 1'b1;
      exp_qm.push_back('{2'(QM_INSERT), p});
      exp_dma.push_back('{2'(DMA_HOST_WR), p});
    end else begin
      exp_dma.push_back('{hit ? 2'(DMA_HOST_RD) : 2'(DMA_FILL), p});
    end
    m_buf.push_front(e);
    return hit;
  endfunction

  // ---------------- responders ----------------
  always @(negedge clk) begin
    dma_ready <= ($urandom_range(0, 2) != 0);
    qm_ready  <= ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_b) n_ev_b++;
    if (ev_d) n_ev_d++;
    if (ev_p) n_ev_p++;
    if (qm_valid && qm_ready) begin
      checks++;
      if (exp_qm.size() == 0) begin
        failures++; $display("FAIL unexpected queue-manager command");
      end else begin
        cmd_t c;
        c = exp_qm.pop_front();
        if (c.op != 2'(qm_op) || c.page != qm_page) begin
          failures++;
          $display("FAIL qm cmd: got %0d/%h expected %0d/%h", qm_op, qm_page, c.op, c.page);
        end
        if (qm_op == QM_INVALIDATE) pja_owned[qm_pja] = 1'b0;
      end
    end
    if (dma_valid && dma_ready) begin
      checks++;
      if (exp_dma.size() == 0) begin
        failures++; $display("FAIL unexpected page move");
      end else begin
        cmd_t c;
        c = exp_dma.pop_front();
        if (c.op != 2'(dma_op) || c.page != dma_page) begin
          failures++;
          $display("FAIL page move: got %0d/%h expected %0d/%h", dma_op, dma_page, c.op, c.page);
        end
        // a buffered page keeps its DRAM slot
        if (dma_op != DMA_FLUSH) begin
          if (slot_of_page.exists(int'(dma_page))) begin
            checks++;
            if (slot_of_page[int'(dma_page)] != int'(dma_buf)) begin
              failures++; $display("FAIL page changed DRAM slot");
            end
          end
          slot_of_page[int'(dma_page)] = int'(dma_buf);
        end
        // a PJA slot holds one page at a time
        if (dma_op == DMA_HOST_WR) begin
          checks++;
          if (pja_owned[dma_pja] && pja_owner[dma_pja] != dma_page) begin
            failures++; $display("FAIL PJA slot given to a second page");
          end
          pja_owned[dma_pja] = 1'b1;
          pja_owner[dma_pja] = dma_page;
        end
      end
    end
  end

  task automatic request(input bit wr, input logic [AW-1:0] p);
    bit exp_hit;
    exp_hit = model(wr, p);
    if (wr) begin if (exp_hit) n_wr_hit++; else n_wr_miss++; end
    else    begin if (exp_hit) n_rd_hit++; else n_rd_miss++; end
    req_valid = 1'b1; req_write = wr; req_page = p;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_hit == exp_hit, "hit flag");
    check(exp_dma.size() == 0 && exp_qm.size() == 0, "all predicted commands issued");
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [AW-1:0] A = 16'hA, B = 16'hB, C = 16'hC, D = 16'hD, E = 16'hE, F = 16'hF;

  initial begin
    foreach (pja_owned[i]) pja_owned[i] = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!req_ready) @(negedge clk);
    // the paper's example sequence
    request(1, A); request(1, B); request(0, A);
    request(1, C);                           // B leaves the PJA: flushed, clean
    check(n_ev_p == 1, "example: B flushed from the PJA");
    request(0, D); request(0, A); request(0, E);
    request(0, F);                           // C leaves the buffer: flushed
    check(n_ev_d == 1, "example: C flushed on eviction");
    check(m_pja.size() == 1 && m_pja[0] == A, "example: only A has a journal copy");
    check(dut.pja_v[0] + dut.pja_v[1] == 1, "example: one PJA slot in use");
    // random traffic
    for (int it = 0; it < 3000; it++) begin
      request($urandom_range(0, 1), AW'($urandom_range(0, 9)));
    end
    $display("read hit=%0d miss=%0d write hit=%0d miss=%0d evictions=%0d dirty=%0d pja=%0d",
             n_rd_hit, n_rd_miss, n_wr_hit, n_wr_miss, n_ev_b, n_ev_d, n_ev_p);
    check(n_rd_hit > 0 && n_rd_miss > 0 && n_wr_hit > 0 && n_wr_miss > 0 &&
          n_ev_b > 0 && n_ev_d > 0 && n_ev_p > 0, "every case happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
