// tb_copa_queue_manager: self-checking test of the CoPA Queue Manager with an
// 8-page PJA. The test drives QI/DC and the refresh request itself and keeps
// a reference model: for every PJA slot, which queue (if any) holds it and
// with what page address and buffer slot. Inserts must go to the Sleepy queue
// (named by QI) when DC=0 and to the other queue when DC=1, after dropping
// the page's previous entry; invalidations drop it. A refresh must offer
// exactly the pages of the walked queue (checked as a set, under random
// back-pressure), keep cmd_ready low meanwhile, and leave them in the other
// queue. The queue counts are checked after every operation. A refresh
// request arriving during a walk must be served after it.
// The directed part replays the paper's five-page example (A and B written in
// step 00, C and B in step 01, D in step 10, E in step 11). Because refreshed
// pages move to the other queue here, A is walked again at the end of step 11
// together with C, B and D; the paper's figure lists only C, B and D there.
module tb_copa_queue_manager;
  import copa_pkg::*;

  localparam int unsigned AW = 16, BP = 16, PP = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic qi = 1'b0, dc = 1'b0, refresh = 1'b0;
  qid_e refresh_q = Q1;
  logic cmd_valid = 1'b0, cmd_ready;
  qm_op_e cmd_op = QM_INSERT;
  logic [AW-1:0] cmd_page = '0;
  logic [3:0] cmd_buf = '0;
  logic [2:0] cmd_pja = '0;
  logic ref_valid, ref_ready = 1'b0;
  logic [AW-1:0] ref_page;
  logic [3:0] ref_buf;
  logic [2:0] ref_pja;
  logic busy;
  logic [3:0] q1c, q2c;

  // reference model
  int            m_q    [PP];   // -1 none, 0 = Q1, 1 = Q2
  logic [AW-1:0] m_page [PP];
  logic [3:0]    m_buf  [PP];

  int checks = 0, failures = 0;
  int n_ins_sleepy = 0, n_ins_awake = 0, n_inv = 0, n_walks = 0, n_refreshed = 0;

  copa_queue_manager #(.PAGE_ADDR_W(AW), .BUF_PAGES(BP), .PJA_PAGES(PP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .qi_i(qi), .dc_i(dc),
    .refresh_i(refresh), .refresh_q_i(refresh_q),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_op_i(cmd_op),
    .cmd_page_i(cmd_page), .cmd_buf_slot_i(cmd_buf), .cmd_pja_slot_i(cmd_pja),
    .ref_valid_o(ref_valid), .ref_ready_i(ref_ready), .ref_page_o(ref_page),
    .ref_buf_slot_o(ref_buf), .ref_pja_slot_o(ref_pja),
    .busy_o(busy), .q1_count_o(q1c), .q2_count_o(q2c));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int mcount(input int q);
    int n = 0;
    for (int i = 0; i < PP; i++) if (m_q[i] == q) n++;
    return n;
  endfunction

  task automatic check_counts();
    check(q1c == 4'(mcount(0)), "Q1 count");
    check(q2c == 4'(mcount(1)), "Q2 count");
  endtask

  // one metadata command, applied at a negedge, accepted at the next posedge
  task automatic command(input qm_op_e op, input int slot);
    int tgt;
    cmd_valid = 1'b1;
    cmd_op    = op;
    cmd_pja   = 3'(slot);
    cmd_page  = AW'($urandom);
    cmd_buf   = 4'($urandom);
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    if (op == QM_INSERT) begin
      tgt = int'(qi ^ dc);
      if (dc) n_ins_awake++; else n_ins_sleepy++;
      m_q[slot] = tgt;
      m_page[slot] = cmd_page;
      m_buf[slot]  = cmd_buf;
    end else begin
      n_inv++;
      m_q[slot] = -1;
    end
    check_counts();
  endtask

  // a refresh of the queue named by QI, then the State_Counter increments
  task automatic do_refresh(input bit double_req);
    int walked, seen [PP];
    int got = 0, expect_n;
    bit started = 1'b0;
    walked   = int'(qi);
    expect_n = mcount(walked);
    foreach (seen[i]) seen[i] = 0;
    refresh = 1'b1; refresh_q = qid_e'(qi);
    @(negedge clk);
    refresh = 1'b0;
    {qi, dc} = {qi, dc} + 2'd1;
    n_walks++;
    while (1) begin
      ref_ready = ($urandom_range(0, 2) != 0);
      if (double_req && got == 1) begin
        refresh = 1'b1; refresh_q = qid_e'(qi);   // next period's request, early
      end
      #1;
      check(!cmd_ready || !busy, "no commands during walk");
      if (busy) started = 1'b1;
      if (ref_valid && ref_ready) begin
        got++;
        n_refreshed++;
        check(m_q[ref_pja] == walked, "refreshed page is in the walked queue");
        check(seen[ref_pja] == 0, "each page refreshed once");
        check(ref_page == m_page[ref_pja] && ref_buf == m_buf[ref_pja], "entry content");
        seen[ref_pja] = 1;
      end
      @(negedge clk);
      refresh = 1'b0;
      if (started && !busy && !ref_valid) break;
    end
    ref_ready = 1'b0;
    check(got == expect_n, "walk offers every page of the Sleepy queue");
    for (int i = 0; i < PP; i++) if (m_q[i] == walked) m_q[i] = 1 - walked;
    check_counts();
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (m_q[i]) m_q[i] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // the location table is cleared first
    repeat (PP + 2) @(negedge clk);
    check(cmd_ready, "ready after the init sweep");
    // walk through the paper's example: A, B (step 0), C, B (step 1), D (step 2), E (step 3)
    command(QM_INSERT, 0);                      // A -> Q1 (Sleepy)
    command(QM_INSERT, 1);                      // B -> Q1
    check(q1c == 2 && q2c == 0, "A,B in Q1");
    {qi, dc} = 2'b01;
    command(QM_INSERT, 2);                      // C -> Q2 (Awake)
    command(QM_INSERT, 1);                      // B moves to Q2
    check(q1c == 1 && q2c == 2, "A in Q1; C,B in Q2");
    do_refresh(1'b0);                           // refresh Q1 = {A}; A moves to Q2
    check(q1c == 0 && q2c == 3, "after first refresh");
    command(QM_INSERT, 3);                      // D -> Q2 (Sleepy now)
    {qi, dc} = 2'b11;
    command(QM_INSERT, 4);                      // E -> Q1 (Awake)
    do_refresh(1'b0);                           // refresh Q2 = {C,B,A,D}
    check(q1c == 5 && q2c == 0, "after second refresh");
    // random traffic
    for (int it = 0; it < 600; it++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 60)      command(QM_INSERT, $urandom_range(0, PP - 1));
      else if (r < 85) command(QM_INVALIDATE, $urandom_range(0, PP - 1));
      else if (r < 93) begin
        if (dc) do_refresh($urandom_range(0, 3) == 0);
        else {qi, dc} = {qi, dc} + 2'd1;
      end else begin
        {qi, dc} = {qi, dc} + 2'd1;
        if ({qi, dc} == 2'b00 || {qi, dc} == 2'b10) {qi, dc} = {qi, dc} + 2'd1;
      end
      // a request kept during a walk starts another walk on its own
      if (busy || dut.pend_q) begin
        int walked;
        while (!busy) @(negedge clk);
        walked = int'(dut.walk_q_q);
        while (busy) begin ref_ready = 1'b1; @(negedge clk); end
        ref_ready = 1'b0;
        for (int i = 0; i < PP; i++) if (m_q[i] == walked) m_q[i] = 1 - walked;
        check_counts();
      end
    end
    check(n_ins_sleepy > 0 && n_ins_awake > 0 && n_inv > 0 && n_walks > 10 && n_refreshed > 20,
          "every kind of operation happened");
    $display("inserts sleepy=%0d awake=%0d invalidates=%0d walks=%0d refreshed=%0d",
             n_ins_sleepy, n_ins_awake, n_inv, n_walks, n_refreshed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
