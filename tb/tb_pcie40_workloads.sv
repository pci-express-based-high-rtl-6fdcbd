// tb_pcie40_workloads: the published throughput and back-pressure measurements, replayed
// on pcie40_top at its default size (48 links, 8 kB link buffers, 8 pages, 32 kB DMA FIFO)
// with the 127 MHz clock taken as one cycle = 1/127 us.
//   A  pattern generator, pulse trigger at 470 kHz (period 270 cycles), 8 kB events: no
//      trigger may be lost and at least 90% of the events of the window must reach the host
//      within it; the fraction of back-pressured triggers is printed.
//   B  the same at 260 kHz (period 488 cycles): no trigger lost and none back-pressured.
//   C  46 links enabled, 1 kB per link per event (header + 254 words + trailer) at 43 kHz
//      (a trigger every 2953 cycles): busy never raised, no back-pressure, no link overflow,
//      and every built event equal to the model.
// The host accepts every write at once, as a server with spare bandwidth would. The
// 26 kHz case with 0.8 ms of front-end latency is not replayed: it holds about 21 events
// per link in flight, which is a property of the front ends, not of this board.
// Host model, link drivers and stream parser are those of the full-size test.
module tb_pcie40_workloads;
  import pcie40_pkg::*;
  localparam int N = NLINKS_DEF;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- DUT ----------------------------------------------------------------------------
  logic [N-1:0] lk_valid = 0, lk_sof = 0, lk_eof = 0, lk_crc_err = 0;
  logic [31:0]  lk_data [N];
  logic [N-1:0] slc_tx_valid, slc_tx_ready = '1, slc_rx_valid = 0;
  logic [31:0]  slc_tx_data [N], slc_rx_data [N];
  logic trig = 0, busy;
  logic reg_we = 0, reg_re = 0, reg_rvalid;
  logic [11:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic rq_valid, rq_ready = 1, cpl_valid = 0;
  logic [63:0] rq_addr, cpl_data = 0;
  logic hw_valid, hw_last, hw_ready = 1;
  logic [63:0] hw_addr;
  logic [DW-1:0] hw_data;
  logic dma_st_valid;
  dma_status_t dma_st;

  pcie40_top dut (.*);

  // ---- host model ---------------------------------------------------------------------
  logic [DW-1:0] hmem [logic [63:0]];
  logic [63:0]   table_mem [logic [63:0]];
  logic [63:0]   rqq[$];
  logic [DW-1:0] stream[$];
  int npages = 0, nflush = 0, sp_changes = 0;
  logic [63:0] last_sp = '1;

  always @(posedge clk) if (!rst) begin
    if (hw_valid && hw_ready) hmem[hw_addr] = hw_data;
    if (rq_valid && rq_ready) rqq.push_back(rq_addr);
    if (dma_st_valid) begin
      npages++;
      if (dma_st.size != 32'(PAGE_BYTES)) nflush++;
      if ((dma_st.dst & ~64'hF_FFFF) != last_sp) begin
        if (last_sp != '1) sp_changes++;
        last_sp = dma_st.dst & ~64'hF_FFFF;
      end
      for (int b = 0; b < int'(dma_st.size) / 32; b++) begin
        check(hmem.exists(dma_st.dst + 64'(b * 32)), "page data written before status");
        stream.push_back(hmem[dma_st.dst + 64'(b * 32)]);
        hmem.delete(dma_st.dst + 64'(b * 32));
      end
    end
  end
  initial forever begin
    @(negedge clk);
    if (rqq.size() > 0) begin
      logic [63:0] a;
      a = rqq.pop_front();
      repeat (3) @(negedge clk);
      cpl_valid = 1; cpl_data = table_mem.exists(a) ? table_mem[a] : 64'hDEAD;
      @(negedge clk); cpl_valid = 0;
    end
  end

  // ---- register access ----------------------------------------------------------------
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = a;
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask

  // ---- front-end links ----------------------------------------------------------------
  function automatic logic [31:0] pw(int l, int ev, int i);
    return 32'((l << 24) | ((ev & 255) << 16) | i);
  endfunction
  task automatic send(int l, int tag, int ev, int n);
    @(negedge clk); lk_valid[l] = 1; lk_sof[l] = 1; lk_data[l] = {FRAG_HDR_MAGIC, 24'(tag)};
    for (int i = 0; i < n; i++) begin
      @(negedge clk); lk_sof[l] = 0; lk_data[l] = pw(l, ev, i);
    end
    @(negedge clk); lk_sof[l] = 0; lk_eof[l] = 1; lk_data[l] = {FRAG_TRL_MAGIC, 8'h00, 16'(n)};
    @(negedge clk); lk_valid[l] = 0; lk_eof[l] = 0;
  endtask
  int active = 0;  // link senders still running
  task automatic send_event(int ev, int n [N], logic [N-1:0] msk);
    for (int l = 0; l < N; l++) begin
      automatic int ll = l;
      if (msk[ll]) begin
        active++;
        fork
          begin send(ll, ev, ev, n[ll]); active--; end
        join_none
      end
    end
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    wait (active == 0);
  endtask

  // expected built events (beats), one queue entry per event
  typedef logic [DW-1:0] beats_t[$];
  beats_t exp_ev[$];
  task automatic model(int ev, int n [N], logic [N-1:0] errs, logic [N-1:0] msk);
    beats_t q;
    logic [DW-1:0] b;
    int tot = 2 + (N + 15) / 16;
    logic [31:0] cs = 0;
    for (int l = 0; l < N; l++) if (msk[l]) tot += (n[l] + 7) / 8;
    b = '0; b[31:0] = EVT_HDR_MAGIC; b[63:32] = ev; b[95:64] = tot;
    b[111:96] = 16'(N); b[127:112] = 16'((N + 15) / 16); b[128 +: N] = msk;
    q.push_back(b);
    for (int w = 0; w < (N + 15) / 16; w++) begin
      b = '0;
      for (int l = w * 16; l < N && l < w * 16 + 16; l++) b[(l % 16)*16 +: 16] = msk[l] ? 16'(n[l]) : 16'd0;
      q.push_back(b);
    end
    for (int l = 0; l < N; l++)
      for (int bb = 0; bb < (msk[l] ? (n[l] + 7) / 8 : 0); bb++) begin
        b = '0;
        for (int k = 0; k < 8; k++) if (bb*8 + k < n[l]) begin
          b[k*32 +: 32] = pw(l, ev, bb*8 + k);
          cs ^= pw(l, ev, bb*8 + k);
        end
        q.push_back(b);
      end
    b = '0; b[31:0] = EVT_TRL_MAGIC; b[63:32] = ev; b[64 +: N] = errs; b[159:128] = cs;
    q.push_back(b);
    exp_ev.push_back(q);
  endtask

  // ---- stream parser --------------------------------------------------------------------
  int eb_events = 0, pg_events = 0, err_events = 0, damaged_ok = 0, pos = 0;
  int phase_d_first = 1 << 30;  // no damaged events in this test
  task automatic parse();
    while (stream.size() > 0) begin
      logic [DW-1:0] h;
      h = stream[0];
      if (h[31:0] == EVT_HDR_MAGIC) begin
        int tot;
        tot = int'(h[95:64]);
        if (stream.size() < tot) return;
        if (int'(h[63:32]) >= phase_d_first) begin
          logic [DW-1:0] t;
          t = stream[tot - 1];
          check(t[31:0] == EVT_TRL_MAGIC, "damaged event still framed");
          if (t[64 +: N] != 0) err_events++;
          damaged_ok++;
        end else begin
          beats_t e;
          if (exp_ev.size() == 0) begin check(0, "unexpected built event"); e = {}; end
          else e = exp_ev.pop_front();
          check(tot == e.size(), $sformatf("event %0d length %0d exp %0d", h[63:32], tot, e.size()));
          for (int i = 0; i < tot && i < e.size(); i++)
            check(stream[i] == e[i], $sformatf("event %0d beat %0d", h[63:32], i));
          if (e.size() > 0 && e[e.size()-1][64 +: N] != 0) err_events++;
        end
        repeat (tot) void'(stream.pop_front());
        eb_events++;
      end else if (h[31:0] == PG_HDR_MAGIC) begin
        int sz, ev;
        sz = int'(h[95:64]);
        ev = int'(h[63:32]);
        if (stream.size() < sz) return;
        check(ev == pg_events, $sformatf("pattern event number %0d exp %0d", ev, pg_events));
        for (int b = 1; b < sz; b++) begin
          logic [DW-1:0] e;
          for (int k = 0; k < 8; k++) e[k*32 +: 32] = {16'(ev), 16'(b*8 + k)};
          check(stream[b] == e, $sformatf("pattern event %0d beat %0d", ev, b));
        end
        repeat (sz) void'(stream.pop_front());
        pg_events++;
      end else begin
        check(0, $sformatf("stream out of step: %h", h[63:0]));
        void'(stream.pop_front());
      end
    end
  endtask
  always @(negedge clk) if (!rst) parse();

  // ---- mechanism monitors ---------------------------------------------------------------
  int busy_seen = 0, nosp_seen = 0, hw_stall = 0;
  always @(posedge clk) if (!rst) begin
    if (busy) busy_seen++;
    if (hw_valid && !hw_ready) hw_stall++;
  end

  // ---- test -----------------------------------------------------------------------------
  int pg_win = 0;
  initial begin
    logic [31:0] d, t0, t1, b0, b1, l0, l1, u0, u1, o0, o1;
    int n [N];
    int nev;
    logic [N-1:0] msk;
    for (int l = 0; l < N; l++) begin lk_data[l] = 0; slc_rx_data[l] = 0; end
    for (int i = 0; i < 4; i++) table_mem[64'h1000 + 64'(8*i)] = 64'h0000_0040_0000_0000 + 64'(i) * 64'h10_0000;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    wr(12'h008, 32'h1000); wr(12'h009, 0); wr(12'h00A, 4); wr(12'h00B, 1);

    // ---- A: 470 kHz, 8 kB
    wr(12'h004, 270); wr(12'h005, 256);
    rd(12'h025, t0); rd(12'h026, b0); rd(12'h027, l0);
    wr(12'h001, 32'h6);
    repeat (60 * 270) begin @(negedge clk); pg_win = pg_events; end
    wr(12'h001, 32'h2);
    rd(12'h025, t1); rd(12'h026, b1); rd(12'h027, l1);
    nev = int'(t1);
    wait (pg_events == nev);
    $display("470 kHz: triggers=%0d back-pressured=%0d (%0d%%) lost=%0d delivered in window=%0d",
             t1 - t0, b1 - b0, 100 * (b1 - b0) / (t1 - t0), l1 - l0, pg_win);
    check(t1 - t0 >= 59, "470 kHz: trigger count");
    check(l1 == l0, "470 kHz: no trigger lost");
    check(pg_win * 10 >= int'(t1 - t0) * 9, "470 kHz: at least 90% delivered within the window");

    // ---- B: 260 kHz, 8 kB
    wr(12'h004, 488);
    rd(12'h025, t0); rd(12'h026, b0); rd(12'h027, l0);
    wr(12'h001, 32'h6);
    repeat (40 * 488) @(negedge clk);
    wr(12'h001, 32'h2);
    rd(12'h025, t1); rd(12'h026, b1); rd(12'h027, l1);
    nev = int'(t1);
    wait (pg_events == nev);
    $display("260 kHz: triggers=%0d back-pressured=%0d lost=%0d", t1 - t0, b1 - b0, l1 - l0);
    check(t1 - t0 >= 39, "260 kHz: trigger count");
    check(l1 == l0, "260 kHz: no trigger lost");
    check(b1 == b0, "260 kHz: no back-pressure");

    // ---- C: 46 links x 1 kB at 43 kHz
    wr(12'h001, 32'h0);
    msk = '0; msk[45:0] = '1;
    wr(12'h002, 32'hFFFF_FFFF); wr(12'h003, 32'h0000_3FFF);
    rd(12'h024, u0); rd(12'h034, o0);
    busy_seen = 0;
    for (int l = 0; l < N; l++) n[l] = 254;
    for (int ev = 0; ev < 10; ev++) begin
      longint c0;
      c0 = $time / 10;
      model(ev, n, '0, msk);
      send_event(ev, n, msk);
      while ($time / 10 - c0 < 2953) @(negedge clk);
    end
    wait (eb_events == 10);
    rd(12'h024, u1); rd(12'h034, o1);
    $display("43 kHz, 46 x 1 kB: events=%0d busy cycles=%0d back-pressured events=%0d overflows=%0d",
             eb_events, busy_seen, u1 - u0, o1 - o0);
    check(exp_ev.size() == 0, "43 kHz: every built event arrived");
    check(busy_seen == 0, "43 kHz: busy never raised");
    check(u1 == u0, "43 kHz: no back-pressured event");
    check(o1 == o0, "43 kHz: no link overflow");
    check(err_events == 0, "43 kHz: no link error flags");
    $display("workloads: pattern=%0d built=%0d pages=%0d flushed=%0d super-page changes=%0d",
             pg_events, eb_events, npages, nflush, sp_changes);
    check(stream.size() == 0, "all pages parsed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: built=%0d pattern=%0d pages=%0d", eb_events, pg_events, npages);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
