// tb_pcie40_full: one complete readout operation through pcie40_top at its default size
// (48 links, 8 kB link buffers, eight 8 kB on-chip pages, 32 kB DMA FIFO).
// The host model, the link drivers, the event model and the stream parser are those of
// the reduced end-to-end test. Sequence: read the ID, enable all 48 links, load a
// descriptor table of two super pages, send 12 events with random fragment sizes (one with
// a wrong tag on link 40) under random host stalls, compare every built event beat by beat
// with the model, read the per-link fragment and word counters, then switch to the pattern generator for 4 events of 8 kB and check them.
module tb_pcie40_full;
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
  task automatic send_event(int ev, int n [N], int bad_link);
    for (int l = 0; l < N; l++) begin
      automatic int ll = l;
      fork
        send(ll, bad_link == ll ? ev + 99 : ev, ev, n[ll]);
      join_none
    end
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    wait fork;
  endtask

  // expected built events (beats), one queue entry per event
  typedef logic [DW-1:0] beats_t[$];
  beats_t exp_ev[$];
  task automatic model(int ev, int n [N], logic [N-1:0] errs);
    beats_t q;
    logic [DW-1:0] b;
    int tot = 2 + (N + 15) / 16;
    logic [31:0] cs = 0;
    for (int l = 0; l < N; l++) tot += (n[l] + 7) / 8;
    b = '0; b[31:0] = EVT_HDR_MAGIC; b[63:32] = ev; b[95:64] = tot;
    b[111:96] = 16'(N); b[127:112] = 16'((N + 15) / 16); b[128 +: N] = '1;
    q.push_back(b);
    for (int w = 0; w < (N + 15) / 16; w++) begin
      b = '0;
      for (int l = w * 16; l < N && l < w * 16 + 16; l++) b[(l % 16)*16 +: 16] = 16'(n[l]);
      q.push_back(b);
    end
    for (int l = 0; l < N; l++)
      for (int bb = 0; bb < (n[l] + 7) / 8; bb++) begin
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
  initial begin
    logic [31:0] d, s_trig, s_ulbp, s_pgbp, s_nosp, s_ovf, s_flush, s_closed;
    int n [N];
    int nev, words47;
    words47 = 0;
    for (int l = 0; l < N; l++) begin lk_data[l] = 0; slc_rx_data[l] = 0; end
    table_mem[64'h1000] = 64'h0000_0040_0000_0000;
    table_mem[64'h1008] = 64'h0000_0040_0010_0000;
    table_mem[64'h2000] = 64'h0000_0050_0000_0000;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    rd(12'h000, d); check(d == {16'hB240, 16'(N)}, "ID register");
    wr(12'h002, 32'hF);                 // all links on
    wr(12'h008, 32'h1000); wr(12'h009, 0); wr(12'h00A, 2); wr(12'h00B, 1);

    // ---- built events
    wr(12'h002, 32'hFFFF_FFFF); wr(12'h003, 32'h0000_FFFF);
    fork
      begin
        for (int ev = 0; ev < 12; ev++) begin
          for (int l = 0; l < N; l++) n[l] = $urandom % 40;
          words47 += n[47] + 2;
          model(ev, n, ev == 5 ? 48'(1) << 40 : '0);
          send_event(ev, n, ev == 5 ? 40 : -1);
          repeat (20) @(negedge clk);
        end
      end
      begin
        repeat (2000) begin @(negedge clk); hw_ready = ($urandom % 4) != 0; end
        hw_ready = 1;
      end
    join
    wait (eb_events == 12);
    check(exp_ev.size() == 0, "every built event arrived");
    rd(12'h020, s_trig); check(s_trig == 12, $sformatf("trigger count %0d", s_trig));
    rd(12'h1AF, d); check(d == 12, $sformatf("fragment counter of link 47 = %0d", d));
    rd(12'h1EF, d); check(d == 32'(words47), $sformatf("word counter of link 47 = %0d exp %0d", d, words47));
    rd(12'h128, d); check(d == 0, "no fragment error counted on link 40 (tag errors are event-level)");
    // ---- pattern generator: 4 events of 256 beats (8 kB)
    wr(12'h004, 400); wr(12'h005, 256);
    wr(12'h001, 32'h6);
    wait (pg_events >= 3);
    wr(12'h001, 32'h2);
    repeat (2000) @(negedge clk);
    rd(12'h025, d); nev = int'(d);
    wait (pg_events == nev);
    $display("full size: built=%0d pattern=%0d error_events=%0d pages=%0d", eb_events, pg_events, err_events, npages);
    check(err_events == 1, "one event with a link error flag");
    check(npages > 0 && stream.size() == 0, "pages delivered and parsed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: built=%0d pattern=%0d pages=%0d", eb_events, pg_events, npages);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
