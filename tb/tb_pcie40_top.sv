// tb_pcie40_top: end-to-end test of pcie40_top with 4 links, 16-beat link buffers and
// two on-chip pages. A host model answers descriptor-table reads, stores every DMA write
// in a sparse memory and, for each DMA status record, reads the page back, so the test
// sees the byte stream exactly as the host would. The stream is parsed event by event:
// built events are compared beat by beat with a model computed here, pattern events with
// the generator's formula.
// Phases:
//   A  150 small built events, one every few hundred cycles, with random host stalls:
//      early-closed pages, a super-page change after 128 pages, one event with a wrong
//      event tag on link 2 (error flag), trigger counting.
//   B  slow control on link 1: a 6-word packet out, 3 words back.
//   C  pattern generator selected (mode switch), 300-beat events faster than the host
//      takes them: full pages, DMA FIFO back-pressure, generator back-pressure, and the
//      super pages run out (the controller waits) until a second table is written.
//   D  back to built events with the host stopped: link buffers fill, busy rises and
//      link buffers overflow; the damaged events still arrive with error flags.
// Every mechanism is counted and a failure is counted for any that never happened.
module tb_pcie40_top;
  import pcie40_pkg::*;
  localparam int N = 4;
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

  pcie40_top #(.NLINKS(N), .LINK_DEPTH(16), .NPAGES(2)) dut (.*);

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
    fork
      send(0, bad_link == 0 ? ev + 99 : ev, ev, n[0]);
      send(1, bad_link == 1 ? ev + 99 : ev, ev, n[1]);
      send(2, bad_link == 2 ? ev + 99 : ev, ev, n[2]);
      send(3, bad_link == 3 ? ev + 99 : ev, ev, n[3]);
      begin @(negedge clk); trig = 1; @(negedge clk); trig = 0; end
    join
  endtask

  // expected built events (beats), one queue entry per event
  typedef logic [DW-1:0] beats_t[$];
  beats_t exp_ev[$];
  task automatic model(int ev, int n [N], logic [N-1:0] errs);
    beats_t q;
    logic [DW-1:0] b;
    int tot = 3;
    logic [31:0] cs = 0;
    for (int l = 0; l < N; l++) tot += (n[l] + 7) / 8;
    b = '0; b[31:0] = EVT_HDR_MAGIC; b[63:32] = ev; b[95:64] = tot;
    b[111:96] = 16'(N); b[127:112] = 1; b[128 +: N] = '1;
    q.push_back(b);
    b = '0;
    for (int l = 0; l < N; l++) b[l*16 +: 16] = 16'(n[l]);
    q.push_back(b);
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
  int phase_d_first = 1 << 30;
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
    int nev;
    for (int l = 0; l < N; l++) begin lk_data[l] = 0; slc_rx_data[l] = 0; end
    table_mem[64'h1000] = 64'h0000_0040_0000_0000;
    table_mem[64'h1008] = 64'h0000_0040_0010_0000;
    table_mem[64'h2000] = 64'h0000_0050_0000_0000;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    rd(12'h000, d); check(d == {16'hB240, 16'(N)}, "ID register");
    wr(12'h002, 32'hF);                 // all links on
    wr(12'h008, 32'h1000); wr(12'h009, 0); wr(12'h00A, 2); wr(12'h00B, 1);

    // ---- A: built events with random host stalls
    fork
      begin
        for (int ev = 0; ev < 150; ev++) begin
          for (int l = 0; l < N; l++) n[l] = $urandom % 24;
          model(ev, n, ev == 7 ? 4'b0100 : 4'b0000);
          send_event(ev, n, ev == 7 ? 2 : -1);
          repeat (40) @(negedge clk);
        end
      end
      begin
        repeat (6000) begin @(negedge clk); hw_ready = ($urandom % 4) != 0; end
        hw_ready = 1;
      end
    join
    wait (eb_events == 150);
    check(exp_ev.size() == 0, "every built event arrived");
    rd(12'h020, s_trig); check(s_trig == 150, $sformatf("trigger count %0d", s_trig));

    // ---- B: slow control on link 1
    for (int i = 0; i < 6; i++) wr(12'h200 + 12'(4 + 0), 32'h51C0 + i);
    fork
      wr(12'h200 + 12'(4 + 3), 1);
      begin
        static int got = 0;
        while (got < 6) begin
          @(posedge clk);
          if (slc_tx_valid[1] && slc_tx_ready[1]) begin
            check(slc_tx_data[1] == 32'h51C0 + got, $sformatf("slow-control word %0d", got));
            got++;
          end
          check(slc_tx_valid[0] == 0 && slc_tx_valid[2] == 0, "other links quiet");
        end
      end
    join
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); slc_rx_valid[1] = 1; slc_rx_data[1] = 32'hFEE0 + i;
    end
    @(negedge clk); slc_rx_valid[1] = 0;
    for (int i = 0; i < 3; i++) begin
      rd(12'h200 + 12'(4 + 1), d); check(d == 32'hFEE0 + i, $sformatf("slow-control read %0d", i));
    end

    // ---- C: pattern generator, 300-beat events every 200 cycles
    wr(12'h004, 200); wr(12'h005, 300);
    wr(12'h001, 32'h6);                 // select pattern, enable trigger
    wait (pg_events >= 1);
    // run until the super pages are used up and the controller waits
    begin
      static int guard = 0;
      do begin repeat (500) @(negedge clk); rd(12'h02C, s_nosp); guard++; end
      while (s_nosp < 1000 && guard < 200);
    end
    check(s_nosp >= 1000, $sformatf("controller waited for super pages (%0d cycles)", s_nosp));
    wr(12'h001, 32'h2);                 // stop triggers, keep pattern selected
    wr(12'h008, 32'h2000); wr(12'h00A, 1); wr(12'h00B, 1);   // one more super page
    repeat (3000) @(negedge clk);
    rd(12'h025, d); nev = int'(d);      // triggers issued
    rd(12'h027, d); nev -= int'(d);     // minus lost ones
    wait (pg_events == nev);
    rd(12'h023, s_ulbp); rd(12'h026, s_pgbp);
    check(s_ulbp > 0, "DMA FIFO back-pressure seen");
    check(s_pgbp > 0, "pattern generator back-pressure seen");

    // ---- D: host stopped, links overflow
    wr(12'h001, 32'h0);                 // back to built events
    phase_d_first = 150;
    hw_ready = 0;
    for (int ev = 150; ev < 190; ev++) begin
      for (int l = 0; l < N; l++) n[l] = 100;
      send_event(ev, n, -1);
    end
    repeat (200) @(negedge clk);
    rd(12'h034, s_ovf);
    check(s_ovf > 0, $sformatf("link overflow count %0d", s_ovf));
    hw_ready = 1;
    wait (eb_events == 190);
    repeat (100) @(negedge clk);
    rd(12'h029, s_flush); rd(12'h028, s_closed);

    // ---- mechanism summary
    $display("mechanisms: built=%0d pattern=%0d error_events=%0d damaged=%0d pages=%0d flushed=%0d sp_changes=%0d busy_cycles=%0d host_stalls=%0d nosp=%0d ulbp=%0d pgbp=%0d ovf=%0d",
             eb_events, pg_events, err_events, damaged_ok, npages, nflush, sp_changes, busy_seen,
             hw_stall, s_nosp, s_ulbp, s_pgbp, s_ovf);
    check(eb_events == 190, "built events");
    check(pg_events > 0, "pattern events (mode switch)");
    check(err_events >= 2, "events with link error flags");
    check(nflush > 0 && s_flush > 0, "early-closed pages");
    check(npages - nflush > 0, "full pages");
    check(sp_changes >= 2, "super page changes");
    check(busy_seen > 0, "busy to the trigger system");
    check(hw_stall > 0, "host stalls");
    check(s_closed == 32'(npages), "pages closed = pages delivered");
    check(stream.size() == 0, "stream fully parsed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: built=%0d pattern=%0d pages=%0d", eb_events, pg_events, npages);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
