// tb_event_builder: self-checking test of event_builder with four links.
// Fragments are fed through four link_buffer instances. Event 0 uses all links with
// 10, 0, 8 and 17 payload words and an always-ready output; its beats and its length in
// cycles (NSW + 2 + payload beats + NLINKS = 13) are checked. Event 1 masks link 2, gives
// link 1 a wrong event tag, and runs with a randomly stalling output; the error flags,
// size table, payload and checksum are compared with a model computed here.
module tb_event_builder;
  import pcie40_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid = 0, in_sof = 0, in_eof = 0;
  logic [31:0]  in_data [N];
  logic [N-1:0] st_valid, st_pop, d_valid, d_pop, lbusy, lovf, ldone, lerr;
  frag_status_t st [N];
  logic [DW-1:0] d_data [N];
  logic [N-1:0] link_mask = '1;
  logic o_valid, o_ready = 1, ev_done;
  beat_t o_beat;
  logic [N-1:0] ev_err_links;

  for (genvar l = 0; l < N; l++) begin : g
    link_buffer #(.DEPTH(16), .NFRAG(8)) lb (.clk, .rst,
      .in_valid(in_valid[l]), .in_data(in_data[l]), .in_sof(in_sof[l]), .in_eof(in_eof[l]),
      .st_valid(st_valid[l]), .st(st[l]), .st_pop(st_pop[l]),
      .d_valid(d_valid[l]), .d_data(d_data[l]), .d_pop(d_pop[l]),
      .busy(lbusy[l]), .ovf_pulse(lovf[l]), .frag_done(ldone[l]), .frag_err(lerr[l]));
  end

  event_builder #(.NLINKS(N)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] pw(int l, int ev, int i);
    return 32'((l << 24) | (ev << 16) | i);
  endfunction

  task automatic send(int l, int tag, int ev, int n);
    @(negedge clk); in_valid[l] = 1; in_sof[l] = 1; in_data[l] = {FRAG_HDR_MAGIC, 24'(tag)};
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_sof[l] = 0; in_data[l] = pw(l, ev, i);
    end
    @(negedge clk); in_sof[l] = 0; in_eof[l] = 1; in_data[l] = {FRAG_TRL_MAGIC, 8'h00, 16'(n)};
    @(negedge clk); in_valid[l] = 0; in_eof[l] = 0;
  endtask

  // expected event as a list of beats
  beat_t exp_q[$];
  task automatic model(int ev, logic [N-1:0] m, int n [N], logic [N-1:0] errs);
    beat_t b;
    int tot = 3;
    logic [31:0] cs = 0;
    for (int l = 0; l < N; l++) if (m[l]) tot += (n[l] + 7) / 8;
    b = '0; b.sop = 1;
    b.data[31:0] = EVT_HDR_MAGIC; b.data[63:32] = ev; b.data[95:64] = tot;
    b.data[111:96] = 16'(N); b.data[127:112] = 1; b.data[128 +: N] = m;
    exp_q.push_back(b);
    b = '0;
    for (int l = 0; l < N; l++) if (m[l]) b.data[l*16 +: 16] = 16'(n[l]);
    exp_q.push_back(b);
    for (int l = 0; l < N; l++) if (m[l])
      for (int bb = 0; bb < (n[l] + 7) / 8; bb++) begin
        b = '0;
        for (int k = 0; k < 8; k++) if (bb*8 + k < n[l]) begin
          b.data[k*32 +: 32] = pw(l, ev, bb*8 + k);
          cs ^= pw(l, ev, bb*8 + k);
        end
        exp_q.push_back(b);
      end
    b = '0; b.eop = 1;
    b.data[31:0] = EVT_TRL_MAGIC; b.data[63:32] = ev; b.data[64 +: N] = errs;
    b.data[159:128] = cs;
    exp_q.push_back(b);
  endtask

  int nbeat = 0, first_cyc = -1, last_cyc = -1, cyc = 0, events = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && o_valid && o_ready) begin
      beat_t e;
      if (o_beat.sop) first_cyc = cyc;
      if (exp_q.size() == 0) check(0, "unexpected beat");
      else begin
        e = exp_q.pop_front();
        check(o_beat == e, $sformatf("beat %0d mismatch: got %h exp %h", nbeat, o_beat.data[159:0], e.data[159:0]));
      end
      nbeat++;
      if (o_beat.eop) begin last_cyc = cyc; events++; end
    end
  end

  initial begin
    static int n0 [N] = '{10, 0, 8, 17};
    static int n1 [N] = '{3, 5, 0, 1};
    for (int l = 0; l < N; l++) in_data[l] = 0;
    repeat (3) @(posedge clk); rst = 0;
    // event 0: all links
    model(0, 4'b1111, n0, 4'b0000);
    fork
      send(0, 0, 0, 10); send(1, 0, 0, 0); send(2, 0, 0, 8); send(3, 0, 0, 17);
    join
    wait (events == 1);
    check(last_cyc - first_cyc + 1 == 13, $sformatf("event 0 took %0d cycles, expected 13", last_cyc - first_cyc + 1));
    // event 1: link 2 masked, link 1 wrong tag, random stalls
    @(negedge clk); link_mask = 4'b1011;
    model(1, 4'b1011, n1, 4'b0010);
    fork
      send(0, 1, 1, 3); send(1, 7, 1, 5); send(3, 1, 1, 1);
      begin
        while (events < 2) begin @(negedge clk); o_ready = ($urandom % 3) != 0; end
        o_ready = 1;
      end
    join
    @(posedge clk); @(negedge clk);
    check(exp_q.size() == 0, "all expected beats seen");
    check(events == 2, "two events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && ev_done) begin
    check(ev_err_links == (events == 1 ? 4'b0000 : 4'b0010), $sformatf("error flags %b", ev_err_links));
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
