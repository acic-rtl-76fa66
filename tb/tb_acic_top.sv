// tb_acic_top: end-to-end test of the ACIC top at its default sizes (16-
// entry i-Filter, 32KB 8-way i-cache, 256-entry CSHR, 1024-entry HRT,
// 16 PT counters with 10-slot queues) behind a 15-cycle L2 model.
//
// Stimulus: a bursty instruction-block stream. The code footprint is a set
// of "functions", runs of consecutive 64-byte blocks at random places, in
// total several times the i-cache; each call walks a function and fetches
// each block one to four times (a burst). Calls prefer a hot subset, so
// some blocks come back after their burst and others do not.
//
// Checking, independent of the RTL:
//  - every response carries the fetched address and the L2 data of it;
//  - a hit returns ICACHE_LAT (4) cycles after acceptance, a miss
//    L2 latency + 3 cycles after it;
//  - a reference model of the whole ACIC policy (i-Filter and i-cache LRU
//    lists, CSHR ways with LRU ages, HRT, PT counters, PT update queues
//    draining one request per cycle) predicts, fetch by fetch, hit or
//    miss in each structure, each victim's fate (free way, admit, bypass)
//    and the CSHR matches; the RTL's event pulses must agree.
// Every mechanism is counted, and one that never happens is a failure.
module tb_acic_top;
  import acic_pkg::*;
  localparam int unsigned L2_LAT = 15;
  localparam int unsigned N_FETCH = 40000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   fetch_valid = 0, fetch_ready, resp_valid;
  baddr_t fetch_baddr = '0, resp_baddr;
  block_t resp_data;
  logic   l2_req_valid, l2_req_ready, l2_resp_valid;
  baddr_t l2_req_baddr;
  block_t l2_resp_data;
  acic_events_t events;
  int unsigned l2_n;
  int checks = 0, failures = 0;

  acic_top dut (.*);

  l2_model #(.LAT(L2_LAT)) u_l2 (
    .clk, .rst_n, .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req_baddr(l2_req_baddr),
    .resp_valid(l2_resp_valid), .resp_data(l2_resp_data), .n_requests(l2_n)
  );

  function automatic block_t expect_data(baddr_t a);
    block_t d;
    d[511:454] = a;  d[453:448] = 6'h15;
    d[447:390] = ~a; d[389:384] = 6'h2A;
    for (int i = 0; i < 6; i++) d[i*64 +: 64] = {a[31:0] ^ 32'h9E37_79B9, a[57:26]};
    return d;
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- model
  baddr_t m_if[$];                     // i-Filter, MRU first
  baddr_t m_ic[IC_SETS][$];            // i-cache sets, MRU first
  typedef struct { bit v; ptag_t vt; ptag_t ct; int age; } cent_t;
  cent_t  m_cs[CSHR_SETS][CSHR_WAYS];
  logic [HIST_W-1:0] m_h[HRT_ENTRIES];
  int     m_c[PT_ENTRIES];
  bit     m_q[PT_ENTRIES][$];
  longint m_last_edge = 0;             // last cycle whose edge the model applied

  function automatic void m_pop_edge();
    for (int i = 0; i < PT_ENTRIES; i++) begin
      if (m_q[i].size() > 0) begin
        automatic bit inc = m_q[i].pop_front();
        if (inc && m_c[i] < 31) m_c[i]++;
        else if (!inc && m_c[i] > 0) m_c[i]--;
      end
    end
  endfunction

  // apply the pop-only edges of cycles before c
  function automatic void m_sync(longint c);
    while (m_last_edge < c - 1) begin m_pop_edge(); m_last_edge++; end
  endfunction

  // the edge of cycle c, with the update requests presented in that cycle
  function automatic void m_edge(longint c, upd_req_t r[NREQ]);
    logic [HIST_W-1:0] h[NREQ];
    bit taken[HRT_ENTRIES];
    m_sync(c);
    m_pop_edge();
    for (int p = 0; p < NREQ; p++) begin
      h[p] = m_h[hrt_hash(r[p].vtag)];
      if (r[p].valid && m_q[h[p]].size() < PTQ_DEPTH) m_q[h[p]].push_back(r[p].outcome);
    end
    for (int p = 0; p < NREQ; p++) begin
      automatic int ix = int'(hrt_hash(r[p].vtag));
      if (r[p].valid && !taken[ix]) begin
        taken[ix] = 1;
        m_h[ix] = {h[p][HIST_W-2:0], r[p].outcome};
      end
    end
    m_last_edge = c;
  endfunction

  // counters of mechanisms
  int n_fetch, n_ifh, n_ich, n_miss, n_evict, n_free, n_admit, n_bypass,
      n_cins, n_cvh, n_cch, n_cev, n_multi, n_ptu, n_alias, n_wait, n_drop;
  longint cyc = 0;

  // model step for an accepted fetch in cycle c
  task automatic m_fetch(longint c, baddr_t a, acic_events_t ev);
    automatic int s = int'(ic_index(a)), cs = int'(cshr_set(a)), pos_f = -1, pos_c = -1, nmatch = 0;
    automatic bit e_vh = 0, e_ch = 0;
    upd_req_t r[NREQ];
    foreach (m_if[i]) if (m_if[i] == a) pos_f = i;
    foreach (m_ic[s][i]) if (m_ic[s][i] == a) pos_c = i;
    chk(ev.ifilter_hit == (pos_f >= 0), "i-Filter hit matches model");
    chk(ev.icache_hit == (pos_c >= 0), "i-cache hit matches model");
    if (pos_f >= 0) begin m_if.delete(pos_f); m_if.push_front(a); end
    if (pos_c >= 0) begin m_ic[s].delete(pos_c); m_ic[s].push_front(a); end
    for (int w = 0; w < NREQ; w++) r[w] = '0;
    for (int w = 0; w < CSHR_WAYS; w++) begin
      if (m_cs[cs][w].v && m_cs[cs][w].vt == ptag(a)) begin
        r[w] = '{valid: 1'b1, vtag: m_cs[cs][w].vt, outcome: 1'b1}; e_vh = 1;
      end else if (m_cs[cs][w].v && m_cs[cs][w].ct == ptag(a)) begin
        r[w] = '{valid: 1'b1, vtag: m_cs[cs][w].vt, outcome: 1'b0}; e_ch = 1;
      end
      if (r[w].valid) begin m_cs[cs][w].v = 0; nmatch++; end
    end
    chk(ev.cshr_victim_hit == e_vh && ev.cshr_contender_hit == e_ch, "CSHR matches agree with model");
    if (nmatch > 1) n_multi++;
    m_edge(c, r);
  endtask

  // model step for the fill in cycle c of block a
  task automatic m_fill(longint c, baddr_t a, acic_events_t ev);
    upd_req_t r[NREQ];
    for (int w = 0; w < NREQ; w++) r[w] = '0;
    m_sync(c);
    if (m_if.size() == IF_ENTRIES) begin
      automatic baddr_t v = m_if.pop_back();
      automatic int s = int'(ic_index(v));
      chk(ev.ifilter_evict, "victim expected");
      if (m_ic[s].size() < IC_WAYS) begin
        chk(ev.free_insert && !ev.cshr_insert, "free-way insert expected");
        m_ic[s].push_front(v);
      end else begin
        automatic baddr_t cont = m_ic[s][IC_WAYS-1];
        automatic int hix = int'(hrt_hash(ptag(v)));
        automatic bit adm = (m_c[m_h[hix]] >= 16);
        automatic int cs = int'(cshr_set(v)), way = -1, oldest = -1;
        chk(ev.cshr_insert && ev.admit == adm && ev.bypass == !adm, "admission decision matches model");
        // CSHR insertion: lowest free way, else the oldest
        for (int w = CSHR_WAYS - 1; w >= 0; w--) if (!m_cs[cs][w].v) way = w;
        if (way < 0) begin
          for (int w = 0; w < CSHR_WAYS; w++) if (m_cs[cs][w].age == CSHR_WAYS - 1) oldest = w;
          way = oldest;
          r[CSHR_WAYS] = '{valid: 1'b1, vtag: m_cs[cs][way].vt, outcome: 1'b1};
        end
        chk(ev.cshr_unresolved_evict == r[CSHR_WAYS].valid, "unresolved CSHR eviction matches model");
        for (int w = 0; w < CSHR_WAYS; w++) if (m_cs[cs][w].age < m_cs[cs][way].age) m_cs[cs][w].age++;
        m_cs[cs][way] = '{v: 1, vt: ptag(v), ct: ptag(cont), age: 0};
        if (adm) begin void'(m_ic[s].pop_back()); m_ic[s].push_front(v); end
      end
    end else begin
      chk(!ev.ifilter_evict, "no victim expected");
    end
    m_if.push_front(a);
    m_edge(c, r);
  endtask

  // ------------------------------------------------------------ checking
  longint acc_cyc;
  baddr_t acc_addr;
  bit     acc_hit, pending = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc <= cyc + 1;
      if (events.fetch) begin
        n_fetch++;
        if (events.ifilter_hit) n_ifh++;
        if (events.icache_hit) n_ich++;
        if (events.miss) n_miss++;
        if (events.cshr_victim_hit) n_cvh++;
        if (events.cshr_contender_hit) n_cch++;
        chk(!pending, "one fetch at a time");
        pending  = 1;
        acc_cyc  = cyc;
        acc_addr = fetch_baddr;
        acc_hit  = events.ifilter_hit || events.icache_hit;
        m_fetch(cyc, fetch_baddr, events);
      end
      if (events.fill) begin
        if (events.ifilter_evict) n_evict++;
        if (events.free_insert) n_free++;
        if (events.admit) n_admit++;
        if (events.bypass) n_bypass++;
        if (events.cshr_insert) n_cins++;
        if (events.cshr_unresolved_evict) n_cev++;
        chk(pending && !acc_hit, "fill only after a miss");
        m_fill(cyc, acc_addr, events);
      end
      if (events.pt_update) n_ptu++;
      if (events.hrt_alias) n_alias++;
      if (events.ptq_wait) n_wait++;
      if (events.ptq_drop) n_drop++;
      if (resp_valid) begin
        chk(pending, "response without request");
        pending = 0;
        chk(resp_baddr == acc_addr, "response address");
        chk(resp_data == expect_data(acc_addr), "response data");
        chk(cyc - acc_cyc == (acc_hit ? longint'(IC_LAT) : longint'(L2_LAT + 3)), "response latency");
      end
    end
  end

  // -------------------------------------------------------------- stimulus
  localparam int N_FUNC = 400;
  baddr_t f_base[N_FUNC];
  int     f_len[N_FUNC];

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int issued = 0, fsel;
    foreach (m_h[i]) m_h[i] = '0;
    foreach (m_c[i]) m_c[i] = 16;
    foreach (m_cs[s, w]) m_cs[s][w] = '{v: 0, vt: '0, ct: '0, age: w};
    foreach (f_base[i]) begin
      f_base[i] = BADDR_W'({$urandom(), $urandom()}) & ~BADDR_W'(3);
      f_len[i]  = $urandom_range(1, 8);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (issued < N_FETCH) begin
      // 70% of calls go to a hot tenth of the functions
      fsel = ($urandom_range(0, 99) < 70) ? $urandom_range(0, N_FUNC/10 - 1) : $urandom_range(0, N_FUNC - 1);
      for (int b = 0; b < f_len[fsel] && issued < N_FETCH; b++) begin
        repeat ($urandom_range(1, 4)) begin
          @(negedge clk);
          fetch_valid = 1;
          fetch_baddr = f_base[fsel] + BADDR_W'(b);
          do @(posedge clk); while (!fetch_ready);
          @(negedge clk);
          fetch_valid = 0;
          issued++;
          while (!resp_valid) @(negedge clk);
        end
      end
    end
    repeat (20) @(negedge clk);
    $display("fetches=%0d ifilter_hits=%0d icache_hits=%0d misses=%0d l2_requests=%0d", n_fetch, n_ifh, n_ich, n_miss, l2_n);
    $display("evictions=%0d free_inserts=%0d admits=%0d bypasses=%0d", n_evict, n_free, n_admit, n_bypass);
    $display("cshr_inserts=%0d victim_matches=%0d contender_matches=%0d multi_match=%0d unresolved_evictions=%0d",
             n_cins, n_cvh, n_cch, n_multi, n_cev);
    $display("pt_updates=%0d hrt_alias=%0d ptq_wait=%0d ptq_drop=%0d cycles=%0d", n_ptu, n_alias, n_wait, n_drop, cyc);
    chk(n_fetch == issued && issued >= N_FETCH && l2_n == n_miss, "fetch and L2 request counts");
    chk(n_alias > 0, "HRT aliasing happened");
    chk(n_drop > 0, "PT queue overflow happened");
    chk(n_ifh > 0, "i-Filter hit happened");
    chk(n_ich > 0, "i-cache hit happened");
    chk(n_miss > 0, "miss happened");
    chk(n_evict > 0, "i-Filter eviction happened");
    chk(n_free > 0, "free-way insert happened");
    chk(n_admit > 0, "admission happened");
    chk(n_bypass > 0, "bypass happened");
    chk(n_cvh > 0, "CSHR victim match happened");
    chk(n_cch > 0, "CSHR contender match happened");
    chk(n_multi > 0, "multiple CSHR matches in one search happened");
    chk(n_cev > 0, "unresolved CSHR eviction happened");
    chk(n_ptu > 0, "PT update happened");
    chk(n_wait > 0, "PT queue wait happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
