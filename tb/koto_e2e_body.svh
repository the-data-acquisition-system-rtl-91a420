// Body shared by the end-to-end testbenches of koto_daq_top. The including
// module defines NA (ADC modules), DEPTH, W (record length), BUFW, AWM,
// FULL (1: one plain pass at full size, 0: also exercise every mechanism)
// and instantiates the top as `dut` on the signals declared here.
//
// Detector model: every channel sits on its pedestal; a particle adds a
// triangular pulse of 9 samples (rise 4, fall 4) with the given peak. Each
// event is a set of such pulses. The checker reconstructs what the design
// must deliver from the same model: which events fire Lv1, the record each
// ADC module must have captured (rows digitized from T+1-D on, T being the
// clock lv1_trig is sampled in), the COE decision, and the byte stream each
// Lv2 module sends to the Lv3 nodes, which is parsed and compared word by
// word.

  localparam int NM   = (NA + 15) / 16;
  localparam int PKT  = 1 + W * 16;
  localparam int PD   = NM + 10;            // pipeline delay: trigger latency plus a few samples
  localparam int THR  = 3000;

  logic clk = 0, rst = 1;
  adc_row_t [NA-1:0] samples, ped;
  logic [NA-1:0] is_csi;
  logic [NA-1:0][2:0] vidx;
  pos_t [NA-1:0][15:0] px, py;
  logic [NM-1:0] mem_a_we, mem_a_re, mem_b_we, mem_b_re, tx_valid, tx_sop, tx_eop, tx_ready, lv2_err;
  logic [NM-1:0][AWM-1:0] mem_a_waddr, mem_a_raddr, mem_b_waddr, mem_b_raddr;
  logic [NM-1:0][MEM_W-1:0] mem_wdata, rdata_a, rdata_b;
  logic [NM-1:0][7:0] tx_data, tx_dest;
  logic [NM-1:0][31:0] n_sent, n_swaps;
  logic [NA-1:0] adc_lost;
  logic lv1_trig, lv2_full, adc_busy;
  logic [31:0] n_lv1_req, n_lv1_acc, n_lv1_susp, n_lv2_in, n_lv2_acc;
  int checks = 0, failures = 0, cyc = 0;

  for (genvar m = 0; m < NM; m++) begin : g_mem
    mem_model #(.AW(AWM)) ma (.clk, .we(mem_a_we[m]), .waddr(mem_a_waddr[m]), .wdata(mem_wdata[m]), .re(mem_a_re[m]), .raddr(mem_a_raddr[m]), .rdata(rdata_a[m]));
    mem_model #(.AW(AWM)) mb (.clk, .we(mem_b_we[m]), .waddr(mem_b_waddr[m]), .wdata(mem_wdata[m]), .re(mem_b_re[m]), .raddr(mem_b_raddr[m]), .rdata(rdata_b[m]));
  end

  always #4 clk = ~clk;

  function automatic void fail(string s);
    failures++;
    if (failures < 12) $display("FAIL @%0d: %s", cyc, s);
  endfunction

  // ---------------- detector model ----------------
  typedef struct { int t; int a; int c; int amp; } pulse_t;
  typedef enum { E_FAR, E_CENTER, E_LOW, E_VETO, E_MASKED } etype_t;
  typedef struct { int t; etype_t ty; } event_t;
  pulse_t pulses[$];
  event_t events[$];

  function automatic int pedv(int a, int c);
    return 100 + ((a * 16 + c) * 37) % 200;
  endfunction
  function automatic int tri9(int d);
    return (d < 0 || d > 8) ? 0 : 4 - ((d > 4) ? d - 4 : 4 - d);
  endfunction
  function automatic int value(int t, int a, int c);
    int v;
    v = pedv(a, c);
    foreach (pulses[i]) if (pulses[i].a == a && pulses[i].c == c) v += pulses[i].amp * tri9(t - pulses[i].t) / 4;
    return (v > 16383) ? 16383 : v;
  endfunction

  task automatic add_event(int t, etype_t ty);
    int amp;
    amp = (ty == E_LOW) ? 1000 : 2000;
    events.push_back('{t, ty});
    if (ty == E_CENTER) begin
      pulses.push_back('{t, 9, 0, amp}); pulses.push_back('{t, 9, 15, amp});      // x = -450 and +450, y = -30
    end else begin
      pulses.push_back('{t, 9, 15, amp}); pulses.push_back('{t, 10, 15, amp});    // x = +450: COE 450 mm
    end
    if (ty == E_VETO)   pulses.push_back('{t, NA - 2, 3, 1000});   // veto subsystem 0 (enabled)
    if (ty == E_MASKED) pulses.push_back('{t, NA - 1, 5, 1000});   // veto subsystem 1 (masked off)
  endtask

  // drive the samples
  always @(posedge clk) begin
    adc_row_t [NA-1:0] s;
    cyc <= cyc + 1;
    for (int a = 0; a < NA; a++) for (int c = 0; c < 16; c++) s[a][c] = sample_t'(pedv(a, c));
    foreach (pulses[i]) begin
      int d;
      d = cyc + 1 - pulses[i].t;
      if (d >= 0 && d <= 8) s[pulses[i].a][pulses[i].c] = sample_t'(value(cyc + 1, pulses[i].a, pulses[i].c));
    end
    samples <= s;
  end

  // ---------------- Lv1 observation ----------------
  int trig_t[$];            // sample clock of each accepted trigger, by event number
  bit exp_acc[$];           // expected Lv2 decision, by event number
  int n_veto_ev = 0, n_low_ev = 0, n_far = 0, n_center = 0, busy_stall = 0, bank_stall = 0;
  int events_done[$];       // per event number: modules that delivered it

  function automatic bit coe_accept(int t0);
    // peak of every pulsed CsI channel inside the record t0 .. t0+W-1
    real se, sx, sy;
    int seen[string];
    se = 0; sx = 0; sy = 0;
    foreach (pulses[i]) begin
      int a, c, pk, g;
      string key;
      a = pulses[i].a; c = pulses[i].c; pk = 0;
      key = $sformatf("%0d_%0d", a, c);
      if (seen.exists(key) || !is_csi[a]) continue;
      seen[key] = 1;
      for (int t = t0; t < t0 + W; t++) if (value(t, a, c) > pk) pk = value(t, a, c);
      pk -= pedv(a, c);
      if (pk <= 0) continue;
      g = a * 16 + c;
      se += pk; sx += pk * real'(px[a][c]); sy += pk * real'(py[a][c]);
    end
    return (se > 0) && ($sqrt(sx * sx + sy * sy) / se > real'(COE_MIN_MM));
  endfunction

  always @(posedge clk) if (!rst) begin
    if (lv1_trig) begin
      int k;
      bit found;
      k = cyc;                  // clock in which the ADC modules sample the trigger
      found = 0;
      foreach (events[i]) if (k - events[i].t >= 0 && k - events[i].t <= NM + 12) begin
        found = 1;
        checks++;
        if (events[i].ty == E_LOW || events[i].ty == E_VETO) fail($sformatf("event type %s triggered", events[i].ty.name()));
      end
      checks++; if (!found) fail("trigger without an event");
      trig_t.push_back(k);
      exp_acc.push_back(coe_accept(k + 1 - PD));
      events_done.push_back(0);
    end
    if (adc_busy) busy_stall++;
    if (dut.g_lv2[0].wr_valid && !dut.g_lv2[0].wr_ready) bank_stall++;
  end

  // ---------------- Lv3 side: parse each module's byte stream ----------------
  int dests[int];
  int multi_pkt = 0;
  for (genvar m = 0; m < NM; m++) begin : g_lv3
    int hb = 0, plen = 0, pb = 0, evno = 0, seq = 0, dest = 0, exp_seq = 0, nbytes = 0;
    byte hdr[8];
    logic [MEM_W-1:0] word;
    int wi = 0;
    always @(posedge clk) if (!rst && tx_valid[m] && tx_ready[m]) begin
      if (hb < 8) begin
        if (hb == 0 && !tx_sop[m]) fail("missing sop");
        hdr[hb] = byte'(tx_data[m]);
        hb++;
        if (hb == 8) begin
          dest = hdr[0]; evno = {hdr[2], hdr[3]}; seq = {hdr[4], hdr[5]}; plen = int'({hdr[6], hdr[7]}) & 32'hffff;
          checks++;
          if (dest != evno % 8 || int'(hdr[1]) != m || seq != exp_seq || int'(tx_dest[m]) != dest) fail($sformatf("module %0d header dest %0d evno %0d seq %0d", m, dest, evno, seq));
          if (seq > 0) multi_pkt++;
          dests[dest] = 1;
          pb = 0;
        end
      end else begin
        word[MEM_W - 1 - 8 * (nbytes % 32) -: 8] = tx_data[m];   // placeholder order, fixed below
        nbytes++; pb++;
        if (nbytes % 32 == 0) begin
          // reorder: byte b of the stream is link b/2, high byte first
          logic [MEM_W-1:0] w;
          for (int b = 0; b < 32; b++) w[16 * (b / 2) + ((b % 2) ? 0 : 8) +: 8] = word[MEM_W - 1 - 8 * b -: 8];
          check_word(m, evno, wi, w);
          wi++;
        end
        if (pb == plen) begin
          hb = 0;
          checks++; if (!tx_eop[m]) fail("missing eop");
          exp_seq = seq + 1;
          if (wi == PKT) begin
            wi = 0; exp_seq = 0;
            if (evno < events_done.size()) events_done[evno]++;
          end
        end
      end
    end
  end

  function automatic void check_word(int m, int evno, int wi, logic [MEM_W-1:0] w);
    logic [MEM_W-1:0] e;
    int nl;
    e = '0;
    nl = (NA - m * 16 >= 16) ? 16 : NA - m * 16;
    checks++;
    if (evno >= trig_t.size()) begin fail("unknown event received"); return; end
    for (int l = 0; l < nl; l++) begin
      if (wi == 0) e[16*l +: 16] = 16'(evno);
      else e[16*l +: 16] = 16'(value(trig_t[evno] + 1 - PD + (wi - 1) / 16, m * 16 + l, (wi - 1) % 16));
    end
    if (w != e) fail($sformatf("module %0d event %0d word %0d differs", m, evno, wi));
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    int t;
    for (int a = 0; a < NA; a++) begin
      is_csi[a] = (a < NA - 2);
      vidx[a]   = (a == NA - 1) ? 3'd1 : 3'd0;
      for (int c = 0; c < 16; c++) begin
        int g;
        g = a * 16 + c;
        ped[a][c] = sample_t'(pedv(a, c));
        px[a][c]  = pos_t'((g % 16) * 60 - 450);
        py[a][c]  = pos_t'(((g / 16) % 20) * 60 - 570);
      end
    end
    samples = '0; tx_ready = '1;
    t = DEPTH + 200;
    // one of each event type
    add_event(t, E_FAR);            t += PKT + 200;
    add_event(t, E_CENTER);         t += PKT + 200;
    if (!FULL) begin
      add_event(t, E_LOW);          t += PKT + 200;
      add_event(t, E_VETO);         t += PKT + 200;
      add_event(t, E_MASKED);       t += PKT + 200;
      // burst: the third event finds both ADC record slots taken
      add_event(t, E_FAR); add_event(t + W + 30, E_FAR); add_event(t + 2 * (W + 30), E_FAR);
      t += 3 * PKT + 300;
    end
    repeat (5) @(posedge clk); rst <= 0;
    if (!FULL) begin
      // stop the Ethernet side and keep sending events until the Lv2 buffers
      // fill and Lv1 is suspended
      wait (cyc >= t - 50);
      tx_ready = '0;
      for (int i = 0; i < 24; i++) begin add_event(t, E_FAR); t += PKT + 60; end
      wait (cyc >= t);
      checks++; if (n_lv1_susp == 0) fail("Lv1 never suspended by a full Lv2 buffer");
      tx_ready = '1;
      add_event(t + 5 * PKT, E_FAR);
      t += 5 * PKT + 200;
    end
    wait (cyc >= t);
    // drain everything to the Lv3 side
    while (1) begin
      bit all;
      all = (trig_t.size() > 0);
      foreach (events_done[i]) if (exp_acc[i] && events_done[i] != NM) all = 0;
      if (all) break;
      @(posedge clk);
    end
    repeat (50) @(posedge clk);
    // ---------------- final checks ----------------
    foreach (events_done[i]) begin
      checks++;
      if (events_done[i] != (exp_acc[i] ? NM : 0)) fail($sformatf("event %0d delivered by %0d modules, expected %0d", i, events_done[i], exp_acc[i] ? NM : 0));
    end
    checks++; if (n_lv1_acc != 32'(trig_t.size())) fail("n_lv1_acc");
    checks++; if (n_lv2_in != n_lv1_acc) fail("every Lv1 event must reach an Lv2 decision");
    checks++; if (lv2_err != '0) fail("Lv2 module event-number error");
    checks++; if (adc_lost != '0) fail("ADC record lost");
    begin
      int nacc = 0; foreach (exp_acc[i]) nacc += exp_acc[i];
      checks++; if (n_lv2_acc != 32'(nacc)) fail($sformatf("n_lv2_acc %0d expected %0d", n_lv2_acc, nacc));
    end
    $display("mechanisms: lv1_acc=%0d lv1_req=%0d lv1_susp_lv2full=%0d adc_busy_suspended=%0d lv2_in=%0d lv2_acc=%0d swaps=%0d bank_stall=%0d dests=%0d multi_packet=%0d",
             n_lv1_acc, n_lv1_req, n_lv1_susp, n_lv1_req - n_lv1_acc - n_lv1_susp, n_lv2_in, n_lv2_acc, n_swaps[0], bank_stall, dests.num(), multi_pkt);
    // events that must not have fired Lv1
    foreach (events[i]) if (events[i].ty == E_VETO || events[i].ty == E_LOW) begin
      bit fired;
      fired = 0;
      foreach (trig_t[j]) if (trig_t[j] - events[i].t >= 0 && trig_t[j] - events[i].t <= NM + 12) fired = 1;
      if (!fired && events[i].ty == E_VETO) n_veto_ev++;
      if (!fired && events[i].ty == E_LOW)  n_low_ev++;
    end
    $display("mechanisms: vetoed=%0d below_threshold=%0d", n_veto_ev, n_low_ev);
    // every mechanism must have happened at least once
    checks++; if (n_lv1_acc == 0) fail("no Lv1 trigger");
    checks++; if (n_lv2_acc == 0) fail("no Lv2 accept");
    checks++; if (n_lv2_in == n_lv2_acc) fail("no Lv2 reject");
    checks++; if (n_swaps[0] == 0) fail("no memory bank swap");
    checks++; if (multi_pkt == 0) fail("no event split into several packets");
    if (!FULL) begin
      checks++; if (dests.num() < 2) fail("destination never changed");
      checks++; if (n_veto_ev == 0) fail("enabled veto never blocked a trigger");
      checks++; if (n_low_ev == 0) fail("energy threshold never blocked a trigger");
      checks++; if (n_lv1_req - n_lv1_acc - n_lv1_susp == 0) fail("no trigger suspended by a busy ADC module");
      checks++; if (n_lv1_req <= n_lv1_acc) fail("no dead-time loss");
      checks++; if (bank_stall == 0) fail("write bank never full");
      checks++; if (n_lv1_susp == 0) fail("no Lv1 suspension by Lv2 buffer full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
