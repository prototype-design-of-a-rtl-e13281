// Shared body of the network testbenches. The including module declares
// localparams N_SUB and EP_PER_SUB and instantiates tfc_network as `dut`
// after this text; everything else (clocks, link models, Wishbone drivers and
// the test sequence) is here.
//
// Sequence, after the paper's laboratory test:
//  1. all links initialise (counted: link_init);
//  2. asynchronous run: synchronisation is switched off on every node over
//     Wishbone and each Endpoint runs on its own slightly fast or slow clock;
//     the time difference between Endpoints and Master must grow
//     (async_drift);
//  3. synchronous run: the Endpoint clocks take the Master frequency (as the
//     jitter-cleaning PLL locks to the recovered clock; the Endpoint links
//     drop while it relocks and initialise again), synchronisation is
//     switched on with a short frame period; every Endpoint must become synced
//     through its Submaster, after timestamp and phase corrections (ts_corr,
//     ph_corr, frames), and then keep a constant offset to the Master frame
//     after frame, the same for all Endpoints within one cycle (no drift);
//  4. a decode error is injected on one Endpoint link; the link must
//     re-initialise (link_recover) and the Endpoint keep its offset.
//  5. every node's register file answers on its own Wishbone port (read
//     back of the counters and identifiers, and of a per-Submaster link
//     selection).
  import tfc_pkg::*;
  localparam int N_EP = N_SUB * EP_PER_SUB;
  localparam real HP  = 4166.6;   // half period of 120 MHz in time units (ps)

  logic rst = 1;
  logic clk_m = 0;
  logic [N_SUB-1:0] clk_s;
  logic [N_EP-1:0]  clk_e;
  real hp_e [N_EP];

  always #(HP) clk_m = ~clk_m;
  for (genvar s = 0; s < N_SUB; s++) begin : g_cs
    initial begin clk_s[s] = 0; #(300 + 370 * s); forever #(HP) clk_s[s] = ~clk_s[s]; end
  end
  for (genvar i = 0; i < N_EP; i++) begin : g_ce
    initial begin
      clk_e[i] = 0;
      hp_e[i] = HP;
      #(500 + 610 * (i % 7));
      forever #(hp_e[i]) clk_e[i] = ~clk_e[i];
    end
  end

  wb_req_t m_wb_req; wb_rsp_t m_wb_rsp;
  wb_req_t s_wb_req [N_SUB]; wb_rsp_t s_wb_rsp [N_SUB];
  wb_req_t e_wb_req [N_EP];  wb_rsp_t e_wb_rsp [N_EP];
  link_word_t m_gth_tx_word [N_SUB], s_up_gth_tx_word [N_SUB];
  link_word_t s_dn_gth_tx_word [N_EP], e_gth_tx_word [N_EP];
  gth_rx_t m_gth_rx [N_SUB], s_up_gth_rx [N_SUB], s_dn_gth_rx [N_EP], e_gth_rx [N_EP];
  logic [63:0] m_ts, s_ts [N_SUB], e_ts [N_EP];
  logic [1:0]  m_sub, s_sub [N_SUB], e_sub [N_EP];
  logic [N_SUB-1:0] s_synced;
  logic [N_EP-1:0]  e_synced, e_sys_tick;
  logic [N_SUB-1:0] m_links_up;
  logic [N_EP-1:0]  s_dn_links_up, e_link_up;
  logic [N_EP-1:0]  s_dn_rx_clk, e_rx_clk, inj, ep_fibre;

  int checks = 0, failures = 0;
  int n_link_init = 0, n_async_drift = 0, n_ts_corr = 0, n_ph_corr = 0, n_frames = 0,
      n_link_recover = 0;

  // links: Master <-> Submasters
  for (genvar s = 0; s < N_SUB; s++) begin : g_lm
    gth_link_model l_down (.clk(clk_m), .up(1'b1), .inject_err(1'b0),
      .tx_word(m_gth_tx_word[s]), .rx(s_up_gth_rx[s]));
    gth_link_model l_up (.clk(clk_s[s]), .up(1'b1), .inject_err(1'b0),
      .tx_word(s_up_gth_tx_word[s]), .rx(m_gth_rx[s]));
  end
  // links: Submasters <-> Endpoints
  for (genvar i = 0; i < N_EP; i++) begin : g_le
    assign s_dn_rx_clk[i] = clk_e[i];
    assign e_rx_clk[i]    = clk_s[i / EP_PER_SUB];
    gth_link_model l_down (.clk(clk_s[i / EP_PER_SUB]), .up(ep_fibre[i]), .inject_err(inj[i]),
      .tx_word(s_dn_gth_tx_word[i]), .rx(e_gth_rx[i]));
    gth_link_model l_up (.clk(clk_e[i]), .up(1'b1), .inject_err(1'b0),
      .tx_word(e_gth_tx_word[i]), .rx(s_dn_gth_rx[i]));
  end
  initial inj = '0;
  initial ep_fibre = '1;

  // Wishbone drivers and per-node command handling
  int phase = 0;     // 1: async, 2: sync, 3: read counters
  int acks  = 0;
  wb_bfm m_bfm (.clk(clk_m), .req(m_wb_req), .rsp(m_wb_rsp));
  initial begin
    wait (phase == 1); m_bfm.write(REG_CTRL, 0); acks++;
    wait (phase == 2); m_bfm.write(REG_PERIOD, 32'd40); m_bfm.write(REG_CTRL, 1); acks++;
  end
  for (genvar s = 0; s < N_SUB; s++) begin : g_sb
    wb_bfm bfm (.clk(clk_s[s]), .req(s_wb_req[s]), .rsp(s_wb_rsp[s]));
    initial begin
      logic [31:0] d;
      wait (phase == 1); bfm.write(REG_CTRL, 0); acks++;
      wait (phase == 2); bfm.write(REG_PERIOD, 32'd40); bfm.write(REG_CTRL, 1); acks++;
      // each Submaster must answer on its own port: select a link that
      // differs per node and read the selection back
      wait (phase == 3);
      bfm.write(REG_LINK_SEL, 32'(1 + s % EP_PER_SUB));
      bfm.read(REG_LINK_SEL, d);
      checks++; if (d != 32'(1 + s % EP_PER_SUB)) begin failures++; $display("FAIL sm %0d link_sel %0d", s, d); end
      bfm.read(REG_ID, d);
      checks++; if (d != ID_SUBMASTER || bfm.timeouts != 0) begin failures++; $display("FAIL sm %0d wishbone", s); end
      bfm.write(REG_LINK_SEL, 32'd0);
      acks++;
    end
  end
  for (genvar i = 0; i < N_EP; i++) begin : g_eb
    wb_bfm bfm (.clk(clk_e[i]), .req(e_wb_req[i]), .rsp(e_wb_rsp[i]));
    initial begin
      logic [31:0] d;
      wait (phase == 1); bfm.write(REG_CTRL, 0); acks++;
      wait (phase == 2); bfm.write(REG_CTRL, 1); acks++;
      wait (phase == 3);
      bfm.read(REG_TS_CORR, d); n_ts_corr += int'(d);
      bfm.read(REG_PH_CORR, d); n_ph_corr += int'(d);
      bfm.read(REG_FRAMES, d);  n_frames  += int'(d);
      bfm.read(REG_ID, d);
      checks++; if (d != ID_ENDPOINT || bfm.timeouts != 0) begin failures++; $display("FAIL ep %0d wishbone", i); end
      acks++;
    end
  end

  // time of node in 120 MHz cycles, offset against the Master
  function automatic longint off_e(int i);
    return longint'(e_ts[i]) * 3 + e_sub[i] - (longint'(m_ts) * 3 + m_sub);
  endfunction

  longint off0 [N_EP];

  initial begin
    repeat (200000) @(posedge clk_m);   // watchdog
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    logic all_up;
    longint spread_lo, spread_hi, d;
    #100000 rst = 0;
    // 1. link initialisation
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk_m);
      all_up = (m_links_up == '1) && (e_link_up == '1) && (s_dn_links_up == '1);
      if (all_up) break;
    end
    checks++;
    if (!all_up) begin failures++; $display("FAIL links not up"); end
    else n_link_init++;
    // 2. asynchronous run
    phase = 1;
    wait (acks == 1 + N_SUB + N_EP);
    for (int i = 0; i < N_EP; i++) hp_e[i] = HP * (1.0 + ((i % 2) ? 1.0e-3 : -1.0e-3) * (1 + i % 3));
    @(posedge clk_m); #100;
    for (int i = 0; i < N_EP; i++) off0[i] = off_e(i);
    repeat (15000) @(posedge clk_m);
    #100;
    for (int i = 0; i < N_EP; i++) begin
      d = off_e(i) - off0[i];
      if (i < 8) $display("  endpoint %0d drifted %0d cycles", i, d);
      if (d > 3 || d < -3) n_async_drift++;
    end
    $display("async run: %0d of %0d endpoints drifted, e.g. %0d cycles", n_async_drift, N_EP, off_e(0) - off0[0]);
    checks++;
    if (n_async_drift != N_EP) begin failures++; $display("FAIL drift only at %0d endpoints", n_async_drift); end
    // 3. synchronous run
    // the Endpoint PLLs relock to the recovered clock: links drop meanwhile
    ep_fibre = '0;
    for (int i = 0; i < N_EP; i++) hp_e[i] = HP;
    repeat (200) @(posedge clk_m);
    ep_fibre = '1;
    repeat (300) @(posedge clk_m);
    phase = 2;
    wait (acks == 2 * (1 + N_SUB + N_EP));
    repeat (3000) @(posedge clk_m);
    checks++;
    if (e_synced != '1 || s_synced != '1) begin failures++; $display("FAIL not synced %b %b", e_synced, s_synced); end
    #100;
    for (int i = 0; i < N_EP; i++) off0[i] = off_e(i);
    spread_lo = off0[0]; spread_hi = off0[0];
    for (int i = 0; i < N_EP; i++) begin
      if (off0[i] < spread_lo) spread_lo = off0[i];
      if (off0[i] > spread_hi) spread_hi = off0[i];
    end
    $display("sync run: endpoint offsets to master between %0d and %0d cycles", spread_lo, spread_hi);
    checks++;
    if (spread_hi - spread_lo > 1) begin failures++; $display("FAIL offsets differ"); end
    for (int k = 0; k < 10; k++) begin
      repeat (500) @(posedge clk_m);
      #100;
      for (int i = 0; i < N_EP; i++) begin
        checks++;
        if (off_e(i) != off0[i]) begin failures++; $display("FAIL ep %0d offset %0d was %0d", i, off_e(i), off0[i]); end
      end
    end
    // 4. link error and recovery on endpoint 0's downstream link
    @(posedge clk_s[0]); #100 inj[0] = 1; @(posedge clk_s[0]); #100 inj[0] = 0;
    repeat (20) @(posedge clk_m);
    checks++;
    if (e_link_up[0]) begin failures++; $display("FAIL error did not take link down"); end
    repeat (2000) @(posedge clk_m);
    checks++;
    if (!e_link_up[0]) begin failures++; $display("FAIL link did not recover"); end
    else n_link_recover++;
    #100;
    checks++;
    if (off_e(0) != off0[0]) begin failures++; $display("FAIL offset after recovery %0d", off_e(0)); end
    // counters
    phase = 3;
    wait (acks == 2 * (1 + N_SUB + N_EP) + N_EP + N_SUB);
    $display("mechanisms: link_init=%0d async_drift=%0d frames=%0d ts_corr=%0d ph_corr=%0d link_recover=%0d",
             n_link_init, n_async_drift, n_frames, n_ts_corr, n_ph_corr, n_link_recover);
    checks++; if (n_link_init == 0)    begin failures++; $display("FAIL no link_init"); end
    checks++; if (n_async_drift == 0)  begin failures++; $display("FAIL no async_drift"); end
    checks++; if (n_frames < N_EP)     begin failures++; $display("FAIL no frames"); end
    checks++; if (n_ts_corr == 0)      begin failures++; $display("FAIL no ts_corr"); end
    checks++; if (n_ph_corr == 0)      begin failures++; $display("FAIL no ph_corr"); end
    checks++; if (n_link_recover == 0) begin failures++; $display("FAIL no link_recover"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
