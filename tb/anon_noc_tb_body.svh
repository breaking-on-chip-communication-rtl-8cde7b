// Shared body of the mesh testbenches: clock, traffic generators, scoreboard,
// mechanism counters. Expects N, MX, MY and the DUT port signals to be
// declared by the including module.

  int checks = 0, failures = 0, cyc = 0;
  int n_sent = 0, n_recv = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // flit data: [127:96] random, [31:24] flit index, [23:8] sequence, [7:0] source
  function automatic logic [DATA_W-1:0] word(int src, int seq, int idx, logic [95:0] r);
    return {r, 8'(idx), 16'(seq), 8'(src)};
  endfunction

  // scoreboard: key = src*65536 + seq
  logic [DATA_W-1:0] sb_data [int][$];
  coord_t            sb_dest [int];

  // ---------------- mechanism counters ----------------
  int m_tun_new = 0, m_renew = 0, m_install = 0, m_swap = 0, m_exit = 0;
  int m_chaff_ins = 0, m_chaff_drop = 0, m_dummy_ins = 0, m_dummy_drop = 0;
  int m_delay = 0, m_miss = 0, m_stall = 0;
  int tun_count [N];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (ev_tunnel_new[n]) begin
          m_tun_new++;
          if (tun_count[n] > 0) m_renew++;
          tun_count[n]++;
        end
        if (ev_chaff_flit[n]) m_chaff_ins++;
        if (ev_dummy_pkt[n])  m_dummy_ins++;
        if (rtr_ev[n].tc_install)  m_install++;
        if (rtr_ev[n].vci_swap)    m_swap++;
        if (rtr_ev[n].ep_exit)     m_exit++;
        if (rtr_ev[n].chaff_drop)  m_chaff_drop++;
        if (rtr_ev[n].dummy_drop)  m_dummy_drop++;
        if (rtr_ev[n].delay_start) m_delay++;
        if (rtr_ev[n].vci_miss)    m_miss++;
        if (ip_in_valid[n] && !ip_in_ready[n]) m_stall++;
      end
    end
  end

  // ---------------- receivers ----------------
  int rx_key [N];
  int rx_idx [N];
  for (genvar n = 0; n < N; n++) begin : g_rx
    always @(posedge clk) begin
      ip_out_ready[n] <= ($urandom_range(0, 5) != 0);
      if (rst_n && ip_out_valid[n] && ip_out_ready[n]) begin
        ip_flit_t f;
        int key;
        f = ip_out[n];
        key = int'(f.data[7:0]) * 65536 + int'(f.data[23:8]);
        if (f.head) begin
          rx_key[n] = key;
          rx_idx[n] = 0;
          check(sb_dest.exists(key), $sformatf("node %0d: packet %0h was sent", n, key));
          if (sb_dest.exists(key))
            check(int'(sb_dest[key].y) * MX + int'(sb_dest[key].x) == n,
                  $sformatf("node %0d: packet %0h at its destination", n, key));
        end
        check(key == rx_key[n] && int'(f.data[31:24]) == rx_idx[n],
              $sformatf("node %0d: flits of packet %0h contiguous and ordered", n, key));
        if (sb_data.exists(key) && rx_idx[n] < sb_data[key].size())
          check(f.data == sb_data[key][rx_idx[n]], "flit data unchanged");
        else
          check(1'b0, $sformatf("node %0d: extra flit of packet %0h", n, key));
        rx_idx[n]++;
        if (f.tail) begin
          if (sb_data.exists(key)) begin
            check(rx_idx[n] == sb_data[key].size(), "packet length");
            sb_data.delete(key);
            sb_dest.delete(key);
          end
          n_recv++;
        end
      end
    end
  end

  // ---------------- senders ----------------
  int seq [N];

  task automatic send_pkt(int src, int dst, int len);
    int key;
    coord_t d;
    d.x = COORD_W'(dst % MX); d.y = COORD_W'(dst / MX);
    key = src * 65536 + seq[src];
    sb_dest[key] = d;
    for (int i = 0; i < len; i++) sb_data[key].push_back(word(src, seq[src], i,
                                       {$urandom, $urandom, $urandom}));
    for (int i = 0; i < len; i++) begin
      ip_in[src].head = (i == 0);
      ip_in[src].tail = (i == len - 1);
      ip_in[src].dest = d;
      ip_in[src].data = sb_data[key][i];
      ip_in_valid[src] = 1'b1;
      @(posedge clk);
      while (!ip_in_ready[src]) @(posedge clk);
      #1;
    end
    ip_in_valid[src] = 1'b0;
    seq[src]++;
    n_sent++;
  endtask

  task automatic run_source(int src, int npkt, int max_gap);
    for (int k = 0; k < npkt; k++) begin
      int dst;
      dst = $urandom_range(0, N - 1);
      if (dst == src) dst = (dst + 1) % N;
      send_pkt(src, dst, $urandom_range(1, 5));
      repeat ($urandom_range(0, max_gap)) @(posedge clk);
      #1;
    end
  endtask

  task automatic run_traffic(int npkt, int max_gap);
    for (int s = 0; s < N; s++) begin
      automatic int ss = s;
      fork
        run_source(ss, npkt, max_gap);
      join_none
    end
    wait fork;
  endtask

  initial begin
    for (int n = 0; n < N; n++) begin
      ip_in_valid[n] = 1'b0;
      ip_in[n] = '0;
      ip_out_ready[n] = 1'b1;
      seq[n] = 0;
      tun_count[n] = 0;
      rx_key[n] = -1;
      rx_idx[n] = 0;
    end
  end

  task automatic drain_and_report(int total);
    int t;
    t = 0;
    while (n_recv < total && t < 20000) begin
      @(posedge clk);
      t++;
    end
    check(n_recv == total, $sformatf("all %0d packets delivered (%0d)", total, n_recv));
    check(sb_dest.size() == 0, "scoreboard empty");
    check(m_tun_new >= N, "every tile built a tunnel");
    check(m_renew > 0,        "mechanism: tunnel renewal");
    check(m_install > 0,      "mechanism: TC install");
    check(m_swap > 0,         "mechanism: VCI swap");
    check(m_exit > 0,         "mechanism: tunnel exit at endpoint");
    check(m_chaff_ins > 0,    "mechanism: chaff flit inserted");
    check(m_chaff_drop == m_chaff_ins, "mechanism: every chaff flit winnowed");
    check(m_dummy_ins > 0,    "mechanism: dummy packet sent");
    check(m_dummy_drop > 0,   "mechanism: dummy packet discarded");
    check(m_delay > 0,        "mechanism: endpoint random delay");
    check(m_stall > 0,        "mechanism: IP stalled by back-pressure");
    check(m_miss == 0,        "no DT packet lost its tunnel");
    $display("cycles=%0d sent=%0d received=%0d", cyc, n_sent, n_recv);
    $display("tunnels=%0d renewals=%0d installs=%0d swaps=%0d exits=%0d", m_tun_new, m_renew,
             m_install, m_swap, m_exit);
    $display("chaff ins/drop=%0d/%0d dummy ins/drop=%0d/%0d delays=%0d stalls=%0d misses=%0d",
             m_chaff_ins, m_chaff_drop, m_dummy_ins, m_dummy_drop, m_delay, m_stall, m_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
