// tb_local_tlb: a 4-entry TLB with a 2-cycle lookup, driven with random
// reads and writes over 8 virtual pages so that filter hits, TLB hits,
// misses and evictions all happen. A model of the filters, the entries and
// the round-robin victim pointer predicts which path must answer each
// request; the test checks the physical page and the latency of each path:
// 0 cycles for a filter hit, HIT_LAT cycles for a TLB hit, and more than
// HIT_LAT cycles (through the walker) for a miss. A flush in the middle must
// make the next requests miss. The walker answers ppn = vpn*5+1 after a few
// cycles with a random ready.
module tb_local_tlb;
  localparam int ENTRIES = 4, HIT_LAT = 2, VPN_W = 27, PPN_W = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_write, resp_valid, ptw_req_valid, ptw_req_ready, ptw_resp_valid, flush;
  logic [VPN_W-1:0] req_vpn, ptw_req_vpn;
  logic [PPN_W-1:0] resp_ppn, ptw_resp_ppn;
  logic [31:0] n_filter_hits, n_tlb_hits, n_misses;
  local_tlb #(.ENTRIES(ENTRIES), .HIT_LAT(HIT_LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PPN_W-1:0] ppn_of(logic [VPN_W-1:0] v);
    return PPN_W'(v * 5 + 1);
  endfunction

  // page-table walker model
  logic pend;
  int   cnt, n_ptw = 0;
  logic [VPN_W-1:0] pv;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 0; cnt <= 0; pv <= '0; ptw_resp_valid <= 0; ptw_resp_ppn <= '0; ptw_req_ready <= 0;
    end else begin
      ptw_resp_valid <= 0;
      ptw_req_ready  <= 1'($urandom_range(0, 1));
      if (pend) begin
        if (cnt == 0) begin ptw_resp_valid <= 1; ptw_resp_ppn <= ppn_of(pv); pend <= 0; end
        else cnt <= cnt - 1;
      end
      if (ptw_req_valid && ptw_req_ready) begin
        pend <= 1; cnt <= 2; pv <= ptw_req_vpn; n_ptw++;
      end
    end
  end

  // model
  logic            m_fv [2];
  logic [VPN_W-1:0] m_fvpn [2];
  logic            m_tv [ENTRIES];
  logic [VPN_W-1:0] m_tvpn [ENTRIES];
  int              m_victim;
  int              lat, kind, vpn, exp_path, n_f = 0, n_t = 0, n_m = 0;
  bit              in_tlb;

  task automatic xlate(int v, bit w);
    @(negedge clk);
    req_valid = 1; req_vpn = VPN_W'(v); req_write = w;
    kind = w;
    in_tlb = 0;
    for (int i = 0; i < ENTRIES; i++) if (m_tv[i] && m_tvpn[i] == VPN_W'(v)) in_tlb = 1;
    exp_path = (m_fv[kind] && m_fvpn[kind] == VPN_W'(v)) ? 0 : in_tlb ? 1 : 2;
    lat = 0;
    #1;
    while (!resp_valid) begin
      @(negedge clk); #1;
      lat++;
      if (lat > 100) break;
    end
    check(resp_valid && resp_ppn == ppn_of(VPN_W'(v)), $sformatf("ppn for vpn %0d", v));
    case (exp_path)
      0: begin check(lat == 0, $sformatf("filter hit latency %0d", lat)); n_f++; end
      1: begin check(lat == HIT_LAT, $sformatf("tlb hit latency %0d", lat)); n_t++; end
      default: begin
        check(lat > HIT_LAT + 1, $sformatf("miss latency %0d", lat)); n_m++;
        m_tv[m_victim] = 1; m_tvpn[m_victim] = VPN_W'(v);
        m_victim = (m_victim + 1) % ENTRIES;
      end
    endcase
    m_fv[kind] = 1; m_fvpn[kind] = VPN_W'(v);
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    req_valid = 0; req_vpn = '0; req_write = 0; flush = 0;
    m_fv[0] = 0; m_fv[1] = 0; m_fvpn[0] = '0; m_fvpn[1] = '0; m_victim = 0;
    for (int i = 0; i < ENTRIES; i++) begin m_tv[i] = 0; m_tvpn[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fixed opening: miss, filter hit, TLB hit through the other filter
    xlate(3, 0);
    xlate(3, 0);
    xlate(3, 1);
    for (int t = 0; t < 400; t++) begin
      if (t == 200) begin
        @(negedge clk); flush = 1;
        @(negedge clk); flush = 0;
        m_fv[0] = 0; m_fv[1] = 0;
        for (int i = 0; i < ENTRIES; i++) m_tv[i] = 0;
        xlate(5, 0);
        check(exp_path == 2, "first request after flush misses");
      end
      vpn = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 7) : $urandom_range(0, 4);
      xlate(vpn, 1'($urandom_range(0, 1)));
    end
    check(n_filter_hits == n_f, $sformatf("filter hit counter %0d vs %0d", n_filter_hits, n_f));
    check(n_tlb_hits == n_t, $sformatf("tlb hit counter %0d vs %0d", n_tlb_hits, n_t));
    check(n_misses == n_m && n_ptw == n_m, $sformatf("miss counter %0d ptw %0d vs %0d", n_misses, n_ptw, n_m));
    check(n_f > 0 && n_t > 0 && n_m > ENTRIES, "all three paths used");
    $display("paths: filter %0d tlb %0d miss %0d", n_f, n_t, n_m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
