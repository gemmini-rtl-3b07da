// tb_dep_mgmt: 400 random commands, each for the DMA or the execute unit,
// with random read and write row ranges (scratchpad and accumulator rows,
// sometimes empty), pushed through an 8-entry reservation station. Two unit
// models accept one command at a time and report done after 1..8 cycles.
// Checked at every issue: commands of one unit come out in program order, and
// no older unfinished command of the other unit has a conflicting range
// (read-after-write, write-after-read, write-after-write). Checked every
// cycle: a unit that is free and whose next command is allocated and free of
// hazards is offered that command (no needless stall). Every command must
// finish, and hazard stalls must have happened.
module tb_dep_mgmt;
  import gemmini_pkg::*;
  localparam int ENTRIES = 8, IW = 3, N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic alloc_valid, alloc_ready, busy;
  rocc_cmd_t alloc_cmd;
  unit_t alloc_unit;
  logic [32:0] alloc_rd_lo, alloc_rd_hi, alloc_wr_lo, alloc_wr_hi;
  logic issue_valid [2], issue_ready [2], done_valid [2];
  rocc_cmd_t issue_cmd [2];
  logic [IW-1:0] issue_id [2], done_id [2];
  logic [31:0] n_dep_stalls;
  dep_mgmt #(.ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int          unit [N];
  logic [32:0] rlo [N], rhi [N], wlo [N], whi [N];
  bit          done [N], issued [N];
  int          ap = 0, nextseq [2], ubusy [2], useq [2], rem [2];
  logic [IW-1:0] uid [2];
  int          n_done = 0;

  function automatic bit ov(logic [32:0] alo, logic [32:0] ahi, logic [32:0] blo, logic [32:0] bhi);
    return alo < ahi && blo < bhi && alo < bhi && blo < ahi;
  endfunction
  function automatic bit hazard(int i, int j);
    return ov(wlo[i], whi[i], rlo[j], rhi[j]) || ov(rlo[i], rhi[i], wlo[j], whi[j]) ||
           ov(wlo[i], whi[i], wlo[j], whi[j]);
  endfunction
  function automatic bit blocked(int j);
    for (int i = 0; i < j; i++)
      if (unit[i] != unit[j] && !done[i] && hazard(i, j)) return 1;
    return 0;
  endfunction
  function automatic int next_of(int u, int from);
    for (int s = from; s < N; s++) if (unit[s] == u) return s;
    return N;
  endfunction
  task automatic rnd_range(output logic [32:0] lo, output logic [32:0] hi);
    int base, len;
    base = $urandom_range(0, 60);
    len  = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 16);
    lo = 33'(base); hi = 33'(base + len);
    if ($urandom_range(0, 2) == 0) begin lo[32] = 1; hi[32] = 1; end
  endtask

  initial begin
    for (int s = 0; s < N; s++) begin
      unit[s] = $urandom_range(0, 1);
      rnd_range(rlo[s], rhi[s]);
      rnd_range(wlo[s], whi[s]);
      done[s] = 0; issued[s] = 0;
    end
    for (int u = 0; u < 2; u++) begin
      nextseq[u] = next_of(u, 0); ubusy[u] = 0; useq[u] = 0; rem[u] = 0; uid[u] = '0;
      issue_ready[u] = 0; done_valid[u] = 0; done_id[u] = '0;
    end
    alloc_valid = 0; alloc_cmd = '0; alloc_unit = U_DMA;
    alloc_rd_lo = '0; alloc_rd_hi = '0; alloc_wr_lo = '0; alloc_wr_hi = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    alloc_valid = (ap < N) && ($urandom_range(0, 3) != 0);
    if (ap < N) begin
      alloc_cmd   = '{funct: F_MVIN, rs1: 64'(ap), rs2: 64'd0};
      alloc_unit  = unit_t'(unit[ap]);
      alloc_rd_lo = rlo[ap]; alloc_rd_hi = rhi[ap];
      alloc_wr_lo = wlo[ap]; alloc_wr_hi = whi[ap];
    end
    for (int u = 0; u < 2; u++) begin
      issue_ready[u] = !ubusy[u];
      done_valid[u]  = ubusy[u] && rem[u] == 0;
      done_id[u]     = uid[u];
    end
    #1;
    for (int u = 0; u < 2; u++)
      if (!ubusy[u] && nextseq[u] < ap && !blocked(nextseq[u]))
        check(issue_valid[u], $sformatf("unit %0d not offered hazard-free command %0d", u, nextseq[u]));
  end

  always @(posedge clk) if (rst_n) begin
    if (alloc_valid && alloc_ready) ap++;
    for (int u = 0; u < 2; u++) begin
      if (issue_valid[u] && issue_ready[u]) begin
        int s;
        s = int'(issue_cmd[u].rs1);
        check(s == nextseq[u], $sformatf("unit %0d issued %0d, expected %0d", u, s, nextseq[u]));
        check(!blocked(s), $sformatf("command %0d issued over a hazard", s));
        issued[s] = 1;
        nextseq[u] = next_of(u, s + 1);
        ubusy[u] = 1; useq[u] = s; uid[u] = issue_id[u]; rem[u] = $urandom_range(0, 7);
      end else if (done_valid[u]) begin
        done[useq[u]] = 1; ubusy[u] = 0; n_done++;
      end else if (ubusy[u] && rem[u] > 0) rem[u]--;
    end
    if (n_done == N) begin
      repeat (2) @(posedge clk);
      check(!busy, "station empty at the end");
      check(n_dep_stalls > 0, "hazard stalls happened");
      $display("dep stalls %0d", n_dep_stalls);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
