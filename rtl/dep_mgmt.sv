// dep_mgmt: dependency management between the DMA and execute units.
//
// A reservation station of ENTRIES decoded commands. Each entry records the
// unit that will run it and the local-memory rows it reads and writes, as
// half-open ranges [lo, hi) in one address space (scratchpad rows, then
// accumulator rows above bit 31). A command is issued to its unit when
//   - every older command of the same unit has been issued (in order per
//     unit), and
//   - no older, still unfinished command of the other unit touches an
//     overlapping range where at least one of the two writes
//     (read-after-write, write-after-read and write-after-write hazards).
// The DMA may therefore load the next operands while the execute unit is
// still working on rows it does not touch. An entry is freed when its unit
// reports done with the entry's id. Age is kept in an age matrix.
// Allocation: alloc_valid/alloc_ready. Issue: issue_valid/issue_ready per
// unit, with the command and entry id. n_dep_stalls counts cycles in which a
// unit's next command was held back only by a hazard.
// The paper names the dependency-management block; this reservation-station
// scheme and its hazard rule are this design's.
module dep_mgmt
  import gemmini_pkg::*;
#(
  parameter int ENTRIES = 8,
  localparam int IW     = $clog2(ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            alloc_valid,
  output logic            alloc_ready,
  input  rocc_cmd_t       alloc_cmd,
  input  unit_t           alloc_unit,
  input  logic [32:0]     alloc_rd_lo,
  input  logic [32:0]     alloc_rd_hi,
  input  logic [32:0]     alloc_wr_lo,
  input  logic [32:0]     alloc_wr_hi,
  output logic            issue_valid [2],
  input  logic            issue_ready [2],
  output rocc_cmd_t       issue_cmd   [2],
  output logic [IW-1:0]   issue_id    [2],
  input  logic            done_valid  [2],
  input  logic [IW-1:0]   done_id     [2],
  output logic            busy,
  output logic [31:0]     n_dep_stalls
);
  typedef struct packed {
    logic        valid;
    logic        issued;
    unit_t       unit;
    logic [32:0] rd_lo, rd_hi, wr_lo, wr_hi;
    rocc_cmd_t   cmd;
  } entry_t;

  entry_t e [ENTRIES];
  logic   older [ENTRIES][ENTRIES];   // older[i][j]: entry j is older than entry i

  function automatic logic overlap(logic [32:0] alo, logic [32:0] ahi,
                                   logic [32:0] blo, logic [32:0] bhi);
    return (alo < ahi) && (blo < bhi) && (alo < bhi) && (blo < ahi);
  endfunction

  logic          free_found;
  logic [IW-1:0] free_idx;
  logic          cand   [2];
  logic [IW-1:0] cand_i [2];
  logic          blocked[2];

  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!e[i].valid) begin
        free_found = 1'b1;
        free_idx   = IW'(i);
      end

    for (int u = 0; u < 2; u++) begin
      cand[u]    = 1'b0;
      cand_i[u]  = '0;
      blocked[u] = 1'b0;
      // the oldest unissued entry of unit u
      for (int i = 0; i < ENTRIES; i++) begin
        logic first;
        first = e[i].valid && !e[i].issued && e[i].unit == unit_t'(u);
        for (int j = 0; j < ENTRIES; j++)
          if (older[i][j] && e[j].valid && !e[j].issued && e[j].unit == unit_t'(u))
            first = 1'b0;
        if (first) begin
          cand[u]   = 1'b1;
          cand_i[u] = IW'(i);
        end
      end
      // hazards against older unfinished entries
      if (cand[u]) begin
        for (int j = 0; j < ENTRIES; j++) begin
          if (older[cand_i[u]][j] && e[j].valid) begin
            if (overlap(e[cand_i[u]].wr_lo, e[cand_i[u]].wr_hi, e[j].rd_lo, e[j].rd_hi) ||
                overlap(e[cand_i[u]].rd_lo, e[cand_i[u]].rd_hi, e[j].wr_lo, e[j].wr_hi) ||
                overlap(e[cand_i[u]].wr_lo, e[cand_i[u]].wr_hi, e[j].wr_lo, e[j].wr_hi))
              blocked[u] = 1'b1;
          end
        end
      end
      issue_valid[u] = cand[u] && !blocked[u];
      issue_cmd[u]   = e[cand_i[u]].cmd;
      issue_id[u]    = cand_i[u];
    end
  end

  assign alloc_ready = free_found;

  always_comb begin
    busy = 1'b0;
    for (int i = 0; i < ENTRIES; i++) busy |= e[i].valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_dep_stalls <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        e[i] <= '0;
        for (int j = 0; j < ENTRIES; j++) older[i][j] <= 1'b0;
      end
    end else begin
      for (int u = 0; u < 2; u++) begin
        if (issue_valid[u] && issue_ready[u]) e[cand_i[u]].issued <= 1'b1;
        if (done_valid[u]) e[done_id[u]].valid <= 1'b0;
      end
      if (cand[0] && blocked[0] || cand[1] && blocked[1]) n_dep_stalls <= n_dep_stalls + 1;
      if (alloc_valid && free_found) begin
        e[free_idx] <= '{valid: 1'b1, issued: 1'b0, unit: alloc_unit,
                         rd_lo: alloc_rd_lo, rd_hi: alloc_rd_hi,
                         wr_lo: alloc_wr_lo, wr_hi: alloc_wr_hi, cmd: alloc_cmd};
        for (int j = 0; j < ENTRIES; j++) begin
          older[free_idx][j] <= e[j].valid && !(done_valid[0] && done_id[0] == IW'(j))
                                           && !(done_valid[1] && done_id[1] == IW'(j));
          older[j][free_idx] <= 1'b0;
        end
      end
    end
  end

endmodule
