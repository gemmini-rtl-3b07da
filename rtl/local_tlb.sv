// local_tlb: the accelerator's private TLB with read and write filter registers.
//
// The DMA engine asks for the physical page of a virtual page (req_*), keeping
// the request up until resp_valid. Three paths answer it:
//  1. Filter registers: one register remembers the last translation used by a
//     read, another the last one used by a write. A request whose page matches
//     the register of its own kind is answered in the same cycle (0-cycle hit).
//  2. The TLB proper: ENTRIES fully associative entries, looked up in
//     HIT_LAT cycles (a hit is answered HIT_LAT cycles after the request).
//  3. On a miss, the page-table walker of the host is asked over the PTW port
//     (ptw_req_* valid/ready, then ptw_resp_valid with the physical page);
//     the answer fills an entry (round-robin replacement) and is returned.
// Every answer from paths 2 and 3 also refills the filter register of the
// request's kind. flush (a one-cycle pulse, taken when idle) empties the TLB
// and both filters. Counters report filter hits, TLB hits and misses.
// The 4-entry private TLB, the two filter registers, their 0-cycle hit and
// the fall-back to the host's walker follow the paper. The lookup latency
// ("several cycles" in the paper), replacement policy and 4 KiB pages are
// this design's choices.
module local_tlb
  import gemmini_pkg::*;
#(
  parameter int ENTRIES = 4,
  parameter int HIT_LAT = 2,
  parameter int VPN_W   = gemmini_pkg::VPN_W,
  parameter int PPN_W   = gemmini_pkg::PPN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  logic [VPN_W-1:0] req_vpn,
  input  logic             req_write,
  output logic             resp_valid,
  output logic [PPN_W-1:0] resp_ppn,
  output logic             ptw_req_valid,
  input  logic             ptw_req_ready,
  output logic [VPN_W-1:0] ptw_req_vpn,
  input  logic             ptw_resp_valid,
  input  logic [PPN_W-1:0] ptw_resp_ppn,
  input  logic             flush,
  output logic [31:0]      n_filter_hits,
  output logic [31:0]      n_tlb_hits,
  output logic [31:0]      n_misses
);
  typedef struct packed {
    logic             valid;
    logic [VPN_W-1:0] vpn;
    logic [PPN_W-1:0] ppn;
  } xlat_t;

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_PTW_REQ, S_PTW_WAIT} state_t;

  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int LW = $clog2(HIT_LAT + 1);

  xlat_t            tlb [ENTRIES];
  xlat_t            filt_rd, filt_wr;
  state_t           state;
  logic [VPN_W-1:0] vpn_q;
  logic             write_q;
  logic [LW-1:0]    lat;
  logic [IW-1:0]    victim;

  logic             filt_hit;
  logic [PPN_W-1:0] filt_ppn;
  logic             tlb_hit;
  logic [PPN_W-1:0] tlb_ppn;

  always_comb begin
    xlat_t f;
    f        = req_write ? filt_wr : filt_rd;
    filt_hit = f.valid && f.vpn == req_vpn;
    filt_ppn = f.ppn;
    tlb_hit  = 1'b0;
    tlb_ppn  = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (tlb[i].valid && tlb[i].vpn == vpn_q) begin
        tlb_hit = 1'b1;
        tlb_ppn = tlb[i].ppn;
      end
  end

  always_comb begin
    resp_valid = 1'b0;
    resp_ppn   = '0;
    unique case (state)
      S_IDLE:     if (req_valid && filt_hit) begin resp_valid = 1'b1; resp_ppn = filt_ppn; end
      S_LOOKUP:   if (lat == '0 && tlb_hit)  begin resp_valid = 1'b1; resp_ppn = tlb_ppn;  end
      S_PTW_WAIT: if (ptw_resp_valid)        begin resp_valid = 1'b1; resp_ppn = ptw_resp_ppn; end
      default: ;
    endcase
  end

  assign ptw_req_valid = (state == S_PTW_REQ);
  assign ptw_req_vpn   = vpn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      vpn_q         <= '0;
      write_q       <= 1'b0;
      lat           <= '0;
      victim        <= '0;
      filt_rd       <= '0;
      filt_wr       <= '0;
      n_filter_hits <= '0;
      n_tlb_hits    <= '0;
      n_misses      <= '0;
      for (int i = 0; i < ENTRIES; i++) tlb[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (flush) begin
            filt_rd <= '0;
            filt_wr <= '0;
            for (int i = 0; i < ENTRIES; i++) tlb[i].valid <= 1'b0;
          end else if (req_valid) begin
            if (filt_hit) begin
              n_filter_hits <= n_filter_hits + 1;
            end else begin
              vpn_q   <= req_vpn;
              write_q <= req_write;
              lat     <= LW'(HIT_LAT - 1);
              state   <= S_LOOKUP;
            end
          end
        end
        S_LOOKUP: begin
          if (lat != '0) begin
            lat <= lat - 1'b1;
          end else if (tlb_hit) begin
            n_tlb_hits <= n_tlb_hits + 1;
            if (write_q) filt_wr <= '{1'b1, vpn_q, tlb_ppn};
            else         filt_rd <= '{1'b1, vpn_q, tlb_ppn};
            state <= S_IDLE;
          end else begin
            n_misses <= n_misses + 1;
            state    <= S_PTW_REQ;
          end
        end
        S_PTW_REQ: if (ptw_req_ready) state <= S_PTW_WAIT;
        S_PTW_WAIT: begin
          if (ptw_resp_valid) begin
            tlb[victim] <= '{1'b1, vpn_q, ptw_resp_ppn};
            victim      <= (int'(victim) == ENTRIES - 1) ? '0 : victim + 1'b1;
            if (write_q) filt_wr <= '{1'b1, vpn_q, ptw_resp_ppn};
            else         filt_rd <= '{1'b1, vpn_q, ptw_resp_ppn};
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
