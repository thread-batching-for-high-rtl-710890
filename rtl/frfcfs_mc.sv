// frfcfs_mc: memory controller of one DRAM channel: open-page FR-FCFS with CPU priority.
//
// Requests wait in a DEPTH-entry collapsing queue kept in arrival order (entry 0
// is the oldest). Each cycle the controller picks one waiting request whose bank
// is idle, by class:
//   1. CPU request that hits the open row   (only when CPU_FIRST)
//   2. oldest CPU request                   (only when CPU_FIRST)
//   3. request that hits the open row       (first-ready)
//   4. oldest request                       (first-come first-served)
// Rows stay open after an access (open-page policy). The chosen bank is busy for
//   T_CL+T_BURST              on a row hit,
//   T_RCD+T_CL+T_BURST        on a bank with no open row,
//   T_RP+T_RCD+T_CL+T_BURST   on a row conflict,
// and then offers its completion. The banks share one data bus, so at most one
// completion leaves per cycle (lowest bank first) and only when resp_ready; a bank
// whose completion waits stays busy, which is how reply-network back-pressure
// reaches the DRAM. Each selected access is also shown on dram_cmd for the
// DRAM devices, with its row-buffer outcome, and counted.
//
// NBANK may be below 2**BANK_W (8 for a DDR3 channel): then only the low bank
// bits of a request are used.
//
// Interface: req_valid/req_ready handshake (ready when the queue has room);
// resp_valid/resp_ready handshake. FR-FCFS, open page, 64 entries and CPU-first
// come from the paper; the timing values and the per-bank latency model are
// this design's own.
module frfcfs_mc
  import temp_pkg::*;
#(
  parameter int DEPTH     = MCQ_DEPTH,
  parameter int NBANK     = NUM_BANKS,
  parameter bit CPU_FIRST = 1'b1,
  parameter int T_RP      = 12,
  parameter int T_RCD     = 12,
  parameter int T_CL      = 12,
  parameter int T_BURST   = 2,
  parameter int STAT_W    = 32,
  localparam int QW       = $clog2(DEPTH + 1),
  localparam int IW       = $clog2(DEPTH),
  localparam int BKW      = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int LAT_W    = $clog2(T_RP + T_RCD + T_CL + T_BURST + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  dram_req_t         req,
  output logic              resp_valid,
  input  logic              resp_ready,
  output logic [TAG_W-1:0]  resp_tag,
  output logic              resp_is_cpu,
  output logic              resp_is_write,
  output logic              cmd_valid,
  output dram_cmd_t         dram_cmd,
  output logic [QW-1:0]     occupancy,
  output logic [STAT_W-1:0] n_hit,
  output logic [STAT_W-1:0] n_closed,
  output logic [STAT_W-1:0] n_conflict
);

  dram_req_t         q     [DEPTH];
  logic [QW-1:0]     cnt_q;

  logic              open_v   [NBANK];
  logic [ROW_W-1:0]  open_row [NBANK];
  logic              bbusy    [NBANK];
  logic [LAT_W-1:0]  bcnt     [NBANK];
  logic [TAG_W-1:0]  btag     [NBANK];
  logic              bcpu     [NBANK];
  logic              bwr      [NBANK];

  // ---- scheduling -------------------------------------------------------
  logic          cls_found [4];
  logic [IW-1:0] cls_idx   [4];
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      cls_found[c] = 1'b0;
      cls_idx[c]   = '0;
    end
    for (int i = DEPTH - 1; i >= 0; i--) begin
      logic cand, hit;
      cand = (QW'(i) < cnt_q) && !bbusy[q[i].bank[BKW-1:0]];
      hit  = open_v[q[i].bank[BKW-1:0]] && (open_row[q[i].bank[BKW-1:0]] == q[i].row);
      if (cand && CPU_FIRST && q[i].is_cpu && hit) begin cls_found[0] = 1'b1; cls_idx[0] = IW'(i); end
      if (cand && CPU_FIRST && q[i].is_cpu)        begin cls_found[1] = 1'b1; cls_idx[1] = IW'(i); end
      if (cand && hit)                             begin cls_found[2] = 1'b1; cls_idx[2] = IW'(i); end
      if (cand)                                    begin cls_found[3] = 1'b1; cls_idx[3] = IW'(i); end
    end
  end

  logic          sel_v;
  logic [IW-1:0] sel;
  always_comb begin
    sel_v = 1'b0;
    sel   = '0;
    for (int c = 3; c >= 0; c--)
      if (cls_found[c]) begin sel_v = 1'b1; sel = cls_idx[c]; end
  end

  dram_req_t    s_req;
  row_outcome_e s_out;
  logic [LAT_W-1:0] s_lat;
  always_comb begin
    s_req = q[sel];
    if (open_v[s_req.bank[BKW-1:0]] && open_row[s_req.bank[BKW-1:0]] == s_req.row) begin
      s_out = ROW_HIT;      s_lat = LAT_W'(T_CL + T_BURST);
    end else if (!open_v[s_req.bank[BKW-1:0]]) begin
      s_out = ROW_CLOSED;   s_lat = LAT_W'(T_RCD + T_CL + T_BURST);
    end else begin
      s_out = ROW_CONFLICT; s_lat = LAT_W'(T_RP + T_RCD + T_CL + T_BURST);
    end
  end

  assign cmd_valid         = sel_v;
  assign dram_cmd.outcome  = s_out;
  assign dram_cmd.is_write = s_req.is_write;
  assign dram_cmd.bank     = s_req.bank;
  assign dram_cmd.row      = s_req.row;
  assign dram_cmd.col      = s_req.col;

  // ---- completion on the shared data bus -------------------------------
  logic                     done_v;
  logic [BKW-1:0] done_b;
  always_comb begin
    done_v = 1'b0;
    done_b = '0;
    for (int b = NBANK - 1; b >= 0; b--)
      if (bbusy[b] && bcnt[b] == '0) begin done_v = 1'b1; done_b = BKW'(b); end
  end
  assign resp_valid    = done_v;
  assign resp_tag      = btag[done_b];
  assign resp_is_cpu   = bcpu[done_b];
  assign resp_is_write = bwr[done_b];

  // ---- queue ------------------------------------------------------------
  assign req_ready = (cnt_q < QW'(DEPTH));
  assign occupancy = cnt_q;
  logic push;
  assign push = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q      <= '0;
      n_hit      <= '0;
      n_closed   <= '0;
      n_conflict <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
      for (int b = 0; b < NBANK; b++) begin
        open_v[b]   <= 1'b0;
        open_row[b] <= '0;
        bbusy[b]    <= 1'b0;
        bcnt[b]     <= '0;
        btag[b]     <= '0;
        bcpu[b]     <= 1'b0;
        bwr[b]      <= 1'b0;
      end
    end else begin
      // bank timers
      for (int b = 0; b < NBANK; b++)
        if (bbusy[b] && bcnt[b] != '0) bcnt[b] <= bcnt[b] - 1'b1;
      if (done_v && resp_ready) bbusy[done_b] <= 1'b0;

      // issue the selected request to its bank
      if (sel_v) begin
        bbusy[s_req.bank[BKW-1:0]]    <= 1'b1;
        bcnt[s_req.bank[BKW-1:0]]     <= s_lat - 1'b1;
        btag[s_req.bank[BKW-1:0]]     <= s_req.tag;
        bcpu[s_req.bank[BKW-1:0]]     <= s_req.is_cpu;
        bwr[s_req.bank[BKW-1:0]]      <= s_req.is_write;
        open_v[s_req.bank[BKW-1:0]]   <= 1'b1;
        open_row[s_req.bank[BKW-1:0]] <= s_req.row;
        case (s_out)
          ROW_HIT:    n_hit      <= n_hit + 1'b1;
          ROW_CLOSED: n_closed   <= n_closed + 1'b1;
          default:    n_conflict <= n_conflict + 1'b1;
        endcase
      end

      // collapse the queue over the removed entry and append the new one
      for (int i = 0; i < DEPTH; i++) begin
        if (sel_v && IW'(i) >= sel && i < DEPTH - 1) q[i] <= q[i + 1];
      end
      if (push) q[IW'(sel_v ? cnt_q - 1'b1 : cnt_q)] <= req;
      cnt_q <= cnt_q + QW'(push) - QW'(sel_v);
    end
  end

  a_sel_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                sel_v |-> (QW'(sel) < cnt_q))
    else $error("frfcfs_mc: selected an empty queue entry");

endmodule
