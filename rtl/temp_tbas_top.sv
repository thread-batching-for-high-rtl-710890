// temp_tbas_top: GPU memory-side design with thread batching (TEMP) and
// thread batch-aware scheduling (TBAS).
//
// NUM_SM SM front-ends each take a contiguous range of thread block ids from
// their own dispatch queue, so the blocks of a thread batch all run on one SM,
// and schedule warps one batch at a time. Every memory request an SM sends out
// is decoded by the page-coloring address mapper (channel, bank, row, column,
// and whether the bank belongs to this SM). NUM_CH channel controllers queue
// requests and serve them open-page FR-FCFS with CPU requests first. A third
// controller of the same kind, with 8 banks, serves the CPUs' DDR3 channel.
//
// Left outside, and connected through ports: each SM's execution pipeline and
// caches (which issue the memory requests and wake/retire warps), the
// interconnect that carries mapped requests to the channel of `sm_req_ch` and
// replies back, the CPU cores with their address mapping, and the DRAM devices
// (dram_cmd, ddr_cmd).
//
// Timing: the front-ends are registered state machines (issue is combinational
// on their state); the mapper is combinational; the controllers accept one
// request and return one reply per cycle each.
module temp_tbas_top
  import temp_pkg::*;
#(
  parameter int N_SM       = NUM_SM,
  parameter int N_CH       = NUM_CH,
  parameter int MAX_TB     = MAX_TB_PER_SM,
  parameter int MAX_WARPS  = MAX_WARPS_PER_SM,
  parameter int MIN_ACTIVE = 1,
  parameter int QDEPTH     = MCQ_DEPTH,
  parameter bit CPU_FIRST  = 1'b1,
  parameter int DDR_BANKS  = DDR3_BANKS,
  localparam int WARP_W    = (MAX_WARPS > 1) ? $clog2(MAX_WARPS) : 1,
  localparam int CNT_W     = $clog2(MAX_WARPS + 1),
  localparam int SMW       = (N_SM > 1) ? $clog2(N_SM) : 1,
  localparam int QW        = $clog2(QDEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel launch: per-SM ranges of thread block ids, batch stride, block size
  input  logic              load,
  input  logic [TBID_W-1:0] load_head   [N_SM],
  input  logic [TBID_W-1:0] load_tail   [N_SM],
  input  logic [TBID_W-1:0] load_stride,
  input  logic [CNT_W-1:0]  warps_per_block,
  // SM pipelines
  output logic              issue_valid [N_SM],
  output logic [WARP_W-1:0] issue_warp  [N_SM],
  output logic [TBID_W-1:0] issue_tb_id [N_SM],
  output logic [CNT_W-1:0]  issue_wib   [N_SM],
  output logic [AGE_W-1:0]  issue_age   [N_SM],
  input  logic              issue_stall [N_SM],
  input  logic              wake_valid  [N_SM],
  input  logic [WARP_W-1:0] wake_warp   [N_SM],
  input  logic              exit_valid  [N_SM],
  input  logic [WARP_W-1:0] exit_warp   [N_SM],
  output logic              dispatch_valid [N_SM],
  output logic [TBID_W-1:0] dispatch_tb_id [N_SM],
  output logic              promote     [N_SM],
  output logic              demote      [N_SM],
  output logic              run_valid   [N_SM],
  output logic [AGE_W-1:0]  run_age     [N_SM],
  output logic              sm_idle     [N_SM],
  // SM memory requests, mapped for the interconnect
  input  logic [PA_W-1:0]   sm_req_addr  [N_SM],
  input  logic              sm_req_write [N_SM],
  input  logic [TAG_W-1:0]  sm_req_tag   [N_SM],
  output logic [CH_W-1:0]   sm_req_ch    [N_SM],
  output dram_req_t         sm_req_dram  [N_SM],
  output logic              sm_req_local [N_SM],
  // channel controllers
  input  logic              mc_req_valid  [N_CH],
  output logic              mc_req_ready  [N_CH],
  input  dram_req_t         mc_req        [N_CH],
  output logic              mc_resp_valid [N_CH],
  input  logic              mc_resp_ready [N_CH],
  output logic [TAG_W-1:0]  mc_resp_tag   [N_CH],
  output logic              mc_resp_is_cpu[N_CH],
  output logic              mc_resp_is_write[N_CH],
  output logic              dram_cmd_valid[N_CH],
  output dram_cmd_t         dram_cmd      [N_CH],
  output logic [QW-1:0]     mc_occupancy  [N_CH],
  output logic [31:0]       mc_n_hit      [N_CH],
  output logic [31:0]       mc_n_closed   [N_CH],
  output logic [31:0]       mc_n_conflict [N_CH],
  // CPU-side DDR3 channel controller
  input  logic              ddr_req_valid,
  output logic              ddr_req_ready,
  input  dram_req_t         ddr_req,
  output logic              ddr_resp_valid,
  input  logic              ddr_resp_ready,
  output logic [TAG_W-1:0]  ddr_resp_tag,
  output logic              ddr_resp_is_cpu,
  output logic              ddr_resp_is_write,
  output logic              ddr_cmd_valid,
  output dram_cmd_t         ddr_cmd,
  output logic [QW-1:0]     ddr_occupancy,
  output logic [31:0]       ddr_n_hit,
  output logic [31:0]       ddr_n_closed,
  output logic [31:0]       ddr_n_conflict
);

  for (genvar s = 0; s < N_SM; s++) begin : g_sm
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [COLOR_W-1:0] color;
    logic [SMW-1:0]    home;

    sm_frontend #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS), .MIN_ACTIVE(MIN_ACTIVE)) u_fe (
      .clk, .rst_n, .load,
      .load_head(load_head[s]), .load_tail(load_tail[s]), .load_stride, .warps_per_block,
      .issue_stall(issue_stall[s]),
      .wake_valid(wake_valid[s]), .wake_warp(wake_warp[s]),
      .exit_valid(exit_valid[s]), .exit_warp(exit_warp[s]),
      .issue_valid(issue_valid[s]), .issue_warp(issue_warp[s]),
      .issue_tb_id(issue_tb_id[s]), .issue_wib(issue_wib[s]), .issue_age(issue_age[s]),
      .dispatch_valid(dispatch_valid[s]), .dispatch_tb_id(dispatch_tb_id[s]),
      .promote(promote[s]), .demote(demote[s]),
      .run_valid(run_valid[s]), .run_age(run_age[s]), .sm_idle(sm_idle[s])
    );

    page_color_mapper #(.N_SM(N_SM)) u_map (
      .addr(sm_req_addr[s]), .req_sm(SMW'(s)),
      .channel(sm_req_ch[s]), .bank, .row, .col, .color,
      .home_sm(home), .local_access(sm_req_local[s])
    );

    assign sm_req_dram[s] = '{is_cpu: 1'b0, is_write: sm_req_write[s],
                              bank: bank, row: row, col: col, tag: sm_req_tag[s]};
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    frfcfs_mc #(.DEPTH(QDEPTH), .NBANK(NUM_BANKS), .CPU_FIRST(CPU_FIRST)) u_mc (
      .clk, .rst_n,
      .req_valid(mc_req_valid[c]), .req_ready(mc_req_ready[c]), .req(mc_req[c]),
      .resp_valid(mc_resp_valid[c]), .resp_ready(mc_resp_ready[c]),
      .resp_tag(mc_resp_tag[c]), .resp_is_cpu(mc_resp_is_cpu[c]), .resp_is_write(mc_resp_is_write[c]),
      .cmd_valid(dram_cmd_valid[c]), .dram_cmd(dram_cmd[c]),
      .occupancy(mc_occupancy[c]),
      .n_hit(mc_n_hit[c]), .n_closed(mc_n_closed[c]), .n_conflict(mc_n_conflict[c])
    );
  end

  // DDR3 memory partition of the CPUs: same scheduling policy, 8 banks.
  frfcfs_mc #(.DEPTH(QDEPTH), .NBANK(DDR_BANKS), .CPU_FIRST(CPU_FIRST)) u_ddr (
    .clk, .rst_n,
    .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req(ddr_req),
    .resp_valid(ddr_resp_valid), .resp_ready(ddr_resp_ready),
    .resp_tag(ddr_resp_tag), .resp_is_cpu(ddr_resp_is_cpu), .resp_is_write(ddr_resp_is_write),
    .cmd_valid(ddr_cmd_valid), .dram_cmd(ddr_cmd),
    .occupancy(ddr_occupancy),
    .n_hit(ddr_n_hit), .n_closed(ddr_n_closed), .n_conflict(ddr_n_conflict)
  );

endmodule
