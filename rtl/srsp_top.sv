// srsp_top: GPU memory system with scalable remote scope promotion (sRSP).
//
// N_CU L1 data caches (one per compute unit) share one L2. Each L1 carries an
// sFIFO of dirty blocks, a Local Release Table and a Promoted Acquire Table,
// which let a remote acquire flush only the L1 of the local sharer and let a
// remote release mark the address for promotion in every L1, instead of
// flushing and invalidating every L1 as the original RSP design does.
// The compute units themselves are outside this module: each has a request
// port (valid/ready, cu_req_t) and a response port (one-cycle pulse with the
// loaded or old value). Default sizes are the evaluated GPU: 64 CUs, 16 kB
// 16-way L1 with a 16-entry sFIFO and 4-cycle hits, 512 kB L2 with 24-cycle
// accesses, 64 B blocks. The instruction caches and DRAM of that GPU are not
// part of this module.
module srsp_top
  import srsp_pkg::*;
#(
  parameter int unsigned N_CU        = 64,
  parameter int unsigned L1_BYTES    = 16384,
  parameter int unsigned L1_WAYS     = 16,
  parameter int unsigned SFIFO_DEPTH = 16,
  parameter int unsigned LR_ENTRIES  = 8,
  parameter int unsigned PA_ENTRIES  = 8,
  parameter int unsigned L1_LAT      = 4,
  parameter int unsigned L2_BYTES    = 524288,
  parameter int unsigned L2_LAT      = 24
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cu_req_valid [N_CU],
  output logic    cu_req_ready [N_CU],
  input  cu_req_t cu_req       [N_CU],
  output logic    cu_resp_valid[N_CU],
  output word_t   cu_resp_rdata[N_CU]
);

  logic       l2_req_valid [N_CU];
  logic       l2_req_ready [N_CU];
  l2_req_t    l2_req       [N_CU];
  logic       l2_resp_valid[N_CU];
  l2_resp_t   l2_resp;
  logic       wb_valid     [N_CU];
  logic       wb_ready     [N_CU];
  wb_t        wb           [N_CU];
  logic       prb_valid    [N_CU];
  prb_kind_e  prb_kind;
  line_addr_t prb_line;
  logic       prb_ack      [N_CU];

  for (genvar c = 0; c < N_CU; c++) begin : g_cu
    l1_cache #(
      .SIZE_BYTES (L1_BYTES),
      .WAYS       (L1_WAYS),
      .SFIFO_DEPTH(SFIFO_DEPTH),
      .LR_ENTRIES (LR_ENTRIES),
      .PA_ENTRIES (PA_ENTRIES),
      .HIT_LAT    (L1_LAT)
    ) u_l1 (
      .clk, .rst_n,
      .cu_req_valid (cu_req_valid[c]),
      .cu_req_ready (cu_req_ready[c]),
      .cu_req       (cu_req[c]),
      .cu_resp_valid(cu_resp_valid[c]),
      .cu_resp_rdata(cu_resp_rdata[c]),
      .l2_req_valid (l2_req_valid[c]),
      .l2_req_ready (l2_req_ready[c]),
      .l2_req       (l2_req[c]),
      .l2_resp_valid(l2_resp_valid[c]),
      .l2_resp      (l2_resp),
      .wb_valid     (wb_valid[c]),
      .wb_ready     (wb_ready[c]),
      .wb           (wb[c]),
      .prb_valid    (prb_valid[c]),
      .prb_kind     (prb_kind),
      .prb_line     (prb_line),
      .prb_ack      (prb_ack[c])
    );
  end

  l2_cache #(
    .N_CU     (N_CU),
    .MEM_BYTES(L2_BYTES),
    .LAT      (L2_LAT)
  ) u_l2 (
    .clk, .rst_n,
    .req_valid (l2_req_valid),
    .req_ready (l2_req_ready),
    .req       (l2_req),
    .resp_valid(l2_resp_valid),
    .resp      (l2_resp),
    .wb_valid  (wb_valid),
    .wb_ready  (wb_ready),
    .wb        (wb),
    .prb_valid (prb_valid),
    .prb_kind  (prb_kind),
    .prb_line  (prb_line),
    .prb_ack   (prb_ack)
  );

endmodule
