// mc_arbiter -- request arbitration of the base-die disaggregated memory
// controller toward the capacity layers.
//
// GPU-originated requests (plain reads and writes of weights, activations and
// other capacity-layer data arriving over the host link) and PIM-side
// requests (the migration DMA) wait in separate queues, as the paper asks, so
// that neither path starves the other. When both queues hold a request the
// grant alternates (round robin); otherwise the non-empty queue is served.
// Reads return in order on the capacity port; a tag queue remembers which
// source each read came from and routes its data back. GPU read data waits in
// a response queue (with ready); the GPU request queue only accepts a read
// while the reads in flight for the GPU fit in that queue, so no response is
// ever dropped. DMA responses are passed straight on (the DMA always accepts).
//
// Timing: a queued request is offered on the capacity port in the cycle after
// it was pushed; one request per cycle is issued. Queue depths are this
// design's choice; the paper gives none.
module mc_arbiter
  import ts_pkg::*;
#(
  parameter int QDEPTH = 4,
  parameter int RDEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // GPU side
  input  logic        gpu_req_valid,
  output logic        gpu_req_ready,
  input  cap_req_t    gpu_req,
  output logic        gpu_rsp_valid,
  input  logic        gpu_rsp_ready,
  output logic [63:0] gpu_rsp_data,
  // PIM / DMA side
  input  logic        dma_req_valid,
  output logic        dma_req_ready,
  input  cap_req_t    dma_req,
  output logic        dma_rsp_valid,
  output logic [63:0] dma_rsp_data,
  // capacity-layer port
  output logic        cap_req_valid,
  input  logic        cap_req_ready,
  output cap_req_t    cap_req,
  input  logic        cap_rsp_valid,
  input  logic [63:0] cap_rsp_data,
  // statistics
  output logic [31:0] gpu_grants,
  output logic [31:0] dma_grants
);

  localparam int QA = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int RA = (RDEPTH > 1) ? $clog2(RDEPTH) : 1;
  localparam int TD = 2 * QDEPTH + RDEPTH;
  localparam int TA = $clog2(TD);

  cap_req_t    gq_dout, dq_dout;
  logic        gq_full, gq_empty, dq_full, dq_empty;
  logic [QA:0] gq_cnt, dq_cnt;
  logic        gq_pop, dq_pop, last_gpu, grant_gpu;
  logic        tag_dout, tag_full, tag_empty;
  logic [TA:0] tag_cnt;
  logic        rq_full, rq_empty;
  logic [RA:0] rq_cnt;
  logic [RA+1:0] gpu_rd_inflight;   // GPU reads queued or issued, data not yet taken

  sync_fifo #(.T(cap_req_t), .DEPTH(QDEPTH)) u_gq (
    .clk, .rst_n, .push(gpu_req_valid && gpu_req_ready), .din(gpu_req), .pop(gq_pop),
    .dout(gq_dout), .full(gq_full), .empty(gq_empty), .count(gq_cnt));
  sync_fifo #(.T(cap_req_t), .DEPTH(QDEPTH)) u_dq (
    .clk, .rst_n, .push(dma_req_valid && dma_req_ready), .din(dma_req), .pop(dq_pop),
    .dout(dq_dout), .full(dq_full), .empty(dq_empty), .count(dq_cnt));

  // read tags: 1 = GPU, 0 = DMA
  sync_fifo #(.T(logic), .DEPTH(TD)) u_tag (
    .clk, .rst_n, .push(cap_req_valid && cap_req_ready && !cap_req.we), .din(grant_gpu),
    .pop(cap_rsp_valid), .dout(tag_dout), .full(tag_full), .empty(tag_empty), .count(tag_cnt));

  sync_fifo #(.T(logic [63:0]), .DEPTH(RDEPTH)) u_rq (
    .clk, .rst_n, .push(cap_rsp_valid && tag_dout), .din(cap_rsp_data),
    .pop(gpu_rsp_valid && gpu_rsp_ready), .dout(gpu_rsp_data),
    .full(rq_full), .empty(rq_empty), .count(rq_cnt));

  assign gpu_req_ready = !gq_full && (gpu_req.we || (int'(gpu_rd_inflight) < RDEPTH));
  assign dma_req_ready = !dq_full;
  assign gpu_rsp_valid = !rq_empty;
  assign dma_rsp_valid = cap_rsp_valid && !tag_dout;
  assign dma_rsp_data  = cap_rsp_data;

  always_comb begin
    if (!gq_empty && !dq_empty) grant_gpu = !last_gpu;
    else                        grant_gpu = !gq_empty;
    cap_req_valid = !gq_empty || !dq_empty;
    cap_req       = grant_gpu ? gq_dout : dq_dout;
    gq_pop        = cap_req_valid && cap_req_ready && grant_gpu;
    dq_pop        = cap_req_valid && cap_req_ready && !grant_gpu;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_gpu        <= 1'b0;
      gpu_grants      <= '0;
      dma_grants      <= '0;
      gpu_rd_inflight <= '0;
    end else begin
      if (cap_req_valid && cap_req_ready) begin
        last_gpu <= grant_gpu;
        if (grant_gpu) gpu_grants <= gpu_grants + 1;
        else           dma_grants <= dma_grants + 1;
      end
      gpu_rd_inflight <= gpu_rd_inflight
                       + (RA+2)'(gpu_req_valid && gpu_req_ready && !gpu_req.we)
                       - (RA+2)'(gpu_rsp_valid && gpu_rsp_ready);
    end
  end

  // a response never arrives without a read in flight
  assert property (@(posedge clk) disable iff (!rst_n) cap_rsp_valid |-> !tag_empty);

endmodule
