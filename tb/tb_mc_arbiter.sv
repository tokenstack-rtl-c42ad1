// tb_mc_arbiter -- self-checking test of the capacity-layer request arbiter.
//
// A GPU process and a DMA process run at the same time against a behavioural
// capacity-layer model with random back-pressure. Each first writes random
// words into its own region, then reads random addresses of that region. The
// testbench keeps its own copy of memory and an expected-response queue per
// source, and checks every returned word, in order, with a randomly stalling
// GPU response consumer. It also checks the round-robin rule: whenever both
// queues hold a request, the grant goes to the source not served last.
//
// Separate queues follow the paper; the round-robin rule checked is this
// design's own.
module tb_mc_arbiter;
  import ts_pkg::*;
  localparam int NW = 64, NOPS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gpu_req_valid = 0, gpu_req_ready, gpu_rsp_valid, gpu_rsp_ready = 0;
  logic dma_req_valid = 0, dma_req_ready, dma_rsp_valid;
  cap_req_t gpu_req = '0, dma_req = '0, cap_req;
  logic [63:0] gpu_rsp_data, dma_rsp_data, cap_rsp_data;
  logic cap_req_valid, cap_req_ready, cap_rsp_valid;
  logic [31:0] gpu_grants, dma_grants;

  mc_arbiter dut (.*);
  cap_layer_model #(.NBANK(8), .WORDS(NW), .LAT(3), .STALL_PCT(25)) u_cap (
    .clk, .rst_n, .req_valid(cap_req_valid), .req_ready(cap_req_ready), .req(cap_req),
    .rsp_valid(cap_rsp_valid), .rsp_data(cap_rsp_data));

  int checks = 0, failures = 0;
  logic [63:0] gmem [NW], dmem [NW];
  logic [63:0] gexp [$], dexp [$];
  int  g_rsp = 0, d_rsp = 0, rr_checks = 0;
  bit  gdone = 0, ddone = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gsend(input cap_req_t r);
    @(negedge clk); gpu_req_valid = 1; gpu_req = r; #1;
    while (!gpu_req_ready) begin @(negedge clk); #1; end
    if (!r.we) gexp.push_back(gmem[r.addr % NW]);
    @(posedge clk); #1; gpu_req_valid = 0;
  endtask
  task automatic dsend(input cap_req_t r);
    @(negedge clk); dma_req_valid = 1; dma_req = r; #1;
    while (!dma_req_ready) begin @(negedge clk); #1; end
    if (!r.we) dexp.push_back(dmem[r.addr % NW]);
    @(posedge clk); #1; dma_req_valid = 0;
  endtask

  // random GPU response back-pressure
  always @(negedge clk) gpu_rsp_ready = ($urandom % 3) != 0;

  // response checkers
  always @(posedge clk) if (rst_n) begin
    if (gpu_rsp_valid && gpu_rsp_ready) begin
      checks++; g_rsp++;
      if (gexp.size() == 0 || gpu_rsp_data !== gexp[0]) begin
        failures++; $display("FAIL gpu rsp %h", gpu_rsp_data);
      end
      if (gexp.size() != 0) void'(gexp.pop_front());
    end
    if (dma_rsp_valid) begin
      checks++; d_rsp++;
      if (dexp.size() == 0 || dma_rsp_data !== dexp[0]) begin
        failures++; $display("FAIL dma rsp %h", dma_rsp_data);
      end
      if (dexp.size() != 0) void'(dexp.pop_front());
    end
    // round robin: with both queues non-empty, the other source wins
    if (cap_req_valid && !dut.gq_empty && !dut.dq_empty) begin
      checks++; rr_checks++;
      if (dut.grant_gpu == dut.last_gpu) begin
        failures++; $display("FAIL round robin");
      end
    end
  end

  initial begin
    cap_req_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int i = 0; i < NW; i++) begin
          r = '{we: 1'b1, bank: 5'd1, addr: CAP_AW'(i), wdata: {$urandom, $urandom}};
          gmem[i] = r.wdata; gsend(r);
        end
        for (int i = 0; i < NOPS; i++) begin
          r = '{we: 1'b0, bank: 5'd1, addr: CAP_AW'($urandom % NW), wdata: '0};
          gsend(r);
        end
        gdone = 1;
      end
      begin
        cap_req_t q;
        for (int i = 0; i < NW; i++) begin
          q = '{we: 1'b1, bank: 5'd5, addr: CAP_AW'(i), wdata: {$urandom, $urandom}};
          dmem[i] = q.wdata; dsend(q);
        end
        for (int i = 0; i < NOPS; i++) begin
          q = '{we: 1'b0, bank: 5'd5, addr: CAP_AW'($urandom % NW), wdata: '0};
          dsend(q);
        end
        ddone = 1;
      end
    join
    repeat (60) @(posedge clk);
    checks++;
    if (g_rsp != NOPS || d_rsp != NOPS) begin
      failures++; $display("FAIL response count gpu %0d dma %0d", g_rsp, d_rsp);
    end
    checks++;
    if (gpu_grants != 32'(NW + NOPS) || dma_grants != 32'(NW + NOPS)) begin
      failures++; $display("FAIL grant counters %0d %0d", gpu_grants, dma_grants);
    end
    checks++;
    if (rr_checks == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("round-robin decisions checked: %0d", rr_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
