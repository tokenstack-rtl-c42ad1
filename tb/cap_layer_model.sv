// cap_layer_model -- behavioural model of the capacity-layer DRAM dies, for
// testbenches only (not synthesizable, not part of the design).
//
// NBANK banks of WORDS 64-bit words. A request is accepted when req_ready is
// high; req_ready drops pseudo-randomly (STALL_PCT percent of cycles) to
// exercise back-pressure. Read data returns in request order LAT cycles after
// acceptance. Memory starts at zero.
//
// The paper describes the capacity dies only as dense HBM layers; the latency,
// back-pressure and word width here are this model's own.
module cap_layer_model
  import ts_pkg::*;
#(
  parameter int NBANK     = 32,
  parameter int WORDS     = 4096,
  parameter int LAT       = 3,
  parameter int STALL_PCT = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  cap_req_t    req,
  output logic        rsp_valid,
  output logic [63:0] rsp_data
);
  logic [63:0] mem [NBANK][WORDS];
  logic        pv [LAT];
  logic [63:0] pd [LAT];
  int          n_reads = 0, n_writes = 0;
  int          stall_pct = STALL_PCT;   // may be changed by the testbench at run time

  initial begin
    for (int b = 0; b < NBANK; b++) for (int w = 0; w < WORDS; w++) mem[b][w] = '0;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b1;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.bank % NBANK][req.addr % WORDS] <= req.wdata;
          n_writes++;
        end else begin
          pv[0] <= 1'b1;
          pd[0] <= mem[req.bank % NBANK][req.addr % WORDS];
          n_reads++;
        end
      end
      req_ready <= (int'($urandom % 100) >= stall_pct);
    end
  end
endmodule
