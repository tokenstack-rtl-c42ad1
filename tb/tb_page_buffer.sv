// tb_page_buffer -- self-checking test of the shared page buffer.
//
// Writes every chunk of both halves with random data (whole chunks and single
// lanes through the lane mask), reads each chunk back, checks the one-cycle
// read latency and that masked-off lanes keep their old contents.
//
// The buffer's size follows the paper; its chunk organisation is this design's.
module tb_page_buffer;
  localparam int D = 32, TP = 4, CH = 16;
  localparam int NCH = 2 * TP * (D / CH), AW = $clog2(NCH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic          wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [CH-1:0] wr_mask = 0;
  logic [15:0]   wr_data [CH];
  logic [15:0]   rd_data [CH];

  page_buffer #(.D(D), .T_PAGE(TP), .CH(CH)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] model [NCH][CH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // full-chunk writes
    for (int a = 0; a < NCH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_mask = '1;
      for (int i = 0; i < CH; i++) begin wr_data[i] = 16'($urandom); model[a][i] = wr_data[i]; end
    end
    // single-lane writes
    for (int k = 0; k < 40; k++) begin
      int a, l;
      a = int'($urandom % NCH); l = int'($urandom % CH);
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_mask = CH'(1) << l;
      for (int i = 0; i < CH; i++) wr_data[i] = 16'($urandom);
      model[a][l] = wr_data[l];
    end
    @(negedge clk);
    wr_en = 0;
    for (int a = 0; a < NCH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = AW'(a);
      @(posedge clk); #1;
      for (int i = 0; i < CH; i++) begin
        checks++;
        if (rd_data[i] !== model[a][i]) begin
          failures++;
          $display("FAIL chunk %0d lane %0d got %h expected %h", a, i, rd_data[i], model[a][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
