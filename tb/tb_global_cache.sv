// tb_global_cache: random writes through the single write port and reads on
// all banks at once, checked against a model of the address space (bank =
// low address bits), with one cycle of read latency.
//
// The bank count and size follow the published 256 KB / 16 banks; the line
// width and interleave it checks are this design's own choices.
module tb_global_cache;
  import loas_pkg::*;
  localparam int NB = 16, BL = 64;
  logic clk = 0;
  logic [NB-1:0] rd_en = '0;
  logic [5:0] rd_idx [NB];
  logic [LINE_W-1:0] rd_data [NB];
  logic wr_valid = 0;
  logic [9:0] wr_addr;
  logic [LINE_W-1:0] wr_data;
  logic [LINE_W-1:0] model [NB*BL];
  logic [NB*BL-1:0] written = '0;
  int checks = 0, failures = 0;

  global_cache #(.NB(NB), .BL(BL)) dut (.clk, .rd_en, .rd_idx, .rd_data, .wr_valid, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < 4000; n++) begin
      logic [NB-1:0] en;
      logic [5:0] idx [NB];
      @(negedge clk);
      wr_valid = 1;
      wr_addr  = 10'($urandom);
      wr_data  = {$urandom, $urandom, $urandom, $urandom};
      en = NB'($urandom);
      for (int b = 0; b < NB; b++) begin idx[b] = 6'($urandom); rd_idx[b] = idx[b]; end
      rd_en = en;
      @(negedge clk);
      for (int b = 0; b < NB; b++)
        if (en[b] && written[{idx[b], 4'(b)}]) begin
          checks++;
          if (rd_data[b] != model[{idx[b], 4'(b)}]) failures++;
        end
      model[wr_addr] = wr_data; written[wr_addr] = 1'b1;
      wr_valid = 0; rd_en = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
