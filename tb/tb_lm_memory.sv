// tb_lm_memory: writes random 22-bit words at random addresses of a reduced
// dictionary memory, reads them back and compares with a copy kept in the
// testbench; also checks that read data holds while rd_en is low and
// appears one cycle after the address.
module tb_lm_memory;
  import ctc_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 0;
  logic rd_en, wr_en;
  lm_addr_t rd_addr, wr_addr;
  lm_data_t rd_data, wr_data;
  lm_data_t model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  lm_memory #(.DEPTH(DEPTH)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = lm_addr_t'(a); wr_data = lm_data_t'($urandom);
      model[a] = wr_data;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = (n % 3 == 0);
      wr_addr = lm_addr_t'($urandom % DEPTH); wr_data = lm_data_t'($urandom);
      rd_en = 1; rd_addr = lm_addr_t'($urandom % DEPTH);
      @(negedge clk);
      checks++;
      if (rd_data !== model[rd_addr]) begin
        failures++; $display("FAIL addr %0d got %h expected %h", rd_addr, rd_data, model[rd_addr]);
      end
      if (wr_en) model[wr_addr] = wr_data;
      wr_en = 0; rd_en = 0;
      @(negedge clk);
      checks++;
      if (rd_data !== model[rd_addr] && !(wr_addr == rd_addr)) begin
        failures++; $display("FAIL read data did not hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
