// tb_softmax_buffer: writes all 1024 entries one at a time in random order,
// then reads every 8-entry row and compares with a model array.
module tb_softmax_buffer;
  import opal_pkg::*;
  int checks = 0, failures = 0;
  logic       clk = 0;
  logic       we;
  logic [9:0] waddr;
  bf16_t      wdata;
  logic [6:0] raddr;
  bf16_t [7:0] rdata;
  bf16_t      model [1024];

  softmax_buffer #(.DEPTH(1024), .RD_N(8)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < 1024; i++) model[i] = 16'h0000;
    // fill in order, then overwrite 2000 random entries
    for (int n = 0; n < 3024; n++) begin
      @(negedge clk);
      we = 1; waddr = (n < 1024) ? 10'(n) : 10'($urandom); wdata = 16'($urandom);
      model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 128; r++) begin
      raddr = 7'(r);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (rdata[i] !== model[8*r + i]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d entry %0d", r, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
