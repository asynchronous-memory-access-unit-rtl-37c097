// tb_l2_spm: random masked line writes and reads against a reference array;
// checks the one-cycle read latency and that unmasked bytes keep their value.
`timescale 1ns/1ps
module tb_l2_spm;
  import amu_pkg::*;
  localparam int LINES = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req_valid = 0;
  spm_req_t req = '0;
  line_t rdata;
  line_t ref_mem [LINES];
  int checks = 0, failures = 0;

  l2_spm dut (.*);

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    // fill every line
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk);
      ref_mem[i] = rnd_line();
      req_valid = 1; req.we = 1; req.line = 10'(i); req.wdata = ref_mem[i]; req.wmask = '1;
    end
    for (int n = 0; n < 4000; n++) begin
      int ln;
      ln = $urandom_range(0, LINES - 1);
      @(negedge clk);
      req_valid = 1; req.line = 10'(ln);
      if ($urandom_range(0, 1)) begin
        req.we = 1; req.wdata = rnd_line(); req.wmask = {$urandom, $urandom};
        for (int b = 0; b < LINE_BYTES; b++)
          if (req.wmask[b]) ref_mem[ln][b*8 +: 8] = req.wdata[b*8 +: 8];
      end else begin
        req.we = 0;
        @(negedge clk);
        req_valid = 0;
        checks++;
        if (rdata !== ref_mem[ln]) begin failures++; $display("FAIL: line %0d", ln); end
      end
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
