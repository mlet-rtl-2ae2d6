// tb_mlet_separator -- self-checking test of the separator unit.
// Sends IPv4 headers with random destination addresses and checks that the
// data registers hold the address split into the configured stages (here the
// unequal split 2/6/8/16, stage 1 taking the MSBs), that dr_valid pulses one
// cycle after acceptance, and that hdr_ready drops while the MSTCAM is busy.
module tb_mlet_separator;
  localparam int K = 4;
  localparam int unsigned SW [K] = '{2, 6, 8, 16};
  logic clk = 0, rst_n = 0;
  logic hdr_valid, hdr_ready, lookup_busy, dr_valid;
  logic [159:0] hdr;
  logic [31:0] dr;
  int checks = 0, failures = 0;
  int stalls = 0;

  mlet_separator #(.NUM_STAGES(K), .STAGE_W(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [159:0] make_hdr(input logic [31:0] dst);
    logic [159:0] h;
    h = {32'h4500_0054, 32'h1234_4000, 32'h4001_0000, 32'(  $urandom), dst};
    return h;
  endfunction

  initial begin
    hdr_valid = 0; lookup_busy = 0; hdr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [31:0] dst;
      dst = $urandom;
      @(negedge clk);
      lookup_busy = (t % 3 == 0);
      hdr = make_hdr(dst); hdr_valid = 1;
      if (lookup_busy) begin
        #1; checks++; if (hdr_ready) failures++;
        stalls++;
        @(negedge clk); lookup_busy = 0;
      end
      #1; checks++; if (!hdr_ready) begin failures++; $display("not ready"); end
      @(negedge clk); hdr_valid = 0;
      checks++;
      if (!dr_valid) begin failures++; $display("dr_valid missing"); end
      // stage fields, MSB first
      if (dut.g_dr[0].dr_q !== dst[31:30] || dut.g_dr[1].dr_q !== dst[29:24] ||
          dut.g_dr[2].dr_q !== dst[23:16] || dut.g_dr[3].dr_q !== dst[15:0] || dr !== dst) begin
        failures++; $display("DR contents %h, expected %h", dr, dst);
      end
      checks++;
      #1; checks++; if (hdr_ready) failures++;   // DRs still full this cycle
      @(negedge clk);
      checks++; if (dr_valid) failures++;
    end
    checks++; if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
