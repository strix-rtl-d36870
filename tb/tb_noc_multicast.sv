// tb_noc_multicast: sends random words with random valid and checks that
// every one of the eight destinations sees each valid word exactly one
// cycle later, and that valid follows with the same delay.
`timescale 1ns/1ps
module tb_noc_multicast;
  localparam int unsigned W = 64, NDST = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid;
  logic [W-1:0] in_data;
  logic out_valid [NDST];
  logic [W-1:0] out_data [NDST];
  noc_multicast #(.W(W), .NDST(NDST)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    logic v; logic [W-1:0] d;
    in_valid = 0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      v = 1'($urandom); d = {$urandom, $urandom};
      in_valid = v; in_data = d; @(negedge clk);
      for (int k = 0; k < int'(NDST); k++) begin
        checks++; if (out_valid[k] !== v) failures++;
        if (v) begin checks++; if (out_data[k] !== d) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
