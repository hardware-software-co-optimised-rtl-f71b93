// tb_weight_scratchpad: fills the 8 KB buffer with random bytes, then reads
// random (slot, row, segment) triples for kernel sizes 1..11 and compares the
// three weights, delivered one cycle later, with a reference that zeroes
// columns at or beyond K. Also checks host read-back.
module tb_weight_scratchpad import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  host_req_t host;
  logic [31:0] host_rdata;
  logic [5:0] rd_slot;
  logic [3:0] rd_kr, rd_kc, ksize;
  logic [2:0][7:0] rd_w;
  logic [7:0] ref_m [8192];
  int checks = 0, failures = 0;

  weight_scratchpad dut (.clk, .rst_n, .host, .host_rdata, .rd_slot, .rd_kr, .rd_kc, .ksize, .rd_w);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host = '0; rd_slot = 0; rd_kr = 0; rd_kc = 0; ksize = 3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int wi = 0; wi < 2048; wi++) begin
      automatic logic [31:0] d = $urandom;
      @(negedge clk);
      host = '0; host.sel = SEL_WEIGHT; host.we = 1; host.addr = 18'(wi * 4); host.wdata = d; host.wstrb = 4'hf;
      for (int b = 0; b < 4; b++) ref_m[wi*4+b] = d[8*b +: 8];
    end
    @(negedge clk); host = '0;
    for (int n = 0; n < 3000; n++) begin
      automatic int k = $urandom_range(1, 11), sl = $urandom_range(0, 63), kr = $urandom_range(0, k - 1);
      automatic int kc = 3 * $urandom_range(0, (k - 1) / 3);
      @(negedge clk);
      rd_slot = 6'(sl); rd_kr = 4'(kr); rd_kc = 4'(kc); ksize = 4'(k);
      @(negedge clk);
      for (int m = 0; m < 3; m++) begin
        automatic logic [7:0] e = (kc + m < k) ? ref_m[sl*128 + kr*k + kc + m] : 8'h00;
        checks++;
        if (rd_w[m] !== e) begin
          failures++;
          $display("slot %0d k %0d kr %0d kc %0d m %0d: %h vs %h", sl, k, kr, kc, m, rd_w[m], e);
        end
      end
    end
    for (int n = 0; n < 50; n++) begin
      automatic int wi = $urandom_range(0, 2047);
      @(negedge clk);
      host = '0; host.sel = SEL_WEIGHT; host.re = 1; host.addr = 18'(wi * 4);
      @(negedge clk);
      host = '0;
      checks++;
      if (host_rdata !== {ref_m[wi*4+3], ref_m[wi*4+2], ref_m[wi*4+1], ref_m[wi*4]}) begin
        failures++; $display("host read %0d wrong", wi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
