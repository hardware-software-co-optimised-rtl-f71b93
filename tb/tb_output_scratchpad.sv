// tb_output_scratchpad: engine-side byte writes across the 56 kB buffer,
// host-side 32-bit reads one cycle after the request, and byte reads on the
// second (layer input select) port, also one cycle after the request.
module tb_output_scratchpad import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  host_req_t host;
  logic [31:0] host_rdata;
  logic wr_en;
  logic [15:0] wr_addr;
  logic [7:0] wr_data;
  logic rd_en;
  logic [15:0] rd_addr;
  logic [7:0] rd_data;
  logic [7:0] ref_m [int];
  int checks = 0, failures = 0;

  output_scratchpad dut (.clk, .rst_n, .host, .host_rdata, .wr_en, .wr_addr, .wr_data,
                          .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int words[$];
    host = '0; wr_en = 0; wr_addr = 0; wr_data = 0; rd_en = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int wd = (n == 0) ? 0 : (n == 1) ? 14335 : $urandom_range(0, 14335);
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 16'(wd * 4 + b); wr_data = 8'($urandom);
        ref_m[wd*4+b] = wr_data;
      end
      words.push_back(wd);
    end
    @(negedge clk); wr_en = 0;
    foreach (words[i]) begin
      automatic int wd = words[i];
      @(negedge clk);
      host = '0; host.sel = SEL_OUTPUT; host.re = 1; host.addr = 18'(wd * 4);
      @(negedge clk);
      host = '0;
      checks++;
      if (host_rdata !== {ref_m[wd*4+3], ref_m[wd*4+2], ref_m[wd*4+1], ref_m[wd*4]}) begin
        failures++; $display("word %0d: %h", wd, host_rdata);
      end
    end
    foreach (words[i]) begin
      automatic int a = words[i] * 4 + $urandom_range(0, 3);
      @(negedge clk);
      rd_en = 1; rd_addr = 16'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 16'($urandom);
      checks++;
      if (rd_data !== ref_m[a]) begin failures++; $display("byte %0d: %h vs %h", a, rd_data, ref_m[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
