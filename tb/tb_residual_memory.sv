// tb_residual_memory: host writes 32-bit lane pairs, the aggregation-side
// port reads whole 128-bit words one cycle later; host read-back too.
module tb_residual_memory import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  host_req_t host;
  logic [31:0] host_rdata;
  logic rd_en;
  logic [12:0] rd_addr;
  logic [127:0] rd_data;
  logic [127:0] ref_m [int];
  int checks = 0, failures = 0;

  residual_memory dut (.clk, .rst_n, .host, .host_rdata, .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs[$];
    host = '0; rd_en = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int wd = (n < 4) ? (n == 0 ? 0 : 8191) : $urandom_range(0, 8191);
      automatic logic [127:0] v = {$urandom, $urandom, $urandom, $urandom};
      for (int q = 0; q < 4; q++) begin
        @(negedge clk);
        host = '0; host.sel = SEL_RESID; host.we = 1; host.addr = 18'(wd * 16 + q * 4);
        host.wdata = v[32*q +: 32]; host.wstrb = 4'hf;
      end
      ref_m[wd] = v;
      addrs.push_back(wd);
    end
    @(negedge clk); host = '0;
    foreach (addrs[i]) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 13'(addrs[i]);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== ref_m[addrs[i]]) begin failures++; $display("word %0d differs", addrs[i]); end
    end
    for (int n = 0; n < 40; n++) begin
      automatic int wd = addrs[n], q = n % 4;
      @(negedge clk);
      host = '0; host.sel = SEL_RESID; host.re = 1; host.addr = 18'(wd * 16 + q * 4);
      @(negedge clk);
      host = '0;
      checks++;
      if (host_rdata !== ref_m[wd][32*q +: 32]) begin failures++; $display("host read %0d/%0d", wd, q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
