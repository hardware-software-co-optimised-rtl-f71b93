// tb_input_scratchpad: host writes with byte strobes, read-back with its
// one-cycle latency, the parallel spike vector seen by the spiking core, and
// the eight-bit scatter port used when a layer takes the previous layer's
// output as input.
module tb_input_scratchpad import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  host_req_t host;
  logic [31:0] host_rdata;
  logic [1023:0] spikes, ref_v;
  int checks = 0, failures = 0;

  logic [7:0] ld_we, ld_val;
  logic [7:0][9:0] ld_idx;

  input_scratchpad dut (.clk, .rst_n, .host, .host_rdata, .spikes, .ld_we, .ld_idx, .ld_val);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(int word, logic [31:0] d, logic [3:0] strb, hsel_e sel = SEL_INSPK);
    @(negedge clk);
    host = '0; host.sel = sel; host.we = 1; host.addr = 18'(word * 4); host.wdata = d; host.wstrb = strb;
    @(negedge clk);
    host = '0;
  endtask

  task automatic hread(int word, output logic [31:0] d);
    @(negedge clk);
    host = '0; host.sel = SEL_INSPK; host.re = 1; host.addr = 18'(word * 4);
    @(negedge clk);
    host = '0;
    d = host_rdata;
  endtask

  initial begin
    logic [31:0] d, rd;
    logic [3:0] s;
    host = '0;
    ref_v = '0;
    ld_we = '0; ld_idx = '0; ld_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (spikes !== '0) begin failures++; $display("not cleared by reset"); end
    for (int n = 0; n < 200; n++) begin
      automatic int wi = $urandom_range(0, 31);
      d = $urandom; s = 4'($urandom);
      hwrite(wi, d, s);
      for (int b = 0; b < 4; b++) if (s[b]) ref_v[wi*32 + 8*b +: 8] = d[8*b +: 8];
      checks++;
      if (spikes !== ref_v) begin failures++; $display("spike vector differs after write %0d", n); end
    end
    hwrite(3, 32'hffff_ffff, 4'hf, SEL_WEIGHT);   // another region: ignored
    checks++; if (spikes !== ref_v) begin failures++; $display("write to other region landed"); end
    for (int wi = 0; wi < 32; wi++) begin
      hread(wi, rd);
      checks++;
      if (rd !== ref_v[wi*32 +: 32]) begin failures++; $display("read word %0d: %h vs %h", wi, rd, ref_v[wi*32 +: 32]); end
    end
    // bit scatter: eight distinct random positions per cycle
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int c = 0; c < 8; c++) begin
        ld_we[c]  = 1'($urandom);
        ld_idx[c] = 10'(c * 128 + $urandom_range(0, 127));
        ld_val[c] = 1'($urandom);
        if (ld_we[c]) ref_v[ld_idx[c]] = ld_val[c];
      end
      @(negedge clk);
      ld_we = '0;
      checks++;
      if (spikes !== ref_v) begin failures++; $display("spike vector differs after scatter %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
