// tb_axil_config: AXI4-Lite transactions against the configuration block.
// Writes and reads back every layer register, checks the decoded layer
// configuration, the one-cycle start and ping-pong-clear pulses, the G/H
// table lookup, the request forwarded to each buffer window (select and
// offset) and the read data returned from behavioural buffer models, the
// error response for unmapped addresses and for writes to the read-only
// output window, and that responses wait for a late RREADY/BREADY.
module tb_axil_config import sia_pkg::*;;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [HADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  host_req_t host;
  logic [31:0] rd_inspk, rd_weight, rd_output, rd_resid, cycles, stalls;
  layer_cfg_t cfg;
  logic start, pp_clear, busy, done, pp_sel;
  logic [5:0] bn_ch;
  logic signed [15:0] bn_g, bn_h;
  int checks = 0, failures = 0, n_start = 0, n_clear = 0;
  host_req_t last_wr, last_rd;

  axil_config dut (.*);

  // buffer models: read data is a function of select and offset, one cycle late
  function automatic logic [31:0] mdata(hsel_e s, logic [HADDR_W-1:0] a);
    return {8'(s), 6'd0, a} ^ 32'h5a00_0000;
  endfunction
  always_ff @(posedge clk) begin
    if (host.re) begin
      rd_inspk  <= (host.sel == SEL_INSPK)  ? mdata(SEL_INSPK, host.addr)  : 32'hdead_0001;
      rd_weight <= (host.sel == SEL_WEIGHT) ? mdata(SEL_WEIGHT, host.addr) : 32'hdead_0002;
      rd_output <= (host.sel == SEL_OUTPUT) ? mdata(SEL_OUTPUT, host.addr) : 32'hdead_0003;
      rd_resid  <= (host.sel == SEL_RESID)  ? mdata(SEL_RESID, host.addr)  : 32'hdead_0004;
      last_rd <= host;
    end
    if (host.we) last_wr <= host;
    if (rst_n && start) n_start++;
    if (rst_n && pp_clear) n_clear++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(logic [HADDR_W-1:0] a, logic [31:0] d, output logic [1:0] resp,
                           input int bdelay = 0, input logic [3:0] strb = 4'hf);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = strb; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (bdelay) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(logic [HADDR_W-1:0] a, output logic [31:0] d, output logic [1:0] resp,
                          input int rdelay = 0);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    repeat (rdelay) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata; resp = s_rresp;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] e);
    checks++;
    if (got !== e) begin failures++; $display("%s: %h expected %h", what, got, e); end
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    busy = 0; done = 0; pp_sel = 0; cycles = 32'd1234; stalls = 32'd56; bn_ch = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // layer registers
    axi_write(A_SHAPE, 32'h0015_0C1A, resp);    // w 26, h 12, k 5, stride 2
    expect32("shape resp", 32'(resp), 0);
    axi_write(A_CHANS, 32'h0010_0003, resp);    // 3 in, 16 out
    axi_write(A_NEURON, 32'h0703_FF9C, resp, 3); // vth -100, leak 3, lif, first, res
    axi_write(A_OUTBASE, 32'h0000_1234, resp);
    axi_write(A_RESBASE, 32'h0000_0777, resp);
    axi_write(A_NEURON, 32'h0000_00AA, resp, 0, 4'b0001);  // byte strobe: low byte only
    checks++;
    if (cfg.in_w != 26 || cfg.in_h != 12 || cfg.ksize != 5 || !cfg.stride2 || cfg.in_ch != 3 ||
        cfg.out_ch != 16 || cfg.vth != -16'sd86 || cfg.leak != 3 || !cfg.lif || !cfg.first_ts ||
        !cfg.res_en || cfg.out_base != 16'h1234 || cfg.res_base != 13'h777) begin
      failures++; $display("decoded configuration wrong: %p", cfg);
    end
    // each flag on its own
    for (int f = 0; f < 4; f++) begin
      axi_write(A_NEURON, 32'h0000_0010 | (32'h0100_0000 << f), resp);
      checks++;
      if ({cfg.chain, cfg.res_en, cfg.first_ts, cfg.lif} != 4'(1 << f) || cfg.vth != 16'sd16) begin
        failures++; $display("flag %0d decoded as lif %0d first %0d res %0d chain %0d", f, cfg.lif, cfg.first_ts,
                             cfg.res_en, cfg.chain);
      end
    end
    // source base of a chained layer's input
    axi_write(A_SRCBASE, 32'h0000_ABCD, resp);
    expect32("srcbase resp", 32'(resp), 0);
    checks++;
    if (cfg.src_base != 16'hABCD) begin failures++; $display("src_base %h", cfg.src_base); end
    axi_read(A_SRCBASE, d, resp);    expect32("srcbase", d, 32'h0000_ABCD);
    axi_write(A_NEURON, 32'h0703_FFAA, resp);
    axi_read(A_SHAPE, d, resp, 2);   expect32("shape", d, 32'h0015_0C1A);
    axi_read(A_NEURON, d, resp);     expect32("neuron", d, 32'h0703_FFAA);
    axi_read(A_CYCLES, d, resp);     expect32("cycles", d, 1234);
    axi_read(A_STALLS, d, resp, 4);  expect32("stalls", d, 56);
    busy = 1; pp_sel = 1;
    axi_read(A_STATUS, d, resp);     expect32("status", d, 32'h5);
    // start and clear pulses
    axi_write(A_CTRL, 32'h1, resp);
    axi_write(A_CTRL, 32'h2, resp);
    repeat (2) @(negedge clk);
    checks++;
    if (n_start != 1 || n_clear != 1) begin failures++; $display("pulses: start %0d clear %0d", n_start, n_clear); end
    // batch-norm table
    for (int i = 0; i < 64; i++) axi_write(A_BN + 18'(4 * i), {16'(i * 3 + 1), 16'(-i)}, resp);
    for (int i = 0; i < 64; i += 7) begin
      bn_ch = 6'(i); #1;
      checks++;
      if (bn_g != 16'(i * 3 + 1) || bn_h != 16'(-i)) begin failures++; $display("bn %0d: %0d %0d", i, bn_g, bn_h); end
    end
    axi_read(A_BN + 18'd20, d, resp); expect32("bn read", d, {16'd16, 16'(-5)});
    // buffer windows
    axi_write(A_INSPK + 18'h44, 32'hcafe_0001, resp);
    expect32("inspk write", {8'(last_wr.sel), 6'd0, last_wr.addr}, {8'(SEL_INSPK), 24'h44});
    axi_write(A_WEIGHT + 18'h1ffc, 32'hcafe_0002, resp);
    expect32("weight write", {8'(last_wr.sel), 6'd0, last_wr.addr}, {8'(SEL_WEIGHT), 24'h1ffc});
    expect32("weight data", last_wr.wdata, 32'hcafe_0002);
    axi_write(A_RESID + 18'h1fff0, 32'hcafe_0003, resp);
    expect32("resid write", {8'(last_wr.sel), 6'd0, last_wr.addr}, {8'(SEL_RESID), 24'h1fff0});
    axi_read(A_INSPK + 18'h7c, d, resp);     expect32("inspk read", d, mdata(SEL_INSPK, 18'h7c));
    axi_read(A_WEIGHT + 18'h100, d, resp, 3); expect32("weight read", d, mdata(SEL_WEIGHT, 18'h100));
    axi_read(A_OUTPUT + 18'hdffc, d, resp);  expect32("output read", d, mdata(SEL_OUTPUT, 18'hdffc));
    axi_read(A_RESID + 18'h40, d, resp);     expect32("resid read", d, mdata(SEL_RESID, 18'h40));
    expect32("resid read resp", 32'(resp), 0);
    // errors
    axi_write(A_OUTPUT, 32'h1, resp);        expect32("write to output", 32'(resp), 2);
    axi_read(18'h01000, d, resp);            expect32("unmapped read", 32'(resp), 2);
    axi_write(18'h08000, 32'h1, resp, 2);    expect32("unmapped write", 32'(resp), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
