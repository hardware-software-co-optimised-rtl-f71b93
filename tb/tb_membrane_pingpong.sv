// tb_membrane_pingpong: checks that with select 0 reads come from U1 and
// writes go to U2, with select 1 the other way round, over several
// alternating timesteps, and that a write never disturbs the bank being read.
module tb_membrane_pingpong;
  logic clk = 0;
  always #5 clk = ~clk;
  logic sel, rd_en, wr_en;
  logic [10:0] rd_addr, wr_addr;
  logic [127:0] rd_data, wr_data;
  logic [127:0] bank [2][2048];   // reference contents of U1 (0) and U2 (1)
  bit           known [2][2048];
  int checks = 0, failures = 0;

  membrane_pingpong dut (.clk, .sel, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sel = 0; rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    // timestep 0 with sel=0: write words 0..63 into U2; timestep 1 with sel=1:
    // read them back (U2) while writing U1; and so on for 6 timesteps.
    for (int t = 0; t < 6; t++) begin
      sel = t[0];
      for (int a = 0; a < 64; a++) begin
        automatic logic [127:0] v = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk);
        rd_en = 1; rd_addr = 11'(a * 31);
        wr_en = 1; wr_addr = 11'(a * 31); wr_data = v;
        @(posedge clk);
        #1;
        if (known[sel][a*31]) begin
          checks++;
          if (rd_data !== bank[sel][a*31]) begin
            failures++; $display("t%0d addr %0d: read %h expected %h", t, a*31, rd_data, bank[sel][a*31]);
          end
        end
        bank[!sel][a*31] = v;
        known[!sel][a*31] = 1;
      end
    end
    rd_en = 0; wr_en = 0;
    checks++;
    if (checks < 300) begin failures++; $display("too few reads compared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
