// rate_ctrl_tb -- self-checking test of the multirate strobe generator.
//
// A software counter of enabled cycles, kept independently in the testbench, predicts
// each strobe: the input strobe on enabled cycle 0 of every 128, the half-band-1 strobe
// on enabled cycles 1 and 65, the half-band-2 strobe on 3, 35, 67 and 99. The enable
// is dropped at random; no strobe may appear on a cycle with en low. Over the run the
// strobe counts must give the rates fs, 2 fs and 4 fs against 128 fs.
module rate_ctrl_tb;
  localparam int PERIOD = 128;
  localparam int NEN    = 20 * PERIOD;     // enabled cycles to run

  logic clk = 1'b0;
  logic rst, en, ce_in, hb1_ce, hb2_ce;
  int checks = 0, failures = 0;
  int nen = 0, n_in = 0, n_hb1 = 0, n_hb2 = 0, n_stall = 0;

  always #5 clk = ~clk;

  rate_ctrl dut (   // default PERIOD = 128
    .clk(clk), .rst(rst), .en(en), .ce_in(ce_in), .hb1_ce(hb1_ce), .hb2_ce(hb2_ce)
  );

  initial begin
    repeat (20 * NEN) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample just before each edge
  always @(posedge clk) begin
    if (!rst) begin
      int p;
      bit e_in, e_hb1, e_hb2;
      p     = nen % PERIOD;
      e_in  = en && (p == 0);
      e_hb1 = en && (p == 1 || p == 65);
      e_hb2 = en && (p == 3 || p == 35 || p == 67 || p == 99);
      checks++;
      if (ce_in != e_in || hb1_ce != e_hb1 || hb2_ce != e_hb2) begin
        failures++;
        if (failures < 10)
          $display("enabled cycle %0d en %b: strobes %b%b%b, expected %b%b%b", nen, en,
                   ce_in, hb1_ce, hb2_ce, e_in, e_hb1, e_hb2);
      end
      if (ce_in)  n_in++;
      if (hb1_ce) n_hb1++;
      if (hb2_ce) n_hb2++;
      if (en) nen++;
      else n_stall++;
    end
  end

  initial begin
    rst = 1'b1; en = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    while (nen < NEN) begin
      en = ($urandom % 4 != 0);
      @(posedge clk); #1;
    end
    en = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (n_in != NEN / PERIOD || n_hb1 != 2 * NEN / PERIOD || n_hb2 != 4 * NEN / PERIOD
        || n_stall == 0) begin
      failures++;
      $display("strobes %0d/%0d/%0d in %0d enabled cycles, %0d stalls", n_in, n_hb1, n_hb2,
               nen, n_stall);
    end
    $display("enabled cycles %0d, stalled %0d, strobes %0d/%0d/%0d", nen, n_stall, n_in,
             n_hb1, n_hb2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
