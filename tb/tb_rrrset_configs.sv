// tb_rrrset_configs: runs the cache array in the cache geometries whose tag
// timing the original evaluation tabulates (1, 2, 4 and 8 MiB, 8 and 16
// ways, 64-byte blocks, 48-bit addresses) and, at the default 1 MiB 8-way
// geometry, at every split point from 1 to 10 low-order bits. Each
// configuration is a cache_env checking its own responses; all split-point
// environments see the same access stream, and the bench prints the share
// of tag cells each one reads compared with a full-tag compare. It fails if
// any environment reports a failure or misses a mechanism.
module tb_rrrset_configs;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 7, NSPLIT = 10;
  localparam int CW [NCFG] = '{16, 8, 16, 8, 16, 8, 16};
  localparam int CS [NCFG] = '{1024, 4096, 2048, 8192, 4096, 16384, 8192};

  logic   done [NCFG + NSPLIT];
  int     ck [NCFG + NSPLIT], fl [NCFG + NSPLIT], mm [NCFG + NSPLIT];
  longint br [NCFG + NSPLIT], bf [NCFG + NSPLIT];

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    cache_env #(.WAYS(CW[i]), .SETS(CS[i]), .LO_W(4), .NOPS(1500), .SEED(32'h9E37_79B9 + i)) u_env (
      .clk, .rst_n, .done(done[i]), .checks(ck[i]), .failures(fl[i]),
      .bits_read(br[i]), .bits_full(bf[i]), .mech_missing(mm[i]));
  end
  for (genvar m = 1; m <= NSPLIT; m++) begin : g_split
    cache_env #(.WAYS(8), .SETS(2048), .LO_W(m), .NOPS(1500), .SEED(32'h2545_F491)) u_env (
      .clk, .rst_n, .done(done[NCFG+m-1]), .checks(ck[NCFG+m-1]), .failures(fl[NCFG+m-1]),
      .bits_read(br[NCFG+m-1]), .bits_full(bf[NCFG+m-1]), .mech_missing(mm[NCFG+m-1]));
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      @(negedge clk);
      all = 1'b1;
      for (int i = 0; i < NCFG + NSPLIT; i++) if (!done[i]) all = 1'b0;
    end while (!all);
    for (int i = 0; i < NCFG + NSPLIT; i++) begin
      checks += ck[i];
      failures += fl[i];
      checks++;
      if (mm[i] != 0) begin
        failures++;
        $display("environment %0d never exercised a mechanism", i);
      end
    end
    $display("split point sweep (1 MiB, 8 ways):");
    for (int m = 1; m <= NSPLIT; m++)
      $display("  %2d low bits: %5.1f%% of full-compare tag cells read", m,
               100.0 * real'(br[NCFG+m-1]) / real'(bf[NCFG+m-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
