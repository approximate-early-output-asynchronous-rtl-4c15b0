// Workload testbench: the twelve adder configurations of the paper's
// comparison (RTZ and RTO, 0/4/8/12/16/20 approximate bits, WIDTH = 32), each
// in a full eo_adder_stage, each running 1000 random operand pairs through
// the 4-phase handshake with a randomly slow receiver. Every result is checked
// against a model of the approximate sum. For each configuration the
// testbench also prints how often the result differed from the exact sum, and
// checks that the exact configuration never does while every approximate one
// sometimes does, and that back-pressure stalls and carry outputs of 1 occur.
module tb_stage_workloads;
  import dr_pkg::*;

  localparam int W = 32;
  localparam int NCFG = 6;
  localparam int unsigned KS [NCFG] = '{0, 4, 8, 12, 16, 20};
  localparam int unsigned NVEC = 1000;

  logic rst_n [2][NCFG], ackout [2][NCFG], rx_ackout [2][NCFG], done [2][NCFG];
  dr_t [W-1:0] a [2][NCFG], b [2][NCFG], sum [2][NCFG];
  dr_t cout [2][NCFG];
  int checks [2][NCFG], failures [2][NCFG], n_done [2][NCFG], n_stall [2][NCFG];
  int n_slow [2][NCFG], n_ac [2][NCFG], n_co [2][NCFG], n_inexact [2][NCFG];

  for (genvar p = 0; p < 2; p++) begin : g_p
    for (genvar c = 0; c < NCFG; c++) begin : g_c
      localparam protocol_e PR = (p == 0) ? RTZ : RTO;
      eo_adder_stage #(.WIDTH(W), .APPROX_BITS(KS[c]), .PROTOCOL(PR)) dut (
        .rst_n(rst_n[p][c]), .a(a[p][c]), .b(b[p][c]), .ackout(ackout[p][c]),
        .sum(sum[p][c]), .cout(cout[p][c]), .rx_ackout(rx_ackout[p][c])
      );
      stage_env #(.WIDTH(W), .APPROX_BITS(KS[c]), .PROTOCOL(PR), .NVEC(NVEC)) env (
        .rst_n(rst_n[p][c]), .a(a[p][c]), .b(b[p][c]), .ackout(ackout[p][c]),
        .sum(sum[p][c]), .cout(cout[p][c]), .rx_ackout(rx_ackout[p][c]),
        .done(done[p][c]), .checks(checks[p][c]), .failures(failures[p][c]),
        .n_done(n_done[p][c]), .n_stall(n_stall[p][c]), .n_slow_rx(n_slow[p][c]),
        .n_approx_carry(n_ac[p][c]), .n_cout_one(n_co[p][c]), .n_inexact(n_inexact[p][c])
      );
    end
  end

  int total_checks, total_failures;

  task automatic summarize(bit timed_out);
    total_checks = 0; total_failures = int'(timed_out);
    for (int p = 0; p < 2; p++)
      for (int c = 0; c < NCFG; c++) begin
        total_checks += checks[p][c] + 3;
        total_failures += failures[p][c];
        // mechanisms: back-pressure stalls, carries of 1, approximation effect
        if (n_stall[p][c] == 0) total_failures++;
        if (n_co[p][c] == 0) total_failures++;
        if (KS[c] == 0 ? (n_inexact[p][c] != 0) : (n_inexact[p][c] == 0)) total_failures++;
        $display("%s approx=%2d: transactions=%0d stalls=%0d carry_in_one=%0d cout_one=%0d inexact=%0d",
                 p == 0 ? "RTZ" : "RTO", KS[c], n_done[p][c], n_stall[p][c], n_ac[p][c],
                 n_co[p][c], n_inexact[p][c]);
      end
  endtask

  initial begin : watchdog
    #(NVEC * 200 + 1000);
    summarize(1'b1);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end

  initial begin
    bit all_done;
    do begin
      #10;
      all_done = 1;
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < NCFG; c++) if (!done[p][c]) all_done = 0;
    end while (!all_done);
    summarize(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule
