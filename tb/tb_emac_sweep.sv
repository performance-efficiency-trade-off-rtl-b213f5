// tb_emac_sweep: every EMAC configuration of the accuracy/efficiency study.
//
// The design is evaluated at 5 to 8 bits: posit (n, es) in
// {(8,2) (7,2) (8,1) (6,2) (7,1) (8,0) (6,1) (7,0) (6,0) (5,1) (5,0)},
// float (n, we) in {(8,4) (7,4) (6,4) (8,3) (7,3) (6,3) (5,3)} and fixed
// point (n, Q) with Q from 1 to n-2.  One emac_cfg_check per configuration
// runs 150 random dot products through a neuron of that size and checks
// every result and its latency against an exact reference.  The run ends
// when all are done; a watchdog ends it if one hangs.
module tb_emac_sweep;
  import dp_pkg::*;

  localparam int C = 36;
  logic clk = 1'b0;
  int   chk[C], fl[C];
  logic [C-1:0] dn;

  always #5 clk = ~clk;

  emac_cfg_check #(.FMT(FMT_POSIT), .N(8), .ES(2)) u_c0 (.clk, .checks(chk[0]), .failures(fl[0]), .done(dn[0]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(7), .ES(2)) u_c1 (.clk, .checks(chk[1]), .failures(fl[1]), .done(dn[1]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(8), .ES(1)) u_c2 (.clk, .checks(chk[2]), .failures(fl[2]), .done(dn[2]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(6), .ES(2)) u_c3 (.clk, .checks(chk[3]), .failures(fl[3]), .done(dn[3]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(7), .ES(1)) u_c4 (.clk, .checks(chk[4]), .failures(fl[4]), .done(dn[4]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(8), .ES(0)) u_c5 (.clk, .checks(chk[5]), .failures(fl[5]), .done(dn[5]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(6), .ES(1)) u_c6 (.clk, .checks(chk[6]), .failures(fl[6]), .done(dn[6]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(7), .ES(0)) u_c7 (.clk, .checks(chk[7]), .failures(fl[7]), .done(dn[7]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(6), .ES(0)) u_c8 (.clk, .checks(chk[8]), .failures(fl[8]), .done(dn[8]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(5), .ES(1)) u_c9 (.clk, .checks(chk[9]), .failures(fl[9]), .done(dn[9]));
  emac_cfg_check #(.FMT(FMT_POSIT), .N(5), .ES(0)) u_c10 (.clk, .checks(chk[10]), .failures(fl[10]), .done(dn[10]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(8), .WE(4)) u_c11 (.clk, .checks(chk[11]), .failures(fl[11]), .done(dn[11]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(7), .WE(4)) u_c12 (.clk, .checks(chk[12]), .failures(fl[12]), .done(dn[12]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(6), .WE(4)) u_c13 (.clk, .checks(chk[13]), .failures(fl[13]), .done(dn[13]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(8), .WE(3)) u_c14 (.clk, .checks(chk[14]), .failures(fl[14]), .done(dn[14]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(7), .WE(3)) u_c15 (.clk, .checks(chk[15]), .failures(fl[15]), .done(dn[15]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(6), .WE(3)) u_c16 (.clk, .checks(chk[16]), .failures(fl[16]), .done(dn[16]));
  emac_cfg_check #(.FMT(FMT_FLOAT), .N(5), .WE(3)) u_c17 (.clk, .checks(chk[17]), .failures(fl[17]), .done(dn[17]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(1)) u_c18 (.clk, .checks(chk[18]), .failures(fl[18]), .done(dn[18]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(2)) u_c19 (.clk, .checks(chk[19]), .failures(fl[19]), .done(dn[19]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(3)) u_c20 (.clk, .checks(chk[20]), .failures(fl[20]), .done(dn[20]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(4)) u_c21 (.clk, .checks(chk[21]), .failures(fl[21]), .done(dn[21]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(5)) u_c22 (.clk, .checks(chk[22]), .failures(fl[22]), .done(dn[22]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(8), .Q(6)) u_c23 (.clk, .checks(chk[23]), .failures(fl[23]), .done(dn[23]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(7), .Q(1)) u_c24 (.clk, .checks(chk[24]), .failures(fl[24]), .done(dn[24]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(7), .Q(2)) u_c25 (.clk, .checks(chk[25]), .failures(fl[25]), .done(dn[25]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(7), .Q(3)) u_c26 (.clk, .checks(chk[26]), .failures(fl[26]), .done(dn[26]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(7), .Q(4)) u_c27 (.clk, .checks(chk[27]), .failures(fl[27]), .done(dn[27]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(7), .Q(5)) u_c28 (.clk, .checks(chk[28]), .failures(fl[28]), .done(dn[28]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(6), .Q(1)) u_c29 (.clk, .checks(chk[29]), .failures(fl[29]), .done(dn[29]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(6), .Q(2)) u_c30 (.clk, .checks(chk[30]), .failures(fl[30]), .done(dn[30]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(6), .Q(3)) u_c31 (.clk, .checks(chk[31]), .failures(fl[31]), .done(dn[31]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(6), .Q(4)) u_c32 (.clk, .checks(chk[32]), .failures(fl[32]), .done(dn[32]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(5), .Q(1)) u_c33 (.clk, .checks(chk[33]), .failures(fl[33]), .done(dn[33]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(5), .Q(2)) u_c34 (.clk, .checks(chk[34]), .failures(fl[34]), .done(dn[34]));
  emac_cfg_check #(.FMT(FMT_FIXED), .N(5), .Q(3)) u_c35 (.clk, .checks(chk[35]), .failures(fl[35]), .done(dn[35]));

  initial begin
    int checks, failures;
    wait (dn == '1);
    checks = 0;
    failures = 0;
    for (int i = 0; i < C; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("configurations=%0d", C);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    int checks;
    repeat (20000) @(posedge clk);
    checks = 0;
    for (int i = 0; i < C; i++) checks += chk[i];
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, 1);
    $finish;
  end
endmodule
