// source_status_tb: checks the source status bits at and around every limit
// of the status table (PV 12 V; battery 10.1 V and 13.8 V; charge cut-off
// 13.4 V; grid and generator 198 V and 242 V) and on random voltages, one
// clock after the inputs change. Limits are written here as literals.
module source_status_tb;
  import spwm_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  logic [15:0] v_pv, v_bat;
  logic [11:0] v_grid, v_dg;
  src_status_t st;

  source_status dut (.clk, .rst_n, .v_pv_mv(v_pv), .v_bat_mv(v_bat),
                     .v_grid_dv(v_grid), .v_dg_dv(v_dg), .status(st));

  task automatic apply(input int pv, bat, grid, dg);
    bit e_pv, e_bat, e_full, e_grid, e_dg;
    v_pv <= 16'(pv); v_bat <= 16'(bat); v_grid <= 12'(grid); v_dg <= 12'(dg);
    @(posedge clk); #1;
    e_pv   = pv >= 12000;
    e_bat  = bat >= 10100 && bat <= 13800;
    e_full = bat >= 13400;
    e_grid = grid >= 1980 && grid <= 2420;
    e_dg   = dg >= 1980 && dg <= 2420;
    checks++;
    if (st.pv_ok != e_pv || st.bat_ok != e_bat || st.bat_full != e_full ||
        st.grid_ok != e_grid || st.dg_ok != e_dg) begin
      failures++;
      $display("FAIL: pv=%0d bat=%0d grid=%0d dg=%0d -> %b", pv, bat, grid, dg, st);
    end
  endtask

  initial begin
    static int pv_pts[4]   = '{11999, 12000, 12001, 0};
    static int bat_pts[8]  = '{10099, 10100, 10101, 13399, 13400, 13800, 13801, 0};
    static int ac_pts[6]   = '{1979, 1980, 2200, 2420, 2421, 0};
    v_pv = 0; v_bat = 0; v_grid = 0; v_dg = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    foreach (pv_pts[i]) foreach (bat_pts[j]) apply(pv_pts[i], bat_pts[j], ac_pts[(i+j)%6], ac_pts[(i*3+j)%6]);
    foreach (ac_pts[i]) foreach (ac_pts[j]) apply(12000, 12000, ac_pts[i], ac_pts[j]);
    for (int n = 0; n < 300; n++)
      apply($urandom_range(9000, 15000), $urandom_range(9000, 15000),
            $urandom_range(1800, 2600), $urandom_range(1800, 2600));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
