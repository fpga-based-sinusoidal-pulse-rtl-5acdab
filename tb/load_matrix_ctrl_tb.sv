// load_matrix_ctrl_tb: checks priority load switching with three loads
// (TV 100 W, CFL 18 W, pump 186 W, i.e. 1/4 HP) and a 4-clock step.
// A reference model in the testbench keeps its own count of switched-on
// ranks and applies the same rule once per step (shed the lowest-ranked
// load if the sum exceeds the available power, else add the next one if it
// fits); the outputs are compared every clock. Scenarios: power rising in
// stages (loads come on one by one in priority order), power falling
// (loads go off in reverse order), a changed priority order, and random
// power levels. The step spacing itself is also checked.
module load_matrix_ctrl_tb;
  localparam int NL = 3;
  localparam int STEP = 4;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  logic [15:0] p_avail;
  logic [15:0] load_pw [NL];
  logic [1:0]  prio [NL];
  logic [NL-1:0] load_on;
  logic [1:0]  n_on;
  logic step, sw_on, sw_off;
  int ons = 0, offs = 0;

  load_matrix_ctrl #(.NUM_LOADS(NL), .PWR_W(16), .STEP_CYCLES(STEP)) dut (
    .clk, .rst_n, .p_avail, .load_pw, .prio, .load_on, .n_on, .step, .sw_on, .sw_off);

  // reference model
  int m_n = 0, clk_count = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      m_n = 0; clk_count = 0;
    end else begin
      int sum, nxt;
      clk_count++;
      if (clk_count % STEP == 0) begin
        sum = 0;
        for (int r = 0; r < m_n; r++) sum += int'(load_pw[prio[r]]);
        nxt = (m_n < NL) ? int'(load_pw[prio[m_n]]) : 0;
        if (m_n > 0 && sum > int'(p_avail))              begin m_n--; offs++; end
        else if (m_n < NL && sum + nxt <= int'(p_avail)) begin m_n++; ons++;  end
      end
    end
  end

  // compare after every edge
  always @(negedge clk) if (rst_n) begin
    logic [NL-1:0] exp_on;
    exp_on = '0;
    for (int r = 0; r < m_n; r++) exp_on[prio[r]] = 1'b1;
    checks++;
    if (load_on != exp_on || int'(n_on) != m_n) begin
      failures++;
      $display("FAIL t=%0t: p_avail=%0d load_on=%b expected %b", $time, p_avail, load_on, exp_on);
    end
    checks++;
    if (step != ((clk_count + 1) % STEP == 0)) begin
      failures++; $display("FAIL: step strobe at clock %0d", clk_count);
    end
  end

  task automatic hold(input int w, input int steps);
    p_avail <= 16'(w);
    repeat (steps * STEP) @(posedge clk);
    #1;
  endtask

  initial begin
    load_pw[0] = 100; load_pw[1] = 18; load_pw[2] = 186;
    prio[0] = 2'd1; prio[1] = 2'd0; prio[2] = 2'd2;   // CFL, TV, pump
    p_avail = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    hold(0, 3);
    hold(20, 3);     // CFL only
    checks++; if (load_on != 3'b010) begin failures++; $display("FAIL: 20 W should run the CFL only"); end
    hold(120, 3);    // CFL + TV
    checks++; if (load_on != 3'b011) begin failures++; $display("FAIL: 120 W should run CFL and TV"); end
    hold(400, 3);    // all
    checks++; if (load_on != 3'b111) begin failures++; $display("FAIL: 400 W should run all loads"); end
    hold(200, 1);    // one step: pump off first
    checks++; if (load_on != 3'b011) begin failures++; $display("FAIL: pump must go first"); end
    hold(10, 1);     // TV next
    checks++; if (load_on != 3'b010) begin failures++; $display("FAIL: TV must go second"); end
    hold(10, 2);
    checks++; if (load_on != 3'b000) begin failures++; $display("FAIL: CFL must go last"); end
    prio[0] = 2'd2; prio[1] = 2'd1; prio[2] = 2'd0;   // pump first
    hold(200, 3);    // pump (186 W) on; CFL would make 204 W
    checks++; if (load_on != 3'b100) begin failures++; $display("FAIL: pump only at 200 W"); end
    hold(210, 3);
    checks++; if (load_on != 3'b110) begin failures++; $display("FAIL: pump then CFL at 210 W"); end
    for (int n = 0; n < 200; n++) hold($urandom_range(0, 350), $urandom_range(1, 3));
    checks++;
    if (ons == 0 || offs == 0) begin failures++; $display("FAIL: no switching seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
