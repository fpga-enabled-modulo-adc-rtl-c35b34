// tb_fold_fsm: self-checking testbench of the folding-controller FSM.
//
// Drives random [B2 B1 B0] status words (with runs, so WAIT dwells and
// repeated folds occur) and random changes of q, and compares state, C_f,
// cf_update and cf_sat every cycle with a reference model written from the
// transition table: KEEP -x01-> DECREASE, KEEP -x10-> INCREASE,
// KEEP -x00/x11-> KEEP, INCREASE/DECREASE -> WAIT, WAIT -1xx-> WAIT,
// WAIT -0xx-> KEEP, with C_f saturating at [-2^(13-q), 2^(13-q)-1].
// Directed parts check the one-cycle step latency and both saturation limits.
module tb_fold_fsm;
  import modulo_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  fold_status_t status;
  logic [Q_W-1:0] q;
  logic signed [CF_W-1:0] cf;
  fold_state_e state;
  logic cf_update, cf_sat;
  int checks = 0, failures = 0;

  fold_fsm dut (.*);

  always #2.5 clk = ~clk;

  // reference model
  int m_state;  // 0 keep 1 inc 2 dec 3 wait
  int m_cf;
  bit m_upd, m_sat;
  int n_inc = 0, n_dec = 0, n_waitdwell = 0, n_sat = 0;

  function automatic int lim_hi(int qq); return (1 << (13 - qq)) - 1; endfunction
  function automatic int lim_lo(int qq); return -(1 << (13 - qq)); endfunction

  task automatic model_step(fold_status_t s, int qq);
    m_upd = 0; m_sat = 0;
    case (m_state)
      0: begin
        if (s.b1 == 0 && s.b0 == 1) begin
          m_state = 2;
          if (m_cf > lim_lo(qq)) begin m_cf--; m_upd = 1; end else m_sat = 1;
        end else if (s.b1 == 1 && s.b0 == 0) begin
          m_state = 1;
          if (m_cf < lim_hi(qq)) begin m_cf++; m_upd = 1; end else m_sat = 1;
        end
      end
      1, 2: m_state = 3;
      default: if (s.b2 == 0) m_state = 0; else n_waitdwell++;
    endcase
  endtask

  task automatic check(string what);
    checks++;
    if (int'(state) != m_state || int'(cf) != m_cf || cf_update != m_upd || cf_sat != m_sat) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %s t=%0t: state %0d/%0d cf %0d/%0d upd %0b/%0b sat %0b/%0b", what, $time,
                 state, m_state, cf, m_cf, cf_update, m_upd, cf_sat, m_sat);
    end
  endtask

  task automatic cycle(fold_status_t s, int qq);
    status = s; q = Q_W'(qq);
    @(posedge clk);
    model_step(s, qq);
    #1;
    if (m_state == 1 && m_upd) n_inc++;
    if (m_state == 2 && m_upd) n_dec++;
    if (m_sat) n_sat++;
    check("random");
  endtask

  initial begin
    #200000;
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fold_status_t s;
    int qq;
    status = '0; q = 4'd7;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    m_state = 0; m_cf = 0; m_upd = 0; m_sat = 0;
    #1 check("reset");

    // Directed: one decrease from KEEP appears on the very next edge.
    cycle('{b2: 1'b0, b1: 1'b0, b0: 1'b1}, 7);
    checks++;
    if (!(cf == -1 && state == ST_DECREASE && cf_update)) begin
      failures++; $display("step latency wrong: cf=%0d state=%0d", cf, state);
    end
    cycle('{b2: 1'b1, b1: 1'b0, b0: 1'b1}, 7);  // -> WAIT regardless
    cycle('{b2: 1'b1, b1: 1'b0, b0: 1'b1}, 7);  // stays in WAIT (1xx)
    cycle('{b2: 1'b0, b1: 1'b0, b0: 1'b0}, 7);  // -> KEEP (0xx)
    checks++;
    if (state != ST_KEEP || cf != -1) begin failures++; $display("WAIT exit wrong"); end

    // Directed: saturation at q = 13 (range [-1, 0]).
    for (int i = 0; i < 6; i++) cycle('{b2: 1'b0, b1: 1'b0, b0: 1'b1}, 13);
    checks++;
    if (cf != -1) begin failures++; $display("low saturation wrong cf=%0d", cf); end
    for (int i = 0; i < 12; i++) cycle('{b2: 1'b0, b1: 1'b1, b0: 1'b0}, 13);
    checks++;
    if (cf != 0) begin failures++; $display("high saturation wrong cf=%0d", cf); end

    // Random runs.
    qq = 7;
    for (int i = 0; i < 20000; i++) begin
      if ($urandom_range(0, 999) == 0) qq = $urandom_range(9, 13);
      if ($urandom_range(0, 3) == 0) s = fold_status_t'($urandom_range(0, 7));
      cycle(s, qq);
    end

    checks++;
    if (n_inc == 0 || n_dec == 0 || n_waitdwell == 0 || n_sat == 0) begin
      failures++;
      $display("coverage hole: inc=%0d dec=%0d wait=%0d sat=%0d", n_inc, n_dec, n_waitdwell, n_sat);
    end
    $display("coverage: inc=%0d dec=%0d wait-dwell=%0d sat=%0d", n_inc, n_dec, n_waitdwell, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
