// tb_mbqc_digital_system: end-to-end test of the whole design at its
// default size (20 logical qubits, 256-word programs), driven by the photon
// clock only; Xs and Xr come from the clock manager model.
//
// Part 1 loads the paper's worked example (a one-qubit gate U on the upper
// qubit, then a CNOT with the upper qubit as control) into every pair of
// qubits (0,1), (2,3), ... and checks s and b in every round against the
// example's own table.
//
// Part 2 resets the design and runs a random circuit of 40 layers of six
// rounds each. In every layer each qubit takes part in one gate: a wire
// (identity, X measurements), a one-qubit gate U followed by two wire
// rounds, or a CNOT with its upper or lower neighbour, either orientation.
// Program words are built from the paper's patterns, with store requests
// (C[0]) before each U and commutation requests before each CNOT in the
// last round of the previous layer. Expected values come from the closed
// forms of the patterns, not from the program words:
//   wire:  z ^= m0^m2^m4, x ^= m1^m3^m5
//   U:     s1 = m0^z, s2 = m1^x, s3 = m0^m2^z (stored pair),
//          z ^= m0^m2^m4, x ^= m1^m3^m5
//   CNOT:  first z_c ^= z_t, x_t ^= x_c, then (m0..m5 control, m6..m11
//          target) z_c ^= 1^m0^m2^m3^m4^m6^m8, x_c ^= m1^m2^m4^m5,
//          z_t ^= m6^m8^m10, x_t ^= m1^m2^m7^m9^m11
// b is checked for every qubit at every layer end and s in every round.
// Half-way the enable pin is dropped for three cycles while pulses arrive;
// they must be ignored and b must hold. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
`timescale 1ns / 1ps
module tb_mbqc_digital_system;
  import mbqc_pkg::*;

  localparam int N      = 20;
  localparam int DEPTH  = 256;
  localparam int LAYERS = 40;
  localparam int RPL    = 6;             // rounds per layer
  localparam real T     = 1000.0 / 190.0;

  logic xp = 1'b0, rst = 1'b0, enable = 1'b0, locked;
  logic [N-1:0] outcome = '0, s, prog_we = '0;
  ops_t [N-1:0] b;
  logic [7:0]  prog_waddr = '0;
  logic [15:0] prog_wdata = '0;

  int checks = 0, failures = 0;

  mbqc_digital_system dut (
    .xp, .rst, .enable, .locked, .outcome, .s, .b,
    .prog_we, .prog_waddr, .prog_wdata
  );

  always #(T / 2.0) xp = ~xp;

  initial begin
    #400us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  task automatic expect_bits(input logic [1:0] got, input logic [1:0] exp, input string what,
                             input int q, input int k);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s qubit %0d round %0d: got %b expected %b", what, q, k, got, exp);
    end
  endtask

  task automatic write_word(input int q, input int a, input logic [15:0] w);
    @(negedge xp);
    prog_we    = '0;
    prog_we[q] = 1'b1;
    prog_waddr = 8'(a);
    prog_wdata = w;
    @(negedge xp) prog_we = '0;
  endtask

  // One measurement round: the photons arrive after the Xp edge, the
  // pulses are latched, Xs and Xr pass, and outputs are sampled just before
  // the next Xp edge.
  task automatic do_round(input logic [N-1:0] m);
    @(posedge xp);
    #0.5 outcome = m;
    #1.0 outcome = '0;
    #3.5;
  endtask

  task automatic reset_and_lock();
    rst = 1'b0;
    #0.2 rst = 1'b1;
    enable = 1'b0;
    repeat (2) @(negedge xp);
    rst = 1'b0;
    repeat (10) @(negedge xp);
    checks++;
    if (!locked) begin failures++; $display("FAIL clock manager not locked"); end
  endtask

  // ---------------------------------------------------------- part 1 data
  localparam logic [15:0] P0 [10] = '{16'h0302, 16'h0510, 16'h0342, 16'h3010, 16'h0003,
                                      16'h0010, 16'ha013, 16'h0002, 16'h0012, 16'h0010};
  localparam logic [15:0] P1 [10] = '{16'h0002, 16'h0010, 16'h0002, 16'h5010, 16'h0002,
                                      16'h0030, 16'h0022, 16'h0010, 16'h0002, 16'h0010};
  localparam logic M0 [10] = '{0, 1, 1, 0, 1, 0, 0, 1, 1, 1};
  localparam logic M1 [10] = '{0, 1, 0, 1, 0, 1, 0, 1, 0, 0};
  localparam logic S0 [10] = '{0, 1, 1, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [1:0] B0 [10] = '{2'b00, 2'b10, 2'b11, 2'b11, 2'b10,
                                     2'b10, 2'b10, 2'b10, 2'b01, 2'b11};
  localparam logic [1:0] B1 [10] = '{2'b00, 2'b10, 2'b10, 2'b00, 2'b10,
                                     2'b00, 2'b00, 2'b10, 2'b10, 2'b10};

  // ---------------------------------------------------------- part 2 data
  typedef enum logic [2:0] {G_WIRE, G_U, G_CTRL_UP, G_CTRL_DN, G_TGT_UP, G_TGT_DN} role_t;
  // G_CTRL_UP: control whose target is below it (partner has index +1).
  // G_CTRL_DN: control whose target is above it (partner has index -1).
  // G_TGT_UP:  target whose control is above it; G_TGT_DN: control below.
  role_t role [LAYERS][N];
  logic  meas [LAYERS][RPL][N];

  // Mechanism counters.
  int n_store_nonzero = 0, n_corr_ctrl_up = 0, n_corr_ctrl_dn = 0, n_corr_tgt_up = 0,
      n_corr_tgt_dn = 0, n_const_add = 0, n_s_high = 0, n_latch_clear = 0, n_pause = 0,
      n_example = 0;

  function automatic logic [15:0] word(role_t r, int k);
    case (r)
      G_WIRE:    return k[0] ? 16'h0010 : 16'h0002;
      G_U:       case (k)
                   0: return 16'h0302;
                   1: return 16'h0510;
                   2: return 16'h0342;
                   3: return 16'h0010;
                   4: return 16'h0002;
                   default: return 16'h0010;
                 endcase
      G_CTRL_UP: case (k)
                   0: return 16'h0003;
                   1: return 16'h0010;
                   2: return 16'ha013;
                   3: return 16'h0002;
                   4: return 16'h0012;
                   default: return 16'h0010;
                 endcase
      G_CTRL_DN: case (k)
                   0: return 16'h0006;
                   1: return 16'h0010;
                   2: return 16'ha016;
                   3: return 16'h0002;
                   4: return 16'h0012;
                   default: return 16'h0010;
                 endcase
      G_TGT_UP:  case (k)
                   0: return 16'h0002;
                   1: return 16'h0030;
                   2: return 16'h0022;
                   3: return 16'h0010;
                   4: return 16'h0002;
                   default: return 16'h0010;
                 endcase
      default:   case (k)   // G_TGT_DN
                   0: return 16'h0002;
                   1: return 16'h0018;
                   2: return 16'h000a;
                   3: return 16'h0010;
                   4: return 16'h0002;
                   default: return 16'h0010;
                 endcase
    endcase
  endfunction

  // Request bits for the last round of a layer, by the next layer's role.
  function automatic logic [15:0] boundary(role_t next);
    case (next)
      G_U:       return 16'h0800;   // C = 00001 store
      G_CTRL_UP: return 16'h3000;   // C = 00110 correct, control, partner below
      G_CTRL_DN: return 16'h7000;   // C = 01110 correct, control, partner above
      G_TGT_UP:  return 16'h5000;   // C = 01010 correct, target, partner above
      G_TGT_DN:  return 16'h1000;   // C = 00010 correct, target, partner below
      default:   return 16'h0000;
    endcase
  endfunction

  // ------------------------------------------------------------- stimulus
  initial begin
    logic [N-1:0] mv, prev_m;
    ops_t exp_b [N];
    ops_t stored [N];

    // ===== Part 1: the worked example on every pair of qubits.
    reset_and_lock();
    for (int q = 0; q < N; q++)
      for (int k = 0; k < 12; k++)
        write_word(q, k, (k < 10) ? ((q % 2 == 0) ? P0[k] : P1[k]) : 16'h0000);
    @(negedge xp) enable = 1'b1;
    for (int k = 0; k < 10; k++) begin
      for (int q = 0; q < N; q++) mv[q] = (q % 2 == 0) ? M0[k] : M1[k];
      do_round(mv);
      for (int q = 0; q < N; q++) begin
        expect_bits({1'b0, s[q]}, {1'b0, (q % 2 == 0) ? S0[k] : 1'b0}, "example s", q, k);
        expect_bits(b[q], (q % 2 == 0) ? B0[k] : B1[k], "example b", q, k);
      end
    end
    n_example++;
    @(negedge xp) enable = 1'b0;

    // ===== Part 2: random layered circuit.
    for (int l = 0; l < LAYERS; l++) begin
      int q, pick;
      q = 0;
      while (q < N) begin
        pick = $urandom_range(0, 5);
        if (q < N - 1 && pick < 2) begin
          if (pick == 0) begin role[l][q] = G_CTRL_UP; role[l][q+1] = G_TGT_UP; end
          else           begin role[l][q] = G_TGT_DN;  role[l][q+1] = G_CTRL_DN; end
          q += 2;
        end else begin
          role[l][q] = (pick < 4) ? G_U : G_WIRE;
          q += 1;
        end
      end
      for (int k = 0; k < RPL; k++)
        for (int qq = 0; qq < N; qq++) meas[l][k][qq] = 1'($urandom);
    end
    reset_and_lock();
    for (int q = 0; q < N; q++)
      for (int l = 0; l < LAYERS; l++)
        for (int k = 0; k < RPL; k++)
          write_word(q, l * RPL + k,
                     word(role[l][q], k) |
                     ((k == RPL - 1 && l < LAYERS - 1) ? boundary(role[l+1][q]) : 16'h0000));

    for (int q = 0; q < N; q++) begin exp_b[q] = '0; stored[q] = '0; end
    prev_m = '0;
    @(negedge xp) enable = 1'b1;
    for (int l = 0; l < LAYERS; l++) begin
      ops_t start [N];
      // Commutation corrections and stores at the layer boundary.
      for (int q = 0; q < N; q++) start[q] = exp_b[q];
      for (int q = 0; q < N; q++) begin
        case (role[l][q])
          G_U: begin
            stored[q] = exp_b[q];
            if (exp_b[q] != 0) n_store_nonzero++;
          end
          G_CTRL_UP: begin start[q].z ^= exp_b[q+1].z; n_corr_ctrl_up++; end
          G_CTRL_DN: begin start[q].z ^= exp_b[q-1].z; n_corr_ctrl_dn++; end
          G_TGT_UP:  begin start[q].x ^= exp_b[q-1].x; n_corr_tgt_up++; end
          G_TGT_DN:  begin start[q].x ^= exp_b[q+1].x; n_corr_tgt_dn++; end
          default: ;
        endcase
      end
      for (int k = 0; k < RPL; k++) begin
        for (int q = 0; q < N; q++) begin
          mv[q] = meas[l][k][q];
          if (prev_m[q] && !mv[q]) n_latch_clear++;
        end
        prev_m = mv;
        do_round(mv);
        for (int q = 0; q < N; q++) begin
          logic es;
          es = 1'b0;
          if (role[l][q] == G_U) begin
            case (k)
              0: es = meas[l][0][q] ^ stored[q].z;
              1: es = meas[l][1][q] ^ stored[q].x;
              2: es = meas[l][0][q] ^ meas[l][2][q] ^ stored[q].z;
              default: es = 1'b0;
            endcase
          end
          if (es) n_s_high++;
          expect_bits({1'b0, s[q]}, {1'b0, es}, "s", q, l * RPL + k);
        end
      end
      // Closed-form byproduct operators at the end of the layer.
      for (int q = 0; q < N; q++) begin
        ops_t e;
        logic [5:0] m, t;
        e = start[q];
        for (int k = 0; k < RPL; k++) m[k] = meas[l][k][q];
        case (role[l][q])
          G_WIRE, G_U: begin
            e.z ^= m[0] ^ m[2] ^ m[4];
            e.x ^= m[1] ^ m[3] ^ m[5];
          end
          G_CTRL_UP, G_CTRL_DN: begin
            for (int k = 0; k < RPL; k++) t[k] = meas[l][k][(role[l][q] == G_CTRL_UP) ? q + 1 : q - 1];
            e.z ^= 1'b1 ^ m[0] ^ m[2] ^ m[3] ^ m[4] ^ t[0] ^ t[2];
            e.x ^= m[1] ^ m[2] ^ m[4] ^ m[5];
            n_const_add++;
          end
          default: begin   // targets
            for (int k = 0; k < RPL; k++) t[k] = meas[l][k][(role[l][q] == G_TGT_UP) ? q - 1 : q + 1];
            e.z ^= m[0] ^ m[2] ^ m[4];
            e.x ^= t[1] ^ t[2] ^ m[1] ^ m[3] ^ m[5];
          end
        endcase
        exp_b[q] = e;
      end
      for (int q = 0; q < N; q++) expect_bits(b[q], exp_b[q], "layer-end b", q, l * RPL + RPL - 1);

      // Half-way: drop enable for three cycles with pulses arriving.
      if (l == LAYERS / 2) begin
        enable = 1'b0;   // before the next Xp edge
        for (int k = 0; k < 3; k++) begin
          do_round(N'($urandom));
          for (int q = 0; q < N; q++) expect_bits(b[q], exp_b[q], "b held while disabled", q, -1);
        end
        enable = 1'b1;
        prev_m = '0;
        n_pause++;
      end
    end
    @(negedge xp) enable = 1'b0;

    // Every mechanism must have happened at least once.
    $display("mechanisms: example=%0d store_nonzero=%0d corr_ctrl_up=%0d corr_ctrl_dn=%0d corr_tgt_up=%0d corr_tgt_dn=%0d const_add=%0d s_high=%0d latch_clear=%0d pause=%0d",
             n_example, n_store_nonzero, n_corr_ctrl_up, n_corr_ctrl_dn, n_corr_tgt_up, n_corr_tgt_dn,
             n_const_add, n_s_high, n_latch_clear, n_pause);
    checks++; if (n_store_nonzero == 0) begin failures++; $display("FAIL no store of a nonzero pair"); end
    checks++; if (n_corr_ctrl_up == 0)  begin failures++; $display("FAIL no control-above correction"); end
    checks++; if (n_corr_ctrl_dn == 0)  begin failures++; $display("FAIL no control-below correction"); end
    checks++; if (n_corr_tgt_up == 0)   begin failures++; $display("FAIL no target correction (partner above)"); end
    checks++; if (n_corr_tgt_dn == 0)   begin failures++; $display("FAIL no target correction (partner below)"); end
    checks++; if (n_const_add == 0)     begin failures++; $display("FAIL no constant addition"); end
    checks++; if (n_s_high == 0)        begin failures++; $display("FAIL no adaptive setting of 1"); end
    checks++; if (n_latch_clear == 0)   begin failures++; $display("FAIL latch never cleared after a 1"); end
    checks++; if (n_pause == 0)         begin failures++; $display("FAIL enable never paused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
