// tb_pim_cmd_scheduler: timing rules and arbitration of pim_cmd_scheduler.
//
// Part 1 feeds one stream with the nine commands of one update column and
// checks the exact issue cycles worked out by hand from tCCD_L = 6 and
// tPIM = 5: 0, 6, 12, 13, 19, 24, 30, 36, 41.
// Part 2 feeds all sixteen streams (4 ranks x 4 bank groups) with random
// command lists while the host injects random commands. Every grant is
// logged and checked afterwards: one per cycle, none while the host holds
// the bus, the command appears on the pins one cycle later with the right
// chip select, column commands of a bank group >= tCCD_L apart and of a
// rank >= tCCD_S apart, arithmetic of a bank group >= tPIM apart, and every
// register a command uses is ready (tCCD_L after a read into it, tPIM
// after an arithmetic result). Every kind of wait must have happened.
module tb_pim_cmd_scheduler;
  import gradpim_pkg::*;

  localparam int RANKS = 4, BGS = 4, S = RANKS * BGS;
  localparam int TL = 6, TS = 4, TP = 5;

  logic clk = 0, rst_n = 0;
  logic host_valid;
  logic [RANKS-1:0] host_cs_n, cs_n;
  ddr_pins_t host_pins, pins;
  logic [S-1:0] op_valid, op_ready;
  pim_uop_t op [S];
  logic pim_issued;
  logic [4:0] ev;
  pim_uop_t q [S][$];
  int checks = 0, failures = 0, cyc = 0;
  int ev_seen [5];

  pim_cmd_scheduler #(.RANKS(RANKS), .BGS(BGS), .T_CCD_L(TL), .T_CCD_S(TS), .T_PIM(TP)) dut (
    .clk(clk), .rst_n(rst_n), .host_valid(host_valid), .host_cs_n(host_cs_n),
    .host_pins(host_pins), .op_valid(op_valid), .op(op), .op_ready(op_ready),
    .cs_n(cs_n), .pins(pins), .pim_issued(pim_issued), .ev(ev)
  );

  always #5 clk = ~clk;

  always_comb
    for (int s = 0; s < S; s++) begin
      op_valid[s] = q[s].size() > 0;
      op[s]       = (q[s].size() > 0) ? q[s][0] : '0;
    end

  typedef struct { int t; int s; pim_uop_t u; } grant_t;
  grant_t log_q [$];
  logic host_prev;
  ddr_pins_t host_pins_prev;
  logic [RANKS-1:0] host_cs_prev;
  logic grant_prev;
  int grant_s_prev;
  pim_uop_t grant_u_prev;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < 5; i++) if (ev[i]) ev_seen[i]++;
    if (rst_n) begin
      // Pins carry what was granted (or the host's command) one cycle before.
      if (host_prev) begin
        checks++;
        if (pins != host_pins_prev || cs_n != host_cs_prev) begin
          failures++; $display("FAIL @%0d host command not on the bus", cyc);
        end
      end else if (grant_prev) begin
        checks++;
        if (pins != encode_pim(grant_u_prev, 2'(grant_s_prev % BGS)) ||
            cs_n != ~(RANKS'(1) << (grant_s_prev / BGS))) begin
          failures++; $display("FAIL @%0d granted command not on the bus", cyc);
        end
      end
      checks++;
      if ($countones(op_ready) > 1 || (host_valid && op_ready != 0)) begin
        failures++; $display("FAIL @%0d grant rules", cyc);
      end
      grant_prev <= 1'b0;
      for (int s = 0; s < S; s++)
        if (op_ready[s]) begin
          grant_t g;
          g.t = cyc; g.s = s; g.u = q[s][0];
          log_q.push_back(g);
          void'(q[s].pop_front());
          grant_prev <= 1'b1; grant_s_prev <= s; grant_u_prev <= g.u;
        end
      host_prev <= host_valid; host_pins_prev <= host_pins; host_cs_prev <= host_cs_n;
    end
  end

  function automatic pim_uop_t mk(pim_op_e o, int b, int p, int sd);
    pim_uop_t u;
    u.op = o; u.bank = 2'(b); u.col = 10'($urandom_range(0, 127) << 3); u.param = 2'(p); u.sd = 1'(sd);
    return u;
  endfunction

  function automatic logic [2:0] uses(pim_uop_t u);
    logic [2:0] t;
    t = u.sd ? 3'b010 : 3'b001;
    case (u.op)
      OP_SRD, OP_WB: return t;
      OP_QRD, OP_QWR: return 3'b100;
      OP_ADD, OP_SUB: return 3'b011;
      OP_QNT, OP_DEQ: return t | 3'b100;
      default: return 3'b000;
    endcase
  endfunction

  // Checks the logged grants against the timing rules.
  task automatic check_log();
    int last_col [S], last_alu [S], last_rcol [RANKS], ready [S][3];
    for (int s = 0; s < S; s++) begin
      last_col[s] = -1000; last_alu[s] = -1000;
      for (int k = 0; k < 3; k++) ready[s][k] = -1000;
    end
    for (int r = 0; r < RANKS; r++) last_rcol[r] = -1000;
    foreach (log_q[i]) begin
      grant_t g;
      logic [2:0] m;
      g = log_q[i];
      m = uses(g.u);
      if (op_is_col(g.u.op)) begin
        checks += 2;
        if (g.t - last_col[g.s] < TL) begin failures++; $display("FAIL tCCD_L s%0d @%0d", g.s, g.t); end
        if (g.t - last_rcol[g.s / BGS] < TS) begin failures++; $display("FAIL tCCD_S s%0d @%0d", g.s, g.t); end
        last_col[g.s] = g.t; last_rcol[g.s / BGS] = g.t;
      end
      if (op_is_alu(g.u.op)) begin
        checks++;
        if (g.t - last_alu[g.s] < TP) begin failures++; $display("FAIL tPIM s%0d @%0d", g.s, g.t); end
        last_alu[g.s] = g.t;
      end
      for (int k = 0; k < 3; k++)
        if (m[k]) begin
          checks++;
          if (g.t < ready[g.s][k]) begin failures++; $display("FAIL dependence s%0d reg%0d @%0d", g.s, k, g.t); end
        end
      case (g.u.op)
        OP_SRD: ready[g.s][g.u.sd] = g.t + TL;
        OP_QRD: ready[g.s][2] = g.t + TL;
        OP_ADD, OP_SUB, OP_DEQ: ready[g.s][g.u.sd] = g.t + TP;
        OP_QNT: ready[g.s][2] = g.t + TP;
        default: ;
      endcase
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    int expt [9] = '{0, 6, 12, 13, 19, 24, 30, 36, 41};
    host_valid = 0; host_cs_n = '1; host_pins = PINS_NOP;
    grant_prev = 0; host_prev = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Part 1: one update column on stream 5.
    q[5].push_back(mk(OP_SRD, 2, 1, 1));
    q[5].push_back(mk(OP_SRD, 1, 2, 0));
    q[5].push_back(mk(OP_SUB, 0, 0, 1));
    q[5].push_back(mk(OP_SRD, 0, 3, 0));
    q[5].push_back(mk(OP_SUB, 0, 0, 0));
    q[5].push_back(mk(OP_WB,  1, 0, 0));
    q[5].push_back(mk(OP_SRD, 0, 0, 1));
    q[5].push_back(mk(OP_ADD, 0, 0, 1));
    q[5].push_back(mk(OP_WB,  0, 0, 1));
    while (q[5].size() > 0) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (log_q.size() != 9) begin failures++; $display("FAIL part 1 count %0d", log_q.size()); end
    else begin
      t0 = log_q[0].t;
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (log_q[i].t - t0 != expt[i]) begin
          failures++; $display("FAIL part 1 cmd %0d at +%0d, expected +%0d", i, log_q[i].t - t0, expt[i]);
        end
      end
    end
    check_log();
    log_q.delete();

    // Part 2: all streams, random lists, random host commands.
    for (int s = 0; s < S; s++)
      for (int i = 0; i < 60; i++) begin
        pim_op_e o;
        o = pim_op_e'($urandom_range(1, 8));
        q[s].push_back(mk(o, $urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(0, 1)));
      end
    begin
      int busy;
      busy = 1;
      while (busy) begin
        host_valid = ($urandom_range(0, 19) == 0);
        host_cs_n  = ~(RANKS'(1) << $urandom_range(0, RANKS - 1));
        host_pins  = PINS_NOP;
        host_pins.ras_n = 1'b1; host_pins.cas_n = 1'b0; host_pins.we_n = 1'($urandom);
        host_pins.bg = 2'($urandom);
        @(negedge clk);
        busy = 0;
        for (int s = 0; s < S; s++) if (q[s].size() > 0) busy = 1;
      end
      host_valid = 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (log_q.size() != S * 60) begin failures++; $display("FAIL part 2 count %0d", log_q.size()); end
    check_log();
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (ev_seen[i] == 0) begin failures++; $display("FAIL wait kind %0d never seen", i); end
    end
    $display("waits: tCCD_L %0d, tCCD_S %0d, tPIM %0d, dependence %0d, contention %0d cycles",
             ev_seen[0], ev_seen[1], ev_seen[2], ev_seen[3], ev_seen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
