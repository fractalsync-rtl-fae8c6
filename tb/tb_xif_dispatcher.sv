// tb_xif_dispatcher: random instructions (the three extension encodings,
// near misses in opcode or funct3, and ordinary instructions) with random
// target readiness; random result traffic from the three targets. Checks
// routing, accept, the ready path and the fixed-priority result arbiter
// against an independent model.
module tb_xif_dispatcher;
  import fsync_pkg::*;
  logic iv, ir, ia, rv, rr;
  xif_issue_t ii, to;
  xif_result_t ro;
  logic [2:0] tv, tr, trv, trr;
  xif_result_t [2:0] tres;
  int checks = 0, failures = 0;
  int n_hit [4] = '{0, 0, 0, 0};

  xif_dispatcher dut (.issue_valid_i(iv), .issue_ready_o(ir), .issue_accept_o(ia), .issue_i(ii),
    .result_valid_o(rv), .result_ready_i(rr), .result_o(ro),
    .tgt_issue_valid_o(tv), .tgt_issue_ready_i(tr), .tgt_issue_o(to),
    .tgt_result_valid_i(trv), .tgt_result_ready_o(trr), .tgt_result_i(tres));

  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] opc [3];
    logic [2:0] f3 [3];
    opc[0] = 7'b0101011; f3[0] = 3'b000;   // iDMA
    opc[1] = 7'b0001011; f3[1] = 3'b000;   // RedMulE
    opc[2] = 7'b1011011; f3[2] = 3'b000;   // FractalSync
    for (int i = 0; i < 3000; i++) begin
      int kind, exp_t, win;
      logic [31:0] instr;
      kind = $urandom_range(0, 5);
      instr = $urandom;
      exp_t = -1;
      if (kind < 3) begin
        instr[6:0] = opc[kind]; instr[14:12] = f3[kind]; exp_t = kind;
      end else if (kind == 3) begin
        instr[6:0] = opc[$urandom_range(0, 2)]; instr[14:12] = 3'($urandom_range(1, 7));
      end else if (kind == 4) begin
        instr[6:0] = 7'b0110011;             // OP (add, ...)
      end
      if (kind == 5 && ((instr[6:0] == opc[0] && instr[14:12] == f3[0]) ||
                        (instr[6:0] == opc[1] && instr[14:12] == f3[1]) ||
                        (instr[6:0] == opc[2] && instr[14:12] == f3[2]))) instr[6:0] = 7'b0010011;
      ii = '{instr: instr, rs1: $urandom, id: 4'($urandom)};
      iv = $urandom;
      tr = 3'($urandom);
      trv = 3'($urandom);
      rr = $urandom;
      for (int t = 0; t < 3; t++) tres[t] = '{id: 4'($urandom), data: $urandom, err: 1'($urandom)};
      #1;
      n_hit[exp_t + 1]++;
      chk("accept", 64'(ia), 64'(exp_t >= 0));
      chk("tgt valid", 64'(tv), (exp_t >= 0 && iv) ? 64'(1 << exp_t) : 64'd0);
      chk("ready", 64'(ir), (exp_t >= 0) ? 64'(tr[exp_t]) : 64'd1);
      chk("payload", 64'(to.rs1), 64'(ii.rs1));
      win = trv[0] ? 0 : trv[1] ? 1 : trv[2] ? 2 : -1;
      chk("result valid", 64'(rv), 64'(win >= 0));
      if (win >= 0) chk("result data", 64'({ro.id, ro.data, ro.err}), 64'({tres[win].id, tres[win].data, tres[win].err}));
      chk("result ready", 64'(trr), (win >= 0 && rr) ? 64'(1 << win) : 64'd0);
      #9;
    end
    checks++;
    if (n_hit[0] == 0 || n_hit[1] == 0 || n_hit[2] == 0 || n_hit[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
