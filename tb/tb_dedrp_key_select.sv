// tb_dedrp_key_select: checks the precedence rule for every combination of
// epoch phase and the two refresh bits, with random indices and sets: entry i
// (current key) is used while its refresh bit differs from the phase
// (untransitioned); otherwise entry j (target key) is used.
module tb_dedrp_key_select;
  localparam int unsigned IDX_W = 15, SET_W = 11;
  logic [IDX_W-1:0] ic, it, si;
  logic [SET_W:0]   ec, et;
  logic [SET_W-1:0] ss;
  logic             ph, ut;
  int checks = 0, failures = 0;

  dedrp_key_select #(.IDX_W(IDX_W), .SET_W(SET_W)) dut (
    .idx_cur(ic), .ent_cur(ec), .idx_tgt(it), .ent_tgt(et), .phase(ph),
    .sel_idx(si), .sel_set(ss), .used_target(ut));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic transitioned;
      ph = n[0]; ic = IDX_W'($urandom()); it = IDX_W'($urandom());
      ec = {n[1], SET_W'($urandom())};
      et = {n[2], SET_W'($urandom())};
      #1;
      transitioned = (n[1] == n[0]);
      check(ut == transitioned, "used_target");
      check(si == (transitioned ? it : ic), "sel_idx");
      check(ss == (transitioned ? et[SET_W-1:0] : ec[SET_W-1:0]), "sel_set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
