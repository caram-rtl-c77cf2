// tb_lfi_table: checks the line fingerprint index against a reference model.
//
// A 16-slot table (IDX_W=4) is driven with 600 random LOOKUP, INSERT,
// INCREF and DECREF commands whose keys come from three tags over the 16
// slots, so hits, misses, occupied-slot refusals and deletions all occur.
// Every answer is compared with an associative-array model of a
// direct-mapped hash map. It also checks that the table stays unready during
// the clearing sweep, that it is empty afterwards, and that every answer
// arrives exactly two cycles after the command is taken.
module tb_lfi_table;
  import caram_pkg::*;

  localparam int IDX_W = 4;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    init_busy, cmd_valid = 1'b0, cmd_ready;
  lfi_op_e cmd_op = LFI_LOOKUP;
  lfp_t    cmd_key = '0;
  pla_t    cmd_pla = '0;
  logic    rsp_valid, rsp_hit, rsp_ok, rsp_freed;
  pla_t    rsp_pla;
  ref_t    rsp_ref;
  int      checks = 0, failures = 0;
  int      n_ins = 0, n_del = 0, n_hit = 0, n_refused = 0;

  always #5 clk = ~clk;

  lfi_table #(.IDX_W(IDX_W)) dut (.*);

  // model: valid, key, pla, refcount per slot
  bit   m_v   [16];
  lfp_t m_key [16];
  pla_t m_pla [16];
  int   m_ref [16];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic do_cmd(input lfi_op_e op, input lfp_t key, input pla_t pla);
    int  s, lat;
    bit  hit, ok, freed;
    s   = int'(key[IDX_W-1:0]);
    hit = m_v[s] && m_key[s] == key;
    ok = 1'b0;
    freed = 1'b0;
    unique case (op)
      LFI_LOOKUP: ok = hit;
      LFI_INSERT: ok = !m_v[s];
      LFI_INCREF: ok = hit && m_ref[s] < 65535;
      LFI_DECREF: begin
        ok    = hit && m_pla[s] == pla;
        freed = ok && m_ref[s] <= 1;
      end
    endcase
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1;
    cmd_op    = op;
    cmd_key   = key;
    cmd_pla   = pla;
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!rsp_valid && lat < 10) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 2, $sformatf("latency %0d", lat));
    check(rsp_hit == hit, $sformatf("op %s key %08x hit %0b exp %0b", op.name(), key, rsp_hit, hit));
    check(rsp_ok == ok, $sformatf("op %s key %08x ok %0b exp %0b", op.name(), key, rsp_ok, ok));
    check(rsp_freed == freed, $sformatf("op %s freed %0b exp %0b", op.name(), rsp_freed, freed));
    if (hit && op != LFI_INSERT) check(rsp_pla == m_pla[s], "pla");
    if (hit) n_hit++;
    // update model
    unique case (op)
      LFI_INSERT: if (ok) begin
        m_v[s] = 1; m_key[s] = key; m_pla[s] = pla; m_ref[s] = 1; n_ins++;
      end else n_refused++;
      LFI_INCREF: if (ok) m_ref[s]++;
      LFI_DECREF: if (ok) begin
        if (freed) begin m_v[s] = 0; n_del++; end
        else m_ref[s]--;
      end
      default: ;
    endcase
    if (ok && (op == LFI_INCREF || op == LFI_DECREF) && !freed)
      check(int'(rsp_ref) == m_ref[s], $sformatf("refcount %0d exp %0d", rsp_ref, m_ref[s]));
    if (op == LFI_LOOKUP && hit)
      check(int'(rsp_ref) == m_ref[s], "lookup refcount");
  endtask

  initial begin
    lfp_t key;
    for (int i = 0; i < 16; i++) m_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(init_busy && !cmd_ready, "busy during clearing sweep");
    while (init_busy) @(negedge clk);
    for (int i = 0; i < 16; i++) do_cmd(LFI_LOOKUP, lfp_t'(i) | 32'hA000_0000, '0);
    for (int n = 0; n < 600; n++) begin
      int r;
      key = {28'(32'hA000000 + ($urandom % 3) * 32'h1234567), 4'($urandom)};
      r = $urandom % 10;
      if (r < 2)      do_cmd(LFI_INSERT, key, pla_t'($urandom));
      else if (r < 4) do_cmd(LFI_LOOKUP, key, '0);
      else if (r < 5) do_cmd(LFI_INCREF, key, '0);
      else begin
        int s;
        s = int'(key[3:0]);
        // mostly the matching PLA, sometimes a wrong one
        do_cmd(LFI_DECREF, key, ($urandom % 4 == 0) ? pla_t'($urandom) : m_pla[s]);
      end
    end
    check(n_ins > 10 && n_del > 5 && n_refused > 10 && n_hit > 50, "coverage");
    $display("inserts=%0d deletes=%0d refused=%0d hits=%0d", n_ins, n_del, n_refused, n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
