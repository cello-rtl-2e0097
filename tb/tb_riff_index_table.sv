// tb_riff_index_table: programs random entries into the 64-entry Riff index
// table and checks, against a reference model kept in the testbench, the
// lookup, the bounds of the empty space (free_ptr above upward slices,
// ceil_ptr below downward ones), the
// lowest-priority victim (only if below the looked-up tensor's priority) and
// the neighbour whose tail adjoins a given slot. Also checks that cfg wins
// over a simultaneous controller update of the same entry.
module tb_riff_index_table;
  import cello_pkg::*;
  localparam int ENT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0, upd_we = 0, upd2_we = 0;
  tid_t cfg_id = '0, upd_id = '0, upd2_id = '0, lk_id = '0, mon_id = '0;
  riff_entry_t cfg_entry = '0, upd_entry = '0, upd2_entry = '0;
  riff_entry_t lk_entry, mon_entry, vic_entry, nb_entry;
  idx_t free_ptr, ceil_ptr, nb_slot = '0;
  logic vic_found, nb_found; tid_t vic_id, nb_id;
  int checks = 0, failures = 0;
  riff_entry_t model [ENT];

  riff_index_table #(.ENTRIES(ENT), .DEPTH(65536)) dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic riff_entry_t rnd_entry(int i);
    riff_entry_t e = '0;
    int len = $urandom_range(0, 3) == 0 ? 0 : $urandom_range(1, 500);
    e.valid = ($urandom_range(0, 7) != 0);
    e.tid = tid_t'(i);
    e.dir = $urandom_range(0, 1);
    e.start_addr = $urandom_range(0, 100000);
    e.end_addr = e.start_addr + len + 5;
    e.end_chord_addr = e.start_addr + len;
    e.start_idx = idx_t'($urandom_range(600, 60000));
    e.end_idx = e.dir ? e.start_idx - idx_t'(len) : e.start_idx + idx_t'(len);
    e.reuse_freq = 16'($urandom_range(0, 5));
    e.reuse_dist = 16'($urandom_range(0, 5));
    return e;
  endfunction

  function automatic logic resident(riff_entry_t e);
    return e.valid && (e.end_chord_addr != e.start_addr);
  endfunction

  initial begin
    idx_t efp, ecp; logic evf; int best; logic enf;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      for (int i = 0; i < ENT; i++) begin
        model[i] = rnd_entry(i);
        @(negedge clk); cfg_we = 1; cfg_id = tid_t'(i); cfg_entry = model[i];
      end
      @(negedge clk); cfg_we = 0;
      // free pointer
      efp = '0; ecp = 65536;
      for (int i = 0; i < ENT; i++) if (resident(model[i])) begin
        if (!model[i].dir && model[i].end_idx > efp) efp = model[i].end_idx;
        if (model[i].dir && model[i].end_idx + 1 < ecp) ecp = model[i].end_idx + 1;
      end
      #1 check("free_ptr", free_ptr == efp);
      check("ceil_ptr", ceil_ptr == ecp);
      for (int t = 0; t < 8; t++) begin
        lk_id = tid_t'($urandom_range(0, ENT-1));
        mon_id = tid_t'($urandom_range(0, ENT-1));
        // neighbour: pick the tail of some resident entry
        nb_slot = model[$urandom_range(0, ENT-1)].end_idx - 1;
        #1;
        check("lookup", lk_entry == model[lk_id]);
        check("monitor", mon_entry == model[mon_id]);
        evf = 0; best = 0;
        for (int i = 0; i < ENT; i++)
          if (resident(model[i]) && i != int'(lk_id) && riff_prio(model[i]) < riff_prio(model[lk_id]))
            if (!evf || riff_prio(model[i]) < riff_prio(model[best])) begin evf = 1; best = i; end
        check("victim found", vic_found == evf);
        if (evf) check("victim priority", riff_prio(model[vic_id]) == riff_prio(model[best]) && vic_entry == model[vic_id]);
        enf = 0;
        for (int i = 0; i < ENT; i++)
          if (resident(model[i]) && i != int'(lk_id) && riff_prio(model[i]) < riff_prio(model[lk_id]) &&
              ((!model[i].dir && model[i].end_idx - 1 == nb_slot) || (model[i].dir && model[i].end_idx + 1 == nb_slot)))
            enf = 1;
        check("neighbour found", nb_found == enf);
        if (enf) check("neighbour entry", nb_entry == model[nb_id] && resident(model[nb_id]));
      end
    end
    // update ports and priority of cfg
    @(negedge clk);
    upd_we = 1; upd_id = 5; upd_entry = rnd_entry(5);
    upd2_we = 1; upd2_id = 6; upd2_entry = rnd_entry(6);
    cfg_we = 1; cfg_id = 6; cfg_entry = rnd_entry(6);
    model[5] = upd_entry; model[6] = cfg_entry;
    @(negedge clk); upd_we = 0; upd2_we = 0; cfg_we = 0;
    lk_id = 5; mon_id = 6; #1;
    check("upd write", lk_entry == model[5]);
    check("cfg has priority", mon_entry == model[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
