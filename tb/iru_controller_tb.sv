// iru_controller_tb: writes every configuration register and checks the
// configuration seen by the IRU, the one-cycle start pulse on REG_START, the
// IDLE -> RUN -> FLUSH phase sequence (FLUSH only once all data is reported
// inserted, and not in the start cycle) and that a new start returns to RUN.
module iru_controller_tb;
  import iru_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [2:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic all_ins = 0;
  iru_cfg_t cfg; iru_phase_e phase; logic start;
  int checks = 0, failures = 0, starts = 0;

  iru_controller dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .all_inserted_i(all_ins),
                      .cfg_o(cfg), .phase_o(phase), .start_o(start));

  always @(posedge clk) if (start) starts++;

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    ck(phase == PH_IDLE && !start, "idle after reset");
    all_ins = 1;
    repeat (3) @(negedge clk);
    ck(phase == PH_IDLE, "no flush without a run");
    all_ins = 0;
    wr(REG_TGT_BASE, 32'hdead_0080);
    wr(REG_TGT_WLOG, 32'd3);
    wr(REG_IDX_BASE, 32'h1234_5600);
    wr(REG_SEC_BASE, 32'h0bad_0000);
    wr(REG_NUM, 32'h0012_3456);
    wr(REG_FLAGS, 32'b111);
    ck(cfg.tgt_base == 32'hdead_0080 && cfg.tgt_wlog2 == 3 && cfg.idx_base == 32'h1234_5600 &&
       cfg.sec_base == 32'h0bad_0000 && cfg.num_elems == 24'h12_3456 && cfg.sec_en && cfg.filter == FILT_FADD,
       "configuration registers");
    ck(phase == PH_IDLE && starts == 0, "no start before REG_START");
    all_ins = 1;                 // idle partitions while starting
    @(negedge clk); cfg_we = 1; cfg_addr = REG_START; cfg_wdata = 1;
    @(negedge clk); cfg_we = 0;
    ck(start && phase == PH_RUN, "start pulse and RUN");
    all_ins = 0;
    @(negedge clk);
    ck(!start && phase == PH_RUN, "start lasts one cycle");
    repeat (5) @(negedge clk);
    ck(phase == PH_RUN, "stays in RUN while data is pending");
    all_ins = 1;
    @(negedge clk);
    ck(phase == PH_FLUSH, "FLUSH once all data inserted");
    all_ins = 0;
    repeat (2) @(negedge clk);
    ck(phase == PH_FLUSH, "FLUSH holds");
    wr(REG_FLAGS, 32'b100);
    ck(!cfg.sec_en && cfg.filter == FILT_MIN, "flags rewritten");
    wr(REG_START, 1);
    ck(phase == PH_RUN && start && starts == 1, "second kernel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
