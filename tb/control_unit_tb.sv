// control_unit_tb: directed checks of the control unit's decisions.
// The comparison results and register states of four channels are driven
// directly and the advance / record / load signals are compared with the
// rules of each operation: intersection finding (equal, smaller, larger,
// database exhausted, output back-pressure, masked channel), taxID
// retrieval with two levels (advance a level, emit on the query pop, empty
// taxID not emitted, new-prefix load gating), index merge (choice of
// side, tie to index A, one side exhausted) and the command FSM
// (MegIS_Init, MegIS_Step toggling, end-of-operation conditions, exit).
module control_unit_tb;
  import megis_pkg::*;
  localparam int N = 4, L = 2;
  logic clk = 0, rst_n = 0;
  logic cmd_valid; cmd_e cmd_op; logic [1:0] cmd_arg; logic [63:0] cmd_addr, cmd_size;
  logic mg_mode; logic [3:0] step_active; logic [63:0] host_buf_base, host_buf_size;
  logic op_start; mode_e op_mode; logic [N-1:0] op_mask; logic op_ready, op_done;
  mode_e mode; logic [N-1:0] cur_mask; logic clear;
  logic bm_empty, batches_ended;
  logic [N-1:0] q_valid, lt, eq, gt, curr_valid, curr_aux_empty, reg_in_ready;
  logic [N-1:0] fl_valid, fl_last, new_prefix, out_ready;
  logic [N-1:0] fl_ready, reg_in_valid, pop_q, pop_db, out_valid;
  logic sketch_fire, merge_sel;
  int checks = 0, failures = 0;

  control_unit #(.N_CH(N), .LEVELS(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  task automatic idle_inputs();
    cmd_valid = 0; cmd_op = CMD_INIT; cmd_arg = '0; cmd_addr = '0; cmd_size = '0;
    op_start = 0; op_mode = MODE_IDLE; op_mask = '0;
    bm_empty = 0; batches_ended = 0;
    q_valid = '0; lt = '0; eq = '0; gt = '0; curr_valid = '0; curr_aux_empty = '0;
    reg_in_ready = '0; fl_valid = '0; fl_last = '0; new_prefix = '0; out_ready = '1;
  endtask

  task automatic cmd(input cmd_e op, input logic [1:0] arg);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_arg = arg; cmd_addr = 64'h1000; cmd_size = 64'h2000;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic start(input mode_e m, input logic [N-1:0] mask);
    @(negedge clk);
    op_start = 1; op_mode = m; op_mask = mask;
    #1 chk(clear, "clear on accepted op");
    @(negedge clk);
    op_start = 0;
    chk(mode == m && !op_ready, "running");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle_inputs();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!mg_mode && !op_ready, "baseline SSD after reset");
    // ------------------------------------------------------------ commands
    cmd(CMD_INIT, 0);
    chk(mg_mode && op_ready, "MegIS_Init enters metagenomic mode");
    chk(host_buf_base == 64'h1000 && host_buf_size == 64'h2000, "host buffer recorded");
    cmd(CMD_STEP, STEP_KMER_EXTRACTION);
    chk(step_active[0], "step start");
    cmd(CMD_STEP, STEP_KMER_EXTRACTION);
    chk(!step_active[0], "same argument again marks the end");
    cmd(CMD_STEP, STEP_SORTING);
    chk(step_active[1], "sorting started");
    cmd(CMD_WRITE, 0);
    chk(mg_mode && op_ready, "MegIS_Write leaves the state alone");
    // ----------------------------------------------------------- intersect
    start(MODE_INTERSECT, 4'b1011);
    chk(cur_mask == 4'b1011, "batch mask");
    q_valid = '1; curr_valid = '1;
    eq = 4'b0001; lt = 4'b0010; gt = 4'b1100;
    @(negedge clk); #1;
    chk(out_valid == 4'b0001, "equal records a match");
    chk(pop_q == 4'b0011, "equal and smaller advance the query");
    chk(pop_db == 4'b1001, "equal and larger advance the database; masked ch2 idle");
    out_ready = 4'b1110; @(negedge clk); #1;
    chk(out_valid[0] && !pop_q[0] && !pop_db[0], "match waits for output ready");
    out_ready = '1;
    fl_valid = 4'b1111; reg_in_ready = 4'b1011; @(negedge clk); #1;
    chk(reg_in_valid == 4'b1011 && fl_ready == 4'b1011, "flash loads only active channels");
    // database end on channel 3
    fl_last = 4'b1000;
    @(negedge clk);
    fl_valid = '0; fl_last = '0;
    curr_valid[3] = 0; @(negedge clk); #1;
    chk(pop_q[3] && !out_valid[3], "query dropped after the database ended");
    chk(!op_done, "not done while sorting runs");
    q_valid = '0; curr_valid = '0; eq = '0; lt = '0; gt = '0;
    bm_empty = 1;
    cmd(CMD_STEP, STEP_SORTING);   // end of sorting
    @(negedge clk);
    chk(op_ready && mode == MODE_IDLE, "intersection done after sorting ended and batches drained");
    bm_empty = 0;
    // --------------------------------------------------------------- taxID
    start(MODE_TAXID, '0);
    chk(cur_mask == 4'b0001, "taxID queries read by channel 0");
    q_valid = 4'b0001; curr_valid = 4'b0011;
    gt = 4'b0001; eq = 4'b0010; @(negedge clk); #1;
    chk(pop_db == 4'b0001 && pop_q == 0 && out_valid == 0, "level 0 below the query advances");
    gt = 4'b0000; eq = 4'b0011; curr_aux_empty = 4'b0010; @(negedge clk); #1;
    chk(pop_q == 4'b0001 && out_valid == 4'b0001 && pop_db == 0, "emit level 0, empty level-1 taxID dropped");
    curr_aux_empty = 0; out_ready = 4'b1101; @(negedge clk); #1;
    chk(out_valid == 4'b0010 && pop_q == 0, "query waits for every emitting level, level 0 not repeated");
    out_ready = '1;
    eq = 0; lt = 4'b0011; @(negedge clk); #1;
    chk(pop_q == 4'b0001 && out_valid == 0, "query below both levels: advance, no match");
    curr_valid = 4'b0001; @(negedge clk); #1;
    chk(pop_q == 0, "level 1 empty and not done: wait");
    q_valid = 0; curr_valid = 0; lt = 0;
    fl_valid = 4'b0011; reg_in_ready = 4'b0011; new_prefix = 4'b0010; @(negedge clk); #1;
    chk(sketch_fire && fl_ready == 4'b0011 && reg_in_valid == 4'b0011, "new prefix loads next level-1 taxID");
    fl_valid = 4'b0001; @(negedge clk); #1;
    chk(!sketch_fire && fl_ready == 0, "sketch waits for level-1 taxID");
    new_prefix = 0; @(negedge clk); #1;
    chk(sketch_fire && fl_ready == 4'b0001 && reg_in_valid == 4'b0001, "same prefix: level 1 untouched");
    fl_valid = 0;
    batches_ended = 1;
    @(negedge clk); #1;
    chk(!op_ready, "taxID retrieval waits while a batch is held");
    bm_empty = 1;
    @(negedge clk);
    bm_empty = 0; batches_ended = 0;
    chk(op_ready, "taxID retrieval done once the last batch has been read");
    // --------------------------------------------------------------- merge
    start(MODE_MERGE, '0);
    curr_valid = 4'b0011; lt = 4'b0001; @(negedge clk); #1;
    chk(out_valid[0] && merge_sel && pop_db == 4'b0010, "index B smaller: take B");
    lt = 0; eq = 4'b0001; @(negedge clk); #1;
    chk(out_valid[0] && !merge_sel && pop_db == 4'b0001, "tie: index A first");
    eq = 0;
    fl_valid = 4'b0011; fl_last = 4'b0010; reg_in_ready = 4'b0011;
    @(negedge clk);
    fl_valid = 0; fl_last = 0;
    curr_valid = 4'b0001; @(negedge clk); #1;
    chk(out_valid[0] && !merge_sel && pop_db == 4'b0001, "B exhausted: drain A");
    curr_valid = 4'b0000; fl_valid = 4'b0001; fl_last = 4'b0001;
    @(negedge clk);
    fl_valid = 0; fl_last = 0;
    @(negedge clk);
    chk(op_ready, "merge done when both indexes end");
    // ---------------------------------------------------------------- exit
    cmd(CMD_EXIT, 0);
    chk(!mg_mode && !op_ready, "back to baseline SSD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
