// control_unit: the MegIS Control Unit and FSM controller (one per SSD).
//
// The per-channel Intersect units only compare. This unit receives their
// results for all channels every cycle and issues the control signals:
// which side advances, when a match is recorded, when the flash stream may
// fill a k-mer register. It also holds the metagenomic-mode state that the
// host's storage-interface commands drive.
//
// Operations (op_start with op_mode, accepted while op_ready):
//   MODE_INTERSECT  every channel in op_mask finds, independently, the
//       intersection of the query batch stream (a, from internal DRAM) and
//       its share of the sorted k-mer database (b, Curr register):
//       a == b: record a as an intersecting k-mer, advance both;
//       a <  b: advance the query;  a > b: advance the database.
//       A query that meets the end of its channel's database is dropped.
//       Done once the host has ended its sorting step (MegIS_Step) and every
//       query batch has been released.
//   MODE_TAXID  k-mer sketch streaming with LEVELS tables: channel 0 holds
//       the sorted kmax-mer sketches with their taxIDs, channel l (l >= 1)
//       the taxID table of the l-th smaller k. The sorted intersecting
//       k-mers are one stream (channel 0's query port) shared by all
//       levels. Level l advances its table while its key is below the
//       (prefix of the) query; the query advances when no level can, and
//       then every level whose key equals it emits its taxID (the empty
//       taxID NO_TAXID is not emitted). Each output is a valid/ready
//       handshake; a level whose taxID was taken waits, without repeating
//       it, until the other levels' outputs are taken too. A level-l entry is loaded whenever
//       the index generator of level l sees a new prefix in the sketches
//       entering channel 0. Done when the batch marked last (batches_ended)
//       and every batch before it have been read.
//   MODE_MERGE  channel 0 and channel 1 hold two sorted reference indexes
//       (k-mer, location); the unified index is their merge, one entry per
//       cycle on output 0, taking channel 0 first on equal k-mers. Done
//       when both indexes are exhausted.
//
// Commands (cmd_valid): CMD_INIT enters metagenomic mode and records the
// host buffer given by cmd_addr/cmd_size; CMD_STEP toggles the start/end of
// host step cmd_arg; CMD_EXIT returns to baseline-SSD mode when no operation
// runs; CMD_WRITE is a metadata update done by firmware and leaves this
// unit unchanged.
//
// Timing: all decisions are combinational on registered state of the
// k-mer registers and the query stream; one comparison step per cycle per
// channel. clear pulses in the cycle an operation is accepted, which
// empties the k-mer registers and index generators.
//
// From the paper: the compare-and-advance rule of intersection finding
// (Sec. 4.3.1), the taxID retrieval flow of Fig. 8 (Sec. 4.3.2), the index
// merge of Fig. 9 (Sec. 4.4), one control unit per SSD (Table 2) and the
// MegIS_Init / MegIS_Step / MegIS_Write commands (Sec. 4.6). The lock-step
// rule for several taxID levels, the end-of-operation conditions and the
// explicit exit command are this design's own.
module control_unit
  import megis_pkg::*;
#(
  parameter int unsigned N_CH   = 8,
  parameter int unsigned LEVELS = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // host commands
  input  logic              cmd_valid,
  input  cmd_e              cmd_op,
  input  logic [1:0]        cmd_arg,
  input  logic [63:0]       cmd_addr,
  input  logic [63:0]       cmd_size,
  output logic              mg_mode,
  output logic [3:0]        step_active,
  output logic [63:0]       host_buf_base,
  output logic [63:0]       host_buf_size,
  // operations from MegIS FTL
  input  logic              op_start,
  input  mode_e             op_mode,
  input  logic [N_CH-1:0]   op_mask,
  output logic              op_ready,
  output logic              op_done,
  output mode_e             mode,
  output logic [N_CH-1:0]   cur_mask,
  output logic              clear,
  // query batches
  input  logic              bm_empty,
  input  logic              batches_ended,  // last query batch of the operation handed over
  // per-channel datapath status
  input  logic [N_CH-1:0]   q_valid,
  input  logic [N_CH-1:0]   lt,
  input  logic [N_CH-1:0]   eq,
  input  logic [N_CH-1:0]   gt,
  input  logic [N_CH-1:0]   curr_valid,
  input  logic [N_CH-1:0]   curr_aux_empty,
  input  logic [N_CH-1:0]   reg_in_ready,
  input  logic [N_CH-1:0]   fl_valid,
  input  logic [N_CH-1:0]   fl_last,
  input  logic [N_CH-1:0]   new_prefix,
  input  logic [N_CH-1:0]   out_ready,
  // per-channel control
  output logic [N_CH-1:0]   fl_ready,
  output logic [N_CH-1:0]   reg_in_valid,
  output logic              sketch_fire,
  output logic [N_CH-1:0]   pop_q,
  output logic [N_CH-1:0]   pop_db,
  output logic [N_CH-1:0]   out_valid,
  output logic              merge_sel
);

  typedef enum logic [1:0] {S_OFF, S_READY, S_RUN} state_e;
  state_e state;

  logic [N_CH-1:0] last_pushed, db_done, mask_q;
  logic            sort_ended, running, done_now;

  assign running  = (state == S_RUN);
  assign op_ready = (state == S_READY);
  assign clear    = op_start && op_ready;
  assign db_done  = last_pushed & ~curr_valid;
  assign cur_mask = (mode == MODE_TAXID) ? N_CH'(1) : mask_q;

  // ---------------------------------------------------------------- flash
  logic ok0;
  always_comb begin
    fl_ready     = '0;
    reg_in_valid = '0;
    sketch_fire  = 1'b0;
    ok0          = 1'b0;
    if (running) begin
      unique case (mode)
        MODE_INTERSECT: begin
          reg_in_valid = fl_valid & mask_q & ~last_pushed;
          fl_ready     = reg_in_ready & mask_q & ~last_pushed;
        end
        MODE_MERGE: begin
          reg_in_valid = fl_valid & N_CH'(3) & ~last_pushed;
          fl_ready     = reg_in_ready & N_CH'(3) & ~last_pushed;
        end
        MODE_TAXID: begin
          // a sketch enters channel 0 only if every level that sees a new
          // prefix in it can load its next taxID in the same cycle
          ok0 = fl_valid[0] && reg_in_ready[0] && !last_pushed[0];
          for (int l = 1; l < LEVELS; l++)
            if (new_prefix[l] && !(fl_valid[l] && reg_in_ready[l])) ok0 = 1'b0;
          sketch_fire     = ok0;
          reg_in_valid[0] = ok0;
          fl_ready[0]     = ok0;
          for (int l = 1; l < LEVELS; l++) begin
            reg_in_valid[l] = ok0 && new_prefix[l];
            fl_ready[l]     = ok0 && new_prefix[l];
          end
        end
        default: ;
      endcase
    end
  end

  // -------------------------------------------------------------- compare
  logic [LEVELS-1:0] lv_adv, lv_past, lv_match;
  logic [LEVELS-1:0] lv_sent;   // taxIDs of the current query already taken
  logic              can_emit;
  always_comb begin
    pop_q     = '0;
    pop_db    = '0;
    out_valid = '0;
    merge_sel = 1'b0;
    lv_adv    = '0;
    lv_past   = '0;
    lv_match  = '0;
    can_emit  = 1'b1;
    if (running) begin
      unique case (mode)
        MODE_INTERSECT: begin
          for (int c = 0; c < N_CH; c++) begin
            if (mask_q[c] && q_valid[c]) begin
              if (curr_valid[c]) begin
                if (eq[c]) begin
                  out_valid[c] = 1'b1;
                  pop_q[c]     = out_ready[c];
                  pop_db[c]    = out_ready[c];
                end else if (lt[c]) begin
                  pop_q[c] = 1'b1;
                end else begin
                  pop_db[c] = 1'b1;
                end
              end else if (db_done[c]) begin
                pop_q[c] = 1'b1;
              end
            end
          end
        end
        MODE_TAXID: begin
          for (int l = 0; l < LEVELS; l++) begin
            lv_adv[l]   = curr_valid[l] && gt[l];
            lv_past[l]  = curr_valid[l] ? !gt[l] : db_done[l];
            lv_match[l] = curr_valid[l] && eq[l] && !curr_aux_empty[l];
          end
          if (q_valid[0]) begin
            for (int l = 0; l < LEVELS; l++) pop_db[l] = lv_adv[l];
            if (&lv_past) begin
              for (int l = 0; l < LEVELS; l++) begin
                out_valid[l] = lv_match[l] && !lv_sent[l];
                if (out_valid[l] && !out_ready[l]) can_emit = 1'b0;
              end
              pop_q[0] = can_emit;
            end
          end
        end
        MODE_MERGE: begin
          // intersect unit 0 compares a = index B (ch 1) with b = index A (ch 0)
          if (curr_valid[0] && curr_valid[1]) begin
            out_valid[0] = 1'b1;
            merge_sel    = lt[0];
          end else if (curr_valid[0] && db_done[1]) begin
            out_valid[0] = 1'b1;
          end else if (curr_valid[1] && db_done[0]) begin
            out_valid[0] = 1'b1;
            merge_sel    = 1'b1;
          end
          if (out_valid[0] && out_ready[0]) begin
            if (merge_sel) pop_db[1] = 1'b1;
            else           pop_db[0] = 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ FSM
  always_comb begin
    unique case (mode)
      MODE_INTERSECT: done_now = sort_ended && bm_empty;
      MODE_TAXID:     done_now = batches_ended && bm_empty;
      MODE_MERGE:     done_now = db_done[0] && db_done[1];
      default:        done_now = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_OFF;
      mode          <= MODE_IDLE;
      mask_q        <= '0;
      mg_mode       <= 1'b0;
      step_active   <= '0;
      sort_ended    <= 1'b0;
      host_buf_base <= '0;
      host_buf_size <= '0;
      last_pushed   <= '0;
      lv_sent       <= '0;
      op_done       <= 1'b0;
    end else begin
      op_done <= 1'b0;
      // commands
      if (cmd_valid) begin
        unique case (cmd_op)
          CMD_INIT: if (state != S_RUN) begin
            mg_mode       <= 1'b1;
            state         <= S_READY;
            host_buf_base <= cmd_addr;
            host_buf_size <= cmd_size;
            step_active   <= '0;
            sort_ended    <= 1'b0;
          end
          CMD_STEP: if (mg_mode) begin
            step_active[cmd_arg] <= !step_active[cmd_arg];
            if (cmd_arg == STEP_SORTING) sort_ended <= step_active[cmd_arg];
          end
          CMD_EXIT: if (state == S_READY) begin
            mg_mode <= 1'b0;
            state   <= S_OFF;
          end
          default: ;  // CMD_WRITE: FTL metadata, firmware only
        endcase
      end
      // operations
      if (clear) begin
        state         <= S_RUN;
        mode          <= op_mode;
        mask_q        <= op_mask;
        last_pushed   <= '0;
        lv_sent       <= '0;
      end else if (running) begin
        // a level whose taxID was taken while another level stalls must
        // not repeat it; the record ends when the query advances
        if (mode == MODE_TAXID) begin
          if (pop_q[0]) lv_sent <= '0;
          else          lv_sent <= lv_sent | (out_valid[LEVELS-1:0] & out_ready[LEVELS-1:0]);
        end
        for (int c = 0; c < N_CH; c++) begin
          if (mode == MODE_TAXID && c >= 1 && c < LEVELS) begin
            if (sketch_fire && fl_last[0]) last_pushed[c] <= 1'b1;
          end else if (fl_ready[c] && fl_valid[c] && fl_last[c]) begin
            last_pushed[c] <= 1'b1;
          end
        end
        if (done_now) begin
          state   <= S_READY;
          mode    <= MODE_IDLE;
          op_done <= 1'b1;
        end
      end
    end
  end

  // rules of the handshakes
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid[0] && !out_ready[0] && mode == MODE_MERGE |=> out_valid[0]);
  a_pop_q: assert property (@(posedge clk) disable iff (!rst_n) (pop_q & ~q_valid) == '0);
  a_pop_db: assert property (@(posedge clk) disable iff (!rst_n) (pop_db & ~curr_valid) == '0);

endmodule
