// kmer_register_pair: the Curr./Next k-mer registers of one channel.
//
// MegIS computes directly on the stream read from a flash channel, with no
// large buffer: one register holds the k-mer that is the current compute
// input, the other takes the following k-mer as it arrives from the flash
// chips. This module is that pair, seen as a two-entry queue whose both
// entries are visible (curr and next).
//
// Interface
//   in_*   valid/ready stream from the flash channel (after ECC). A word is
//          taken on a cycle with in_valid && in_ready.
//   curr_* the current record (compute input), next_* the one behind it.
//   pop    drop the current record; next moves into curr. Only legal when
//          curr_valid.
//   clear  empties both registers (synchronous).
// Timing: a word pushed in cycle t is visible in curr/next in cycle t+1.
// in_ready = !next_valid || pop, so a full pair accepts a word in the same
// cycle its current record is consumed and the stream runs at one record
// per cycle. in_ready depends on pop combinationally.
//
// From the paper: two registers per channel, current and next (Fig. 6,
// Table 2). The handshake is this design's own.
module kmer_register_pair #(
  parameter int unsigned W = 153
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         curr_valid,
  output logic [W-1:0] curr_data,
  output logic         next_valid,
  output logic [W-1:0] next_data,
  input  logic         pop
);

  logic push;

  assign in_ready = !next_valid || pop;
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      curr_valid <= 1'b0;
      next_valid <= 1'b0;
      curr_data  <= '0;
      next_data  <= '0;
    end else if (clear) begin
      curr_valid <= 1'b0;
      next_valid <= 1'b0;
    end else begin
      // cases by (curr_valid, next_valid) after the pop
      if (pop) begin
        if (next_valid) begin
          curr_data  <= next_data;
          curr_valid <= 1'b1;
          if (push) begin
            next_data  <= in_data;
            next_valid <= 1'b1;
          end else begin
            next_valid <= 1'b0;
          end
        end else begin
          curr_valid <= push;
          if (push) curr_data <= in_data;
        end
      end else if (push) begin
        if (!curr_valid) begin
          curr_data  <= in_data;
          curr_valid <= 1'b1;
        end else begin
          next_data  <= in_data;
          next_valid <= 1'b1;
        end
      end
    end
  end

  // the pair never holds a next record without a current one
  a_order: assert property (@(posedge clk) disable iff (!rst_n) next_valid |-> curr_valid);
  a_pop:   assert property (@(posedge clk) disable iff (!rst_n) pop |-> curr_valid);

endmodule
