// control_unit: run control of the accelerator for a batch of queries.
//
// A start pulse (while idle) latches the number of queries in the batch,
// clears the counters and opens the prefetcher (fetch_en) so the batch's
// words stream in from global memory. Every score written to the output
// buffer counts one finished query; when all are finished the unit closes
// the prefetcher, drops busy and holds done until the next start. It also
// counts the kernel cycles from start to done.
//
// The paper shows a control unit driving the prefetcher, arbiters, PEs and
// pruners and batches queries, processing them one after the other; in this
// implementation the per-module sequencing lives in each module and travels
// with end-of-graph tokens, so this unit only frames the batch.
module control_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] num_queries,
  input  logic        score_fire,
  output logic        fetch_en,
  output logic        busy,
  output logic        done,
  output logic [15:0] queries_done,
  output logic [31:0] cycles
);
  logic [15:0] target;

  assign fetch_en = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; target <= '0; queries_done <= '0; cycles <= '0;
    end else if (!busy) begin
      if (start) begin
        busy         <= (num_queries != '0);
        done         <= (num_queries == '0);
        target       <= num_queries;
        queries_done <= '0;
        cycles       <= '0;
      end
    end else begin
      cycles <= cycles + 1;
      if (score_fire) begin
        queries_done <= queries_done + 1'b1;
        if (queries_done + 1'b1 == target) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_no_extra_scores: assert property (@(posedge clk) disable iff (!rst_n) score_fire |-> busy);

endmodule
