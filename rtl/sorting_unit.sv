// sorting_unit -- systolic insertion sorter for one vector of M powers.
//
// A cascade of M stages sorts the squared magnitudes in ascending order while
// they stream in. Each stage k holds a kept register (the smallest value it
// has seen so far) and a pass register feeding stage k+1. When a value reaches
// a stage, the stage compares it with its kept value, keeps the smaller one
// and forwards the larger one to the next stage through the pass register, so
// every stage does exactly one compare-and-swap per clock and no path runs
// through more than one comparator. After all M values are in, stage 1 holds
// the smallest value and stage M the largest.
//
// A three-state FSM sequences the unit:
//   LOAD  : in_ready = 1; accepts one value per clock until M have arrived.
//   FLUSH : M-1 clocks in which the values still in pass registers settle.
//   OUT   : M clocks in which the kept registers shift one stage towards
//           stage 1 per clock; the value leaving stage 1 is the output, so
//           the vector leaves in ascending order, smallest first.
// The kept-smaller rule, the cascade of registers, and the three phases
// follow the architecture description. The separate pass register per stage
// (the drawing shows one register per stage, the text asks for one compare
// per clock), the read-out at the stage-1 end of the cascade (the drawing
// draws the output arrow from stage M; with the smaller value kept, the
// ascending order is found at stage 1) and the fixed flush length are this
// design's choices.
//
// Interface: in_valid/in_data with in_ready (a value offered while in_ready
// is low is an error, checked by an assertion); out_valid/out_data with
// out_first on the smallest and out_last on the largest element. There is no
// output back-pressure.
// Timing: the first output appears 2*M-1 clocks after the clock in which the
// first input was accepted (M load + M-1 flush clocks), and the vector takes
// M clocks to leave. A new vector can be loaded after the last output clock,
// so one vector occupies the unit for 3*M-1 clocks.
module sorting_unit #(
  parameter int unsigned M = 64,   // elements per vector (antennas)
  parameter int unsigned W = 16    // width of one unsigned value
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic         out_first,
  output logic         out_last,
  output logic [W-1:0] out_data
);
  localparam int unsigned CW = $clog2(M + 1);

  typedef enum logic [1:0] {LOAD, FLUSH, OUT} state_t;
  state_t state;
  logic [CW-1:0] cnt;

  logic [W-1:0] keep   [M];
  logic         keep_v [M];
  logic [W-1:0] pass   [M];   // pass[0] unused: stage 1 is fed by in_data
  logic         pass_v [M];

  // Incoming value of every stage.
  logic [W-1:0] inc   [M];
  logic         inc_v [M];
  always_comb begin
    for (int k = 0; k < M; k++) begin
      if (k == 0) begin
        inc[k]   = in_data;
        inc_v[k] = in_valid && state == LOAD;
      end else begin
        inc[k]   = pass[k];
        inc_v[k] = pass_v[k];
      end
    end
  end

  // Compare-and-swap of every stage: an empty stage takes the incoming
  // value; otherwise the smaller value is kept and the larger forwarded.
  logic         take  [M];
  logic [W-1:0] fwd   [M];
  logic         fwd_v [M];
  always_comb begin
    for (int k = 0; k < M; k++) begin
      take[k]  = inc_v[k] && (!keep_v[k] || inc[k] < keep[k]);
      fwd_v[k] = inc_v[k] && keep_v[k];
      fwd[k]   = take[k] ? keep[k] : inc[k];
    end
  end

  assign in_ready  = (state == LOAD);
  assign out_valid = (state == OUT);
  assign out_first = (state == OUT) && cnt == '0;
  assign out_last  = (state == OUT) && cnt == CW'(M - 1);
  assign out_data  = keep[0];

  // FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= LOAD;
      cnt   <= '0;
    end else begin
      unique case (state)
        LOAD:  if (in_valid) begin
                 if (cnt == CW'(M - 1)) begin
                   cnt   <= '0;
                   state <= (M > 1) ? FLUSH : OUT;
                 end else cnt <= cnt + 1'b1;
               end
        FLUSH: if (cnt == CW'(M - 2)) begin
                 cnt   <= '0;
                 state <= OUT;
               end else cnt <= cnt + 1'b1;
        OUT:   if (cnt == CW'(M - 1)) begin
                 cnt   <= '0;
                 state <= LOAD;
               end else cnt <= cnt + 1'b1;
        default: state <= LOAD;
      endcase
    end
  end

  // Stage cascade: compare-and-swap while loading/flushing, shift in OUT.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < M; k++) begin
        keep[k]   <= '0;
        keep_v[k] <= 1'b0;
        pass[k]   <= '0;
        pass_v[k] <= 1'b0;
      end
    end else if (state == OUT) begin
      for (int k = 0; k < M; k++) begin
        if (k == M - 1) begin
          keep[k]   <= '0;
          keep_v[k] <= 1'b0;
        end else begin
          keep[k]   <= keep[k+1];
          keep_v[k] <= keep_v[k+1];
        end
        pass_v[k] <= 1'b0;
      end
    end else begin
      for (int k = 0; k < M; k++) begin
        if (take[k]) begin
          keep[k]   <= inc[k];
          keep_v[k] <= 1'b1;
        end
        if (k < M - 1) begin
          pass[k+1]   <= fwd[k];
          pass_v[k+1] <= fwd_v[k];
        end
      end
    end
  end

  // Handshake rule: a value is only offered while the unit can load it.
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid |-> in_ready)
    else $error("sorting_unit: input offered outside the load phase");
endmodule
