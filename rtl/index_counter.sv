// index_counter: step sequencer of tubGEMM.
//
// A GEMM is computed as N outer-product steps, one per column of A / row of B.
// This counter holds the index k of the current step. It counts from 0 to N,
// advancing each time the temporal-unary encoder reports that every lane of
// the current step has finished (done). When the count reaches N the result is
// complete and out_valid is high; it stays high until the next start.
//
// Around that counting (the index, the advance on done and out_valid at N are
// as published) this design adds its own small handshake:
//   * start (sampled while not busy) clears the index and begins a GEMM;
//   * after start and after every advance there is one "load" cycle in which
//     the vector generators register the vectors of the new index; during it
//     the encoder is held off (enc_en low) so no stale vector is encoded;
//   * busy is high from the cycle after start until the last done.
// Timing: step k occupies 1 load cycle, the unary/odd cycles of its largest
// magnitude, and 1 done cycle.
module index_counter
  import tub_pkg::*;
#(
  parameter  int unsigned N  = DEF_N,
  localparam int unsigned IW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // begin a GEMM (ignored while busy)
  input  logic          done,       // encoder: all lanes of this step finished
  output logic [IW-1:0] index,      // current step, 0..N
  output logic          load,       // vector generators capture index this cycle
  output logic          enc_en,     // encoder enable
  output logic          busy,       // a GEMM is in progress
  output logic          out_valid   // index reached N: Y is complete
);

  localparam logic [IW-1:0] LAST = IW'(N - 1);
  localparam logic [IW-1:0] FULL = IW'(N);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      index <= '0;
      busy  <= 1'b0;
      load  <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        index <= '0;
        busy  <= 1'b1;
        load  <= 1'b1;
      end
    end else if (load) begin
      load <= 1'b0;
    end else if (done) begin
      if (index == LAST) begin
        index <= FULL;
        busy  <= 1'b0;
      end else begin
        index <= index + 1'b1;
        load  <= 1'b1;
      end
    end
  end

  assign enc_en    = busy && !load;
  assign out_valid = (index == FULL);

  // The index never runs past N, and a load cycle only happens while busy.
  a_index_range : assert property (@(posedge clk) disable iff (!rst_n) index <= FULL);
  a_load_busy   : assert property (@(posedge clk) disable iff (!rst_n) load |-> busy);

endmodule
