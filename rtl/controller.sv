// controller: schedules the processing of one sub-sequence after another.
//
// For each sub-sequence of n symbols the controller walks through the phases
// of the paper's execution-time formula:
//   ST_LOAD       n clocks  symbols enter the input buffer (in_valid/in_ready);
//                           PE activations and the state vector are cleared
//   ST_RUN       2n clocks  per symbol: a strobe clock (match-RAM lookup) and
//                           a step clock (activation update)
//   ST_FLUSH_VEC  1 clock   matched: state vector pushed into the FIFO
//   ST_TRANSDUCE  m clocks  PE indices 0 .. m-1 presented to the transduction
//                           unit; the FIFO entry is popped on the last one
//   ST_OUTPUT     n clocks  output buffer streamed out (out_valid/out_ready)
// so a matched sub-sequence takes 4n + m + 1 clocks when the input and output
// streams never stall. If no report PE fired by the end of ST_RUN, the vector
// is discarded and the controller goes straight back to ST_LOAD, so an
// unmatched sub-sequence costs 3n clocks. The phases run one after the other,
// as the formula adds them up; overlapping them is not done.
//
// `n_matched` and `n_discarded` count the two outcomes. The phase lengths
// follow the paper; the handshakes, the counters and the exact place of each
// strobe are this design's choices.
module controller
  import nfa_pkg::*;
#(
  parameter int unsigned N   = 1000,
  parameter int unsigned M   = 6144,
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned MW = $clog2(M),
  localparam int unsigned IW = $clog2(2 * N > M ? 2 * N : M) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // input stream handshake
  input  logic          in_valid,
  output logic          in_ready,
  // input buffer
  output logic          ibuf_we,
  output logic [NW-1:0] ibuf_waddr,
  output logic [NW-1:0] ibuf_raddr,
  // PE array and state vector
  output logic          arr_clear,
  output logic          arr_strobe,
  output logic          arr_step,
  output logic          arr_first,
  input  logic          matched,     // state vector's sticky match flag
  input  logic          report_any,  // a report PE fires in this step clock
  // FIFO
  output logic          fifo_push,
  output logic          fifo_pop,
  // transduction unit
  output logic          tr_start,
  output logic          tr_scan,
  output logic [MW-1:0] tr_idx,
  // output stream handshake and output buffer
  output logic          out_valid,
  input  logic          out_ready,
  output logic          out_last,
  output logic [NW-1:0] obuf_raddr,
  // status
  output ctrl_state_e   state,
  output logic [31:0]   n_matched,
  output logic [31:0]   n_discarded
);

  logic [IW-1:0] idx;
  logic          run_last;
  logic          hit;

  assign run_last = (state == ST_RUN) && (idx == IW'(2 * N - 1));
  assign hit      = matched || (arr_step && report_any);

  always_comb begin
    in_ready   = (state == ST_LOAD);
    ibuf_we    = in_ready && in_valid;
    ibuf_waddr = NW'(idx);
    ibuf_raddr = (state == ST_OUTPUT) ? '0 : NW'(idx >> 1);
    arr_clear  = (state == ST_LOAD);
    arr_strobe = (state == ST_RUN) && !idx[0];
    arr_step   = (state == ST_RUN) &&  idx[0];
    arr_first  = (state == ST_RUN) && ((idx >> 1) == '0);
    fifo_push  = (state == ST_FLUSH_VEC);
    tr_start   = (state == ST_FLUSH_VEC);
    tr_scan    = (state == ST_TRANSDUCE);
    tr_idx     = MW'(idx);
    fifo_pop   = (state == ST_TRANSDUCE) && (idx == IW'(M - 1));
    out_valid  = (state == ST_OUTPUT);
    out_last   = out_valid && (idx == IW'(N - 1));
    obuf_raddr = NW'(idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_LOAD;
      idx         <= '0;
      n_matched   <= '0;
      n_discarded <= '0;
    end else begin
      unique case (state)
        ST_LOAD: if (in_valid) begin
          if (idx == IW'(N - 1)) begin
            state <= ST_RUN;
            idx   <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        ST_RUN: begin
          if (run_last) begin
            idx <= '0;
            if (hit) begin
              state     <= ST_FLUSH_VEC;
              n_matched <= n_matched + 1'b1;
            end else begin
              state       <= ST_LOAD;
              n_discarded <= n_discarded + 1'b1;
            end
          end else begin
            idx <= idx + 1'b1;
          end
        end
        ST_FLUSH_VEC: begin
          state <= ST_TRANSDUCE;
          idx   <= '0;
        end
        ST_TRANSDUCE: begin
          if (idx == IW'(M - 1)) begin
            state <= ST_OUTPUT;
            idx   <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        ST_OUTPUT: if (out_ready) begin
          if (idx == IW'(N - 1)) begin
            state <= ST_LOAD;
            idx   <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: begin
          state <= ST_LOAD;
          idx   <= '0;
        end
      endcase
    end
  end

endmodule
