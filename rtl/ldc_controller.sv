// ldc_controller: the global counters that sequence one inference.
//
// A feature counter i and a class counter k drive the whole datapath; every
// other control signal is one of them delayed to match a memory stage.
// Timeline, cycle 0 being the cycle in which start is accepted:
//   cycle 0          acc_clr: the accumulator is zeroed.
//   cycles 1..N      ST_ENC: samp_re with samp_addr = i = 0..N-1.
//   cycles 2..N+1    im_re with im_addr = i (one cycle later): the IM reads
//                    F_i and, addressed by f_i from the sample buffer, V_{f_i}.
//   cycles 3..N+2    acc_en: F_i o V_{f_i} is added to the accumulator.
//   cycle  N+1       ST_DRAIN.
//   cycles N+2..N+K+1  ST_CLS: am_re with am_addr = k = 0..K-1.
//   cycles N+3..N+K+2  sim_valid/sim_k: C_k meets the final S_q.
//   cycles N+K+2..N+K+4 ST_FLUSH while the similarity pipeline empties;
//                    the last distance leaves the datapath in cycle N+K+4.
// ready is high in ST_IDLE only; start is taken only then.
// The states and the start/ready handshake are this design's choice; the
// counters run from 0 where the architecture numbers them from 1.
// Asynchronous active-low reset to ST_IDLE.
module ldc_controller
  import ldc_pkg::*;
#(
  parameter int unsigned N = LDC_N,
  parameter int unsigned K = LDC_K,
  localparam int unsigned NW = addr_w(N),
  localparam int unsigned KW = addr_w(K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  // sample buffer read
  output logic          samp_re,
  output logic [NW-1:0] samp_addr,
  // item memory read
  output logic          im_re,
  output logic [NW-1:0] im_addr,
  // accumulator
  output logic          acc_clr,
  output logic          acc_en,
  // associative memory read
  output logic          am_re,
  output logic [KW-1:0] am_addr,
  // class vector present at the similarity unit
  output logic          sim_valid,
  output logic [KW-1:0] sim_k
);

  localparam int unsigned FLUSH_CYCLES = 3;

  ctrl_state_e   state;
  logic [NW-1:0] i_cnt;
  logic [KW-1:0] k_cnt;
  logic [1:0]    flush_cnt;

  assign ready     = (state == ST_IDLE);
  assign acc_clr   = ready && start;
  assign samp_re   = (state == ST_ENC);
  assign samp_addr = i_cnt;
  assign am_re     = (state == ST_CLS);
  assign am_addr   = k_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      i_cnt     <= '0;
      k_cnt     <= '0;
      flush_cnt <= '0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          i_cnt <= '0;
          k_cnt <= '0;
          if (start) state <= ST_ENC;
        end
        ST_ENC: begin
          if (i_cnt == NW'(N - 1)) begin
            state <= ST_DRAIN;
          end else begin
            i_cnt <= i_cnt + 1'b1;
          end
        end
        ST_DRAIN: begin
          state <= ST_CLS;
        end
        ST_CLS: begin
          if (k_cnt == KW'(K - 1)) begin
            state     <= ST_FLUSH;
            flush_cnt <= '0;
          end else begin
            k_cnt <= k_cnt + 1'b1;
          end
        end
        ST_FLUSH: begin
          if (flush_cnt == 2'(FLUSH_CYCLES - 1)) begin
            state <= ST_IDLE;
          end else begin
            flush_cnt <= flush_cnt + 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // Delayed copies of the feature and class strobes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      im_re     <= 1'b0;
      im_addr   <= '0;
      acc_en    <= 1'b0;
      sim_valid <= 1'b0;
      sim_k     <= '0;
    end else begin
      im_re     <= samp_re;
      im_addr   <= samp_addr;
      acc_en    <= im_re;
      sim_valid <= am_re;
      sim_k     <= am_addr;
    end
  end

  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                       start |-> ready)
    else $error("ldc_controller: start while busy is ignored");

endmodule
