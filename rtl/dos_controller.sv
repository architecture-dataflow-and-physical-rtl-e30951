// dos_controller: fold sequencer of the 3D dOS accelerator.
//
// A GEMM C(MxN) = A(MxK) * B(KxN) is split as the analytical model of the
// design assumes: K is divided evenly over the L tiers (KT = ceil(K/L) per
// tier), and M and N are covered in ceil(M/R) x ceil(N/C) folds, N folds
// innermost. Each fold runs fill, in-place accumulation, cross-tier
// reduction and drain back to back, and the next fold's feed starts in the
// last drain cycle, so the fold period is
//     P = 2R + C + KT - 2          for L = 1 (equal to Eq. (1))
//     P = 2R + C + KT + L - 2      for L > 1 (Eq. (2) plus one cycle)
// The extra cycle for L > 1 comes from the one-cycle feed offset per tier:
// tier t's own last product and the vertical add of tier t-1's sum fall in
// consecutive cycles rather than overlapping.
//
// Per fold: fold_start pulses at fold cycle 0 with the scratchpad base
// addresses (a_base = mf*KT, b_base = nf*KT). The bottom tier holds the
// finished fold from cycle P-R+1; from then on drain is high for R cycles
// and each cycle one output row (bottom row first) is written to the output
// scratchpad at (fold index)*R + row.
//
// Interface: start is sampled in IDLE with m, n, k. busy is high while a
// GEMM runs; done pulses for one cycle at the end with err = 1 if the
// workload does not fit the scratchpads or a dimension is zero (nothing is
// run then). Latency: done rises folds*P + 2 cycles after the start cycle.
module dos_controller #(
  parameter int unsigned L       = 3,
  parameter int unsigned R       = 128,
  parameter int unsigned C       = 128,
  parameter int unsigned A_DEPTH = 2048,
  parameter int unsigned B_DEPTH = 2048,
  parameter int unsigned O_DEPTH = 1024,
  parameter int unsigned DW      = 16,
  localparam int unsigned AW_A   = (A_DEPTH > 1) ? $clog2(A_DEPTH) : 1,
  localparam int unsigned AW_B   = (B_DEPTH > 1) ? $clog2(B_DEPTH) : 1,
  localparam int unsigned AW_O   = (O_DEPTH > 1) ? $clog2(O_DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [DW-1:0]   m,
  input  logic [DW-1:0]   n,
  input  logic [DW-1:0]   k,
  output logic            busy,
  output logic            done,
  output logic            err,
  // to the tier feeders
  output logic            fold_start,
  output logic [AW_A-1:0] a_base,
  output logic [AW_B-1:0] b_base,
  output logic [DW-1:0]   kt,
  // to the array and the output scratchpad
  output logic            drain,
  output logic            o_we,
  output logic [AW_O-1:0] o_waddr
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e state;

  localparam int unsigned CW = DW + 2;  // fold cycle counter width

  // Workload shape, from the start inputs.
  logic [DW-1:0] mf_in, nf_in, kt_in;
  logic [2*DW:0] need_a, need_b, need_o;
  logic          fits;
  always_comb begin
    mf_in  = DW'((32'(m) + R - 1) / R);
    nf_in  = DW'((32'(n) + C - 1) / C);
    kt_in  = DW'((32'(k) + L - 1) / L);
    need_a = (2*DW+1)'(mf_in) * (2*DW+1)'(kt_in);
    need_b = (2*DW+1)'(nf_in) * (2*DW+1)'(kt_in);
    need_o = (2*DW+1)'(mf_in) * (2*DW+1)'(nf_in) * (2*DW+1)'(R);
    fits   = (m != '0) && (n != '0) && (k != '0) &&
             (need_a <= (2*DW+1)'(A_DEPTH)) && (need_b <= (2*DW+1)'(B_DEPTH)) &&
             (need_o <= (2*DW+1)'(O_DEPTH));
  end

  logic [DW-1:0]   mf_tot, nf_tot, mf, nf;
  logic [CW-1:0]   cyc, period, drain_at;
  logic [AW_O-1:0] o_fold_base, drain_base;
  logic [$clog2(R+1)-1:0] drain_cnt;

  wire last_cyc  = (cyc == period - 1'b1);
  wire last_fold = (mf == mf_tot - 1'b1) && (nf == nf_tot - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      err         <= 1'b0;
      mf_tot      <= '0;
      nf_tot      <= '0;
      kt          <= '0;
      mf          <= '0;
      nf          <= '0;
      cyc         <= '0;
      period      <= '0;
      drain_at    <= '0;
      a_base      <= '0;
      b_base      <= '0;
      o_fold_base <= '0;
      drain_base  <= '0;
      drain_cnt   <= '0;
    end else begin
      done <= 1'b0;

      // Drain sequencer: armed one cycle before the bottom tier is final.
      if (state == S_RUN && cyc == drain_at - 1'b1) begin
        drain_cnt  <= ($clog2(R+1))'(R);
        drain_base <= o_fold_base;
      end else if (drain_cnt != '0) begin
        drain_cnt  <= drain_cnt - 1'b1;
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            err <= !fits;
            if (fits) begin
              state       <= S_RUN;
              mf_tot      <= mf_in;
              nf_tot      <= nf_in;
              kt          <= kt_in;
              mf          <= '0;
              nf          <= '0;
              cyc         <= '0;
              period      <= CW'(2*R + C - 2 + ((L > 1) ? L : 0)) + CW'(kt_in);
              drain_at    <= CW'(R + C - 1 + ((L > 1) ? L : 0)) + CW'(kt_in);
              a_base      <= '0;
              b_base      <= '0;
              o_fold_base <= '0;
            end else begin
              done <= 1'b1;
            end
          end
        end
        S_RUN: begin
          cyc <= cyc + 1'b1;
          if (last_cyc) begin
            cyc         <= '0;
            o_fold_base <= o_fold_base + AW_O'(R);
            if (last_fold) begin
              state <= S_FLUSH;
            end else if (nf == nf_tot - 1'b1) begin
              nf     <= '0;
              b_base <= '0;
              mf     <= mf + 1'b1;
              a_base <= a_base + AW_A'(kt);
            end else begin
              nf     <= nf + 1'b1;
              b_base <= b_base + AW_B'(kt);
            end
          end
        end
        S_FLUSH: begin
          if (drain_cnt == ($clog2(R+1))'(1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign fold_start = (state == S_RUN) && (cyc == '0);
  assign drain      = (drain_cnt != '0);
  assign o_we       = drain;
  assign o_waddr    = drain_base + AW_O'(drain_cnt - 1'b1);

  // The drain of one fold never overlaps the next one (needs R >= 2).
  initial assert (R >= 2) else $error("dos_controller: R must be at least 2");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_RUN && cyc == drain_at - 1'b1) |-> drain_cnt == '0)
    else $error("dos_controller: drain overlap");

endmodule
