// pipeline_ctrl: schedules the DRAM-PIM and SSD-NSP phases of decoding.
//
// Every decoder layer of a token has a DRAM phase (QKVO, attention and the
// sparsity predictor, in the PIM DRAM) followed by an SSD phase (the fused
// gate-up-down FFN in the flash engines), and the next layer's DRAM phase
// needs this layer's FFN output. One input alone therefore leaves one of
// the two engines idle at any time. With two independent inputs the phases
// can be interleaved: while the SSD runs layer j of input i, the DRAM runs
// layer j of input i+1 (paper Sec. 5.2, Fig. 12), raising throughput by up
// to (t_DRAM + t_SSD) / max(t_DRAM, t_SSD).
//
// The unit keeps, for each of N_STREAMS inputs, its layer and whether it
// waits for or occupies an engine. An idle engine starts the waiting input
// that is furthest behind (the lower stream id on a tie). In sequential mode
// (pipelined = 0) only one phase runs at a time, which gives Fig. 12(a).
// The engines report completion with dram_done / ssd_done. The scheduling
// rule and the handshake are this design's choices.
//
// Interface:
//   start, pipelined, n_layers, n_streams   begin a run (n_streams 1..N)
//   dram_start/dram_stream/dram_layer, dram_done   DRAM engine
//   ssd_start/ssd_stream/ssd_layer, ssd_done       SSD engine
//   busy, done                              run status; done pulses at end
//   overlap_cycles                          cycles with both engines busy
// Timing: an engine is started the cycle after it becomes free.
module pipeline_ctrl
  import slim_pkg::*;
#(
  parameter int unsigned N_STREAMS = 2,
  localparam int unsigned SW       = (N_STREAMS > 1) ? $clog2(N_STREAMS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          pipelined,
  input  logic [7:0]    n_layers,
  input  logic [SW:0]   n_streams,
  output logic          dram_start,
  output logic [SW-1:0] dram_stream,
  output logic [7:0]    dram_layer,
  input  logic          dram_done,
  output logic          ssd_start,
  output logic [SW-1:0] ssd_stream,
  output logic [7:0]    ssd_layer,
  input  logic          ssd_done,
  output logic          busy,
  output logic          done,
  output logic [31:0]   overlap_cycles
);

  typedef enum logic [2:0] {
    W_DRAM, IN_DRAM, W_SSD, IN_SSD, FIN
  } sst_e;

  sst_e         st    [N_STREAMS];
  logic [7:0]   layer [N_STREAMS];
  phase_e       dram_ph, ssd_ph;        // PH_IDLE or busy
  logic [SW-1:0] dram_cur, ssd_cur;
  logic         any_dram, any_ssd, all_fin;
  logic [SW-1:0] pick_dram, pick_ssd;

  // pick the waiting stream with the lowest layer
  always_comb begin
    any_dram = 1'b0; any_ssd = 1'b0; all_fin = 1'b1;
    pick_dram = '0; pick_ssd = '0;
    for (int s = 0; s < N_STREAMS; s++) begin
      if (st[s] != FIN) all_fin = 1'b0;
      if (st[s] == W_DRAM && (!any_dram || layer[s] < layer[pick_dram])) begin
        any_dram = 1'b1; pick_dram = SW'(s);
      end
      if (st[s] == W_SSD && (!any_ssd || layer[s] < layer[pick_ssd])) begin
        any_ssd = 1'b1; pick_ssd = SW'(s);
      end
    end
  end

  logic may_dram, may_ssd;
  assign may_dram = busy && dram_ph == PH_IDLE && any_dram &&
                    (pipelined || ssd_ph == PH_IDLE);
  assign may_ssd  = busy && ssd_ph == PH_IDLE && any_ssd &&
                    (pipelined || (dram_ph == PH_IDLE && !may_dram));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      done           <= 1'b0;
      dram_ph        <= PH_IDLE;
      ssd_ph         <= PH_IDLE;
      dram_cur       <= '0;
      ssd_cur        <= '0;
      dram_start     <= 1'b0;
      ssd_start      <= 1'b0;
      dram_stream    <= '0;
      ssd_stream     <= '0;
      dram_layer     <= '0;
      ssd_layer      <= '0;
      overlap_cycles <= '0;
      for (int s = 0; s < N_STREAMS; s++) begin
        st[s]    <= FIN;
        layer[s] <= '0;
      end
    end else begin
      done       <= 1'b0;
      dram_start <= 1'b0;
      ssd_start  <= 1'b0;
      if (start && !busy) begin
        busy           <= 1'b1;
        overlap_cycles <= '0;
        for (int s = 0; s < N_STREAMS; s++) begin
          st[s]    <= ((SW+1)'(s) < n_streams) ? W_DRAM : FIN;
          layer[s] <= '0;
        end
      end else if (busy) begin
        if (dram_ph != PH_IDLE && ssd_ph != PH_IDLE)
          overlap_cycles <= overlap_cycles + 1;
        // completions
        if (dram_ph != PH_IDLE && dram_done) begin
          dram_ph       <= PH_IDLE;
          st[dram_cur]  <= W_SSD;
        end
        if (ssd_ph != PH_IDLE && ssd_done) begin
          ssd_ph <= PH_IDLE;
          if (layer[ssd_cur] == n_layers - 1'b1) begin
            st[ssd_cur] <= FIN;
          end else begin
            st[ssd_cur]    <= W_DRAM;
            layer[ssd_cur] <= layer[ssd_cur] + 1'b1;
          end
        end
        // issues
        if (may_dram) begin
          dram_ph          <= PH_DRAM;
          dram_cur         <= pick_dram;
          st[pick_dram]    <= IN_DRAM;
          dram_start       <= 1'b1;
          dram_stream      <= pick_dram;
          dram_layer       <= layer[pick_dram];
        end
        if (may_ssd) begin
          ssd_ph           <= PH_SSD;
          ssd_cur          <= pick_ssd;
          st[pick_ssd]     <= IN_SSD;
          ssd_start        <= 1'b1;
          ssd_stream       <= pick_ssd;
          ssd_layer        <= layer[pick_ssd];
        end
        if (all_fin && dram_ph == PH_IDLE && ssd_ph == PH_IDLE) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   !(pipelined == 1'b0 && dram_ph != PH_IDLE && ssd_ph != PH_IDLE));

endmodule
