// readout_streamer: returns a frozen capture as one frame of words.
//
// After a trigger both polarisation buffers, together with the trigger
// time-stamp, go back to the control room to be recorded. This block turns a
// capture into a frame on a valid/ready stream of W-bit words (one buffer
// word, i.e. LANES samples, per frame word):
//
//   word 0          trigger time-stamp (sample number of the first sample
//                   over threshold), zero-extended to W bits
//   word 1          [15:0] window length in words, [23:16] first lane,
//                   [24] A exceeded, [25] B exceeded, rest zero
//   words 2..L+1    polarisation A, oldest word first
//   words L+2..2L+1 polarisation B, oldest word first (last on the final one)
//
// The published system sends the buffers over the facility's 100 Mb/s
// Ethernet link, whose format is not given; this frame layout is this
// design's own. The stream would feed that link's interface.
//
// Each data word is fetched with a registered read of both buffers at the
// same address (ISSUE), captured (LOAD) and then held on the stream until
// accepted (SEND), so a data word takes at least three clocks. That is far
// faster than the link behind it and keeps backpressure handling trivial.
// done pulses for one clock after the last word is accepted.
module readout_streamer #(
  parameter int unsigned W      = lunaska_pkg::SAMPLE_W_DEF * lunaska_pkg::LANES_DEF,
  parameter int unsigned DEPTH  = lunaska_pkg::BUF_SAMPLES_DEF / lunaska_pkg::LANES_DEF,
  parameter int unsigned TS_W   = lunaska_pkg::TS_W_DEF,
  parameter int unsigned LANE_W = 3,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // capture to send
  input  logic              start,
  input  logic [AW-1:0]     base,
  input  logic [LW-1:0]     len,
  input  logic [TS_W-1:0]   ts,
  input  logic              hit_a,
  input  logic              hit_b,
  input  logic [LANE_W-1:0] lane,
  output logic              done,
  output logic              busy,
  // buffer read port (same address to A and B)
  output logic              rd_en,
  output logic [AW-1:0]     rd_addr,
  input  logic [W-1:0]      rd_data_a,
  input  logic [W-1:0]      rd_data_b,
  // frame stream
  output logic [W-1:0]      m_data,
  output logic              m_valid,
  input  logic              m_ready,
  output logic              m_last
);
  import lunaska_pkg::*;

  rd_state_t       st;
  logic [AW-1:0]   base_q, addr;
  logic [LW-1:0]   len_q, idx;
  logic [TS_W-1:0] ts_q;
  logic            hit_a_q, hit_b_q, pol_b;
  logic [LANE_W-1:0] lane_q;
  logic [W-1:0]    data_q, hdr1;
  logic            last_word;

  always_comb begin
    hdr1 = '0;
    hdr1[HDR_LEN_LSB +: HDR_LEN_W]   = HDR_LEN_W'(len_q);
    hdr1[HDR_LANE_LSB +: HDR_LANE_W] = HDR_LANE_W'(lane_q);
    hdr1[HDR_HITA_BIT]               = hit_a_q;
    hdr1[HDR_HITB_BIT]               = hit_b_q;
  end

  assign last_word = (idx == len_q - LW'(1));
  assign rd_en     = (st == RD_ISSUE);
  assign rd_addr   = addr;
  assign busy      = (st != RD_IDLE);
  assign m_valid   = (st == RD_HDR0) || (st == RD_HDR1) || (st == RD_SEND);
  assign m_last    = (st == RD_SEND) && pol_b && last_word;

  always_comb begin
    unique case (st)
      RD_HDR0: m_data = W'(ts_q);
      RD_HDR1: m_data = hdr1;
      default: m_data = data_q;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= RD_IDLE;
      base_q  <= '0;
      addr    <= '0;
      len_q   <= '0;
      idx     <= '0;
      ts_q    <= '0;
      hit_a_q <= 1'b0;
      hit_b_q <= 1'b0;
      lane_q  <= '0;
      pol_b   <= 1'b0;
      data_q  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        RD_IDLE: if (start) begin
          base_q  <= base;
          len_q   <= len;
          ts_q    <= ts;
          hit_a_q <= hit_a;
          hit_b_q <= hit_b;
          lane_q  <= lane;
          st      <= RD_HDR0;
        end
        RD_HDR0: if (m_ready) st <= RD_HDR1;
        RD_HDR1: if (m_ready) begin
          st    <= RD_ISSUE;
          idx   <= '0;
          pol_b <= 1'b0;
          addr  <= base_q;
        end
        RD_ISSUE: st <= RD_LOAD;
        RD_LOAD: begin
          data_q <= pol_b ? rd_data_b : rd_data_a;
          st     <= RD_SEND;
        end
        RD_SEND: if (m_ready) begin
          if (last_word) begin
            if (pol_b) begin
              st   <= RD_IDLE;
              done <= 1'b1;
            end else begin
              pol_b <= 1'b1;
              idx   <= '0;
              addr  <= base_q;
              st    <= RD_ISSUE;
            end
          end else begin
            idx  <= idx + LW'(1);
            addr <= (addr == AW'(DEPTH - 1)) ? '0 : addr + AW'(1);
            st   <= RD_ISSUE;
          end
        end
        default: st <= RD_IDLE;
      endcase
    end
  end

  // Stream rule: an offered word stays unchanged until it is accepted.
  logic          held;
  logic [W-1:0]  held_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= 1'b0;
      held_data <= '0;
    end else begin
      held      <= m_valid && !m_ready;
      held_data <= m_data;
      if (held) assert (m_valid && m_data == held_data)
        else $error("readout_streamer: word withdrawn or changed before acceptance");
    end
  end

  // Header fields must fit in one word.
  if (W < 32 || W < TS_W) begin : g_bad_width
    $error("readout_streamer: word too narrow for the header");
  end
  if (DEPTH >= 65536) begin : g_bad_depth
    $error("readout_streamer: length field is 16 bits");
  end

endmodule
