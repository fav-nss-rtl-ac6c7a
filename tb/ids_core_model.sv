// ids_core_model -- behavioural stand-in for the quantised-MLP IDS core.
//
// Not the real network (its weights are not available here): a fixed rule on
// the newest frame of the window, good enough to exercise the streaming
// interfaces and the Softmax end to end.
//   identifier 0x000                          -> DoS
//   identifier SPOOF_ID                        -> RPM-spoof
//   identifier whose bits 10:4 match an entry of BENIGN_IDS -> benign
//   anything else                              -> fuzzing
// Scores are Q.4 signed values: +4.0 for the chosen class, -2.0 otherwise.
// A window is accepted when idle and 'stall' is low; the scores appear LAT
// cycles later and are held until taken.
module ids_core_model #(
  parameter int unsigned WINDOW  = 4,
  parameter int unsigned LAT     = 60,
  parameter logic [10:0] SPOOF_ID = 11'h316,
  parameter logic [43:0] BENIGN_IDS = {11'h0A0, 11'h0B0, 11'h0C0, 11'h0D0}
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  stall,
  input  logic                  s_tvalid,
  output logic                  s_tready,
  input  logic [WINDOW*80-1:0]  s_tdata,
  output logic                  m_tvalid,
  input  logic                  m_tready,
  output logic [63:0]           m_tdata
);

  logic busy;
  int   cnt;
  logic [1:0] cls_q;

  function automatic logic [1:0] classify(logic [10:0] id);
    if (id == 11'h000) return 2'd1;
    if (id == SPOOF_ID) return 2'd3;
    for (int i = 0; i < 4; i++) if (id[10:4] == BENIGN_IDS[i*11+4 +: 7]) return 2'd0;
    return 2'd2;
  endfunction

  assign s_tready = !busy && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= 0;
      cls_q    <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
    end else begin
      if (s_tvalid && s_tready) begin
        busy  <= 1'b1;
        cnt   <= LAT;
        cls_q <= classify(s_tdata[74:64]);
      end else if (busy && !m_tvalid) begin
        if (cnt > 1) cnt <= cnt - 1;
        else begin
          m_tvalid <= 1'b1;
          for (int i = 0; i < 4; i++)
            m_tdata[i*16 +: 16] <= (2'(i) == cls_q) ? 16'sd64 : -16'sd32;
        end
      end else if (m_tvalid && m_tready) begin
        m_tvalid <= 1'b0;
        busy     <= 1'b0;
      end
    end
  end
endmodule
