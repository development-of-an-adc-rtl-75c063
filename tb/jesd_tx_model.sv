// jesd_tx_model: behavioural JESD204B transmitter of the ADC (link layer
// only, after 8b/10b decoding), used by the testbenches.
// While sync_n is low it sends /K/ (K28.5). After sync_n rises it sends the
// initial lane alignment sequence: 4 multiframes of K_MF frames of 2 octets,
// each starting with /R/ (K28.0) and ending with /A/ (K28.3), the second
// carrying /Q/ (K28.4) as its second octet. Then it sends data frames: the
// 14-bit sample MSB-aligned in 2 octets. When the last octet of a frame
// equals the last octet of the previous frame it is replaced by /A/ at the
// end of a multiframe and by /F/ (K28.7) elsewhere. sample_req pulses when
// 'samples' is taken (on the first octet of a frame). n_repl counts the
// replacements sent. A drop of sync_n during data restarts with /K/.
module jesd_tx_model #(
  parameter int unsigned NUM_LANES = 16,
  parameter int unsigned K_MF      = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         sync_n,
  input  logic [NUM_LANES-1:0][13:0]   samples,
  output logic                         sample_req,
  output logic                         out_valid,
  output logic [NUM_LANES-1:0][7:0]    out_octet,
  output logic [NUM_LANES-1:0]         out_is_k,
  output int                           n_repl
);
  typedef enum logic [1:0] {T_CGS, T_ILAS, T_DATA} tx_state_e;
  tx_state_e st;
  int unsigned oc;                        // octet counter within ILAS / multiframe
  logic [NUM_LANES-1:0][13:0] cur;
  logic [NUM_LANES-1:0][7:0]  prev_last;

  assign sample_req = en && st == T_DATA && oc[0] == 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= T_CGS;
      oc        <= 0;
      out_valid <= 1'b0;
      out_octet <= '0;
      out_is_k  <= '0;
      prev_last <= '0;
      cur       <= '0;
      n_repl    <= 0;
    end else begin
      out_valid <= en;
      if (en) begin
        unique case (st)
          T_CGS: begin
            for (int l = 0; l < NUM_LANES; l++) begin out_octet[l] <= 8'hBC; out_is_k[l] <= 1'b1; end
            if (sync_n) begin st <= T_ILAS; oc <= 0; end
          end
          T_ILAS: begin
            for (int l = 0; l < NUM_LANES; l++) begin
              if (oc % (2 * K_MF) == 0)                     begin out_octet[l] <= 8'h1C; out_is_k[l] <= 1'b1; end
              else if (oc % (2 * K_MF) == 2 * K_MF - 1)     begin out_octet[l] <= 8'h7C; out_is_k[l] <= 1'b1; end
              else if (oc == 2 * K_MF + 1)                  begin out_octet[l] <= 8'h9C; out_is_k[l] <= 1'b1; end
              else                                          begin out_octet[l] <= 8'(oc); out_is_k[l] <= 1'b0; end
            end
            if (oc == 8 * K_MF - 1) begin st <= T_DATA; oc <= 0; prev_last <= '0; end
            else oc <= oc + 1;
          end
          T_DATA: begin
            if (!sync_n) begin
              st <= T_CGS;
              for (int l = 0; l < NUM_LANES; l++) begin out_octet[l] <= 8'hBC; out_is_k[l] <= 1'b1; end
            end else begin
              for (int l = 0; l < NUM_LANES; l++) begin
                if (oc[0] == 1'b0) begin
                  out_octet[l] <= samples[l][13:6];
                  out_is_k[l]  <= 1'b0;
                end else begin
                  logic [7:0] o;
                  o = {cur[l][5:0], 2'b00};
                  prev_last[l] <= o;
                  if (o == prev_last[l]) begin
                    out_octet[l] <= (oc == 2 * K_MF - 1) ? 8'h7C : 8'hFC;
                    out_is_k[l]  <= 1'b1;
                    if (l == 0) n_repl <= n_repl + 1;
                  end else begin
                    out_octet[l] <= o;
                    out_is_k[l]  <= 1'b0;
                  end
                end
              end
              if (oc[0] == 1'b0) cur <= samples;
              oc <= (oc == 2 * K_MF - 1) ? 0 : oc + 1;
            end
          end
          default: st <= T_CGS;
        endcase
      end
    end
  end
endmodule
