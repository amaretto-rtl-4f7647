// amaretto_axis_skid: two-entry register slice for a valid/ready stream.
//
// The output word is registered and s_ready comes straight from a flop
// (it is high while the skid register is empty), so nothing passes
// combinationally between the two sides while one word per cycle still
// moves.  If the output stalls while a word is being accepted, that word
// is parked in the skid register and s_ready drops until it drains.
// Used on both directions of the AXI4-Stream interface.
module amaretto_axis_skid #(
  parameter int unsigned W = 33
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  input  logic [W-1:0] s_data,
  output logic         s_ready,
  output logic         m_valid,
  output logic [W-1:0] m_data,
  input  logic         m_ready
);

  logic         skid_v;
  logic [W-1:0] skid_d;

  assign s_ready = !skid_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      skid_v  <= 1'b0;
      skid_d  <= '0;
    end else if (!skid_v) begin
      if (m_valid && !m_ready) begin
        if (s_valid) begin
          skid_v <= 1'b1;
          skid_d <= s_data;
        end
      end else begin
        m_valid <= s_valid;
        if (s_valid) m_data <= s_data;
      end
    end else if (m_ready) begin
      m_valid <= 1'b1;
      m_data  <= skid_d;
      skid_v  <= 1'b0;
    end
  end

  // A stalled output word must stay put.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data))
    else $error("stream word changed while stalled");

endmodule
