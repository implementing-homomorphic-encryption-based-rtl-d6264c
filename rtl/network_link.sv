// network_link: fixed-latency model of the communication network that carries
// ciphertext vectors between the plant interface and the controller.
//
// The paper treats the network as abstract; this link is the simplest
// stand-in that behaves like one for the datapath: a message (valid plus a
// DW-bit payload) entered in one cycle leaves exactly LATENCY cycles later,
// and several messages may be in flight at once.  Only ciphertexts cross it,
// so what an eavesdropper on the link sees is encrypted.  The latency value
// and the lack of back-pressure or loss are this design's own choices.
//
// Interface: in_valid/in_data -> out_valid/out_data, LATENCY >= 1 cycles.
// in_flight counts the messages inside the link.
module network_link #(
  parameter int unsigned DW      = 32,
  parameter int unsigned LATENCY = 4,
  localparam int unsigned CW     = $clog2(LATENCY + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  output logic [DW-1:0] out_data,
  output logic [CW-1:0] in_flight
);

  logic [LATENCY-1:0]         v_q;
  logic [LATENCY-1:0][DW-1:0] d_q;
  logic [CW-1:0]              cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      d_q   <= '0;
      cnt_q <= '0;
    end else begin
      v_q[0] <= in_valid;
      d_q[0] <= in_valid ? in_data : d_q[0];
      for (int i = 1; i < LATENCY; i++) begin
        v_q[i] <= v_q[i-1];
        d_q[i] <= v_q[i-1] ? d_q[i-1] : d_q[i];
      end
      cnt_q <= cnt_q + CW'(in_valid) - CW'(v_q[LATENCY-1]);
    end
  end

  assign out_valid = v_q[LATENCY-1];
  assign out_data  = d_q[LATENCY-1];
  assign in_flight = cnt_q;

endmodule
