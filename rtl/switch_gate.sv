// switch_gate: moves packets from one input switch port onto the crossbar.
//
// When a header shows at the head of the port's header/footer FIFO the gate
// asks its own dor_router instance for an output port and virtual channel,
// then raises req with the number of payload words of the packet (taken from
// the header's byte size) so that the output can be granted only when its
// FIFOs have room for the whole packet (virtual cut-through). Once granted it
// sends, one word per cycle, the header (with the virtual-channel field set
// by the router when the packet leaves on an inter-tile port), the payload
// words as they become available in the payload FIFO, and the footer; done
// pulses with the footer and frees the output. This keeps the
// header-payload-footer order and never writes into a full FIFO.
//
// Timing: IDLE -> REQ on a header (1 cycle), grant one cycle after req,
// then 1 + payload + 1 cycles for the packet if the payload is ready.
// The state machine is this design's; the paper gives the gate's duties.
module switch_gate
  import exanet_pkg::*;
#(
  parameter int unsigned N_INTRA = 2,
  parameter int unsigned N_INTER = 2,
  localparam int unsigned N_OUT = N_INTRA + N_INTER,
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // input switch port, read side
  input  logic [127:0]  hf_dout,
  input  logic          hf_empty,
  output logic          hf_pop,
  input  logic [127:0]  data_dout,
  input  logic          data_empty,
  output logic          data_pop,
  // routing configuration
  input  coord_t        my_coord,
  input  coord_t        lattice,
  input  logic [5:0]    dim_order,
  input  logic [2:0]    dim_en,
  // arbitration
  output logic          req,
  output logic [OW-1:0] req_port,
  output logic [12:0]   req_words,
  input  logic          granted,
  // crossbar side
  output xword_t        out_word,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_PAY, S_FTR} state_t;
  state_t state;

  hdr_t          hdr;
  logic [OW-1:0] r_port;
  logic          r_vc, r_local;
  logic [12:0]   remaining;

  assign hdr = hdr_t'(hf_dout);

  dor_router #(.N_INTRA(N_INTRA), .N_INTER(N_INTER)) u_route (
    .dest(hdr.dest), .my_coord, .lattice, .dim_order, .dim_en,
    .out_port(r_port), .out_vc(r_vc), .is_local(r_local));

  logic [OW-1:0] q_port;
  logic          q_vc, q_local;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      q_port    <= '0;
      q_vc      <= 1'b0;
      q_local   <= 1'b1;
      remaining <= '0;
      req_words <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!hf_empty) begin
          q_port    <= r_port;
          q_vc      <= r_vc;
          q_local   <= r_local;
          req_words <= payload_words(hdr.size);
          state     <= S_REQ;
        end
        S_REQ: if (granted) begin
          remaining <= req_words;
          state     <= (req_words == 0) ? S_FTR : S_PAY;
        end
        S_PAY: if (!data_empty) begin
          remaining <= remaining - 1'b1;
          if (remaining == 13'd1) state <= S_FTR;
        end
        S_FTR: if (!hf_empty) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  hdr_t hdr_out;
  always_comb begin
    hdr_out = hdr;
    if (!q_local) hdr_out.vc = {4'b0000, q_vc};
    req      = (state == S_REQ);
    req_port = q_port;
    hf_pop   = 1'b0;
    data_pop = 1'b0;
    done     = 1'b0;
    out_word = '0;
    unique case (state)
      S_REQ: if (granted) begin
        hf_pop   = 1'b1;
        out_word = '{valid: 1'b1, hf: 1'b1, data: hdr_out};
      end
      S_PAY: if (!data_empty) begin
        data_pop = 1'b1;
        out_word = '{valid: 1'b1, hf: 1'b0, data: data_dout};
      end
      S_FTR: if (!hf_empty) begin
        hf_pop   = 1'b1;
        done     = 1'b1;
        out_word = '{valid: 1'b1, hf: 1'b1, data: hf_dout};
      end
      default: ;
    endcase
  end
endmodule
