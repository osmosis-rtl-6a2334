// match_engine -- steers inbound packets to flow management queues.
//
// Every FMQ has one matching rule (one ECTX per FMQ, one FMQ per virtual
// function). A UDP packet matches a rule on the three-tuple (protocol,
// destination IP, destination port); a TCP packet matches on the five-tuple
// (adding source IP and source port). All rules are compared in parallel and
// the lowest-numbered matching FMQ wins. A packet that matches no rule is
// reported with out_hit = 0 so that the normal NIC path can deliver it to the
// host.
//
// Interface: valid/ready on both sides, one registered stage, so a header
// accepted in cycle t is presented in cycle t+1. Throughput one header per
// cycle while out_ready is high.
//
// The tuple sets follow the paper; tie-breaking by lowest index, the one-cycle
// latency and taking already parsed header fields are choices of this design.
module match_engine
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ = N_FMQ_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pkt_hdr_t    in_hdr,
  input  match_rule_t rules [N_FMQ],
  output logic        out_valid,
  input  logic        out_ready,
  output logic        out_hit,
  output logic [FMQ_W-1:0] out_fmq,
  output desc_t       out_desc
);

  logic [N_FMQ-1:0] hit;
  logic             any_hit;
  logic [FMQ_W-1:0] hit_idx;

  always_comb begin
    for (int i = 0; i < N_FMQ; i++) begin
      logic three, five;
      three = rules[i].valid
           && (in_hdr.dst_ip   == rules[i].dst_ip)
           && (in_hdr.dst_port == rules[i].dst_port);
      five  = (in_hdr.src_ip   == rules[i].src_ip)
           && (in_hdr.src_port == rules[i].src_port);
      if (rules[i].is_tcp)
        hit[i] = three && (in_hdr.proto == PROTO_TCP) && five;
      else
        hit[i] = three && (in_hdr.proto == PROTO_UDP);
    end
  end

  // lowest index wins
  always_comb begin
    any_hit = 1'b0;
    hit_idx = '0;
    for (int i = N_FMQ - 1; i >= 0; i--) begin
      if (hit[i]) begin
        any_hit = 1'b1;
        hit_idx = FMQ_W'(i);
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hit   <= 1'b0;
      out_fmq   <= '0;
      out_desc  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_hit  <= any_hit;
        out_fmq  <= hit_idx;
        out_desc <= in_hdr.desc;
      end
    end
  end

endmodule
