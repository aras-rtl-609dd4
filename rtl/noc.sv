// noc: on-chip interconnect between the chip controller, the PEs and the
// accumulation unit.
//
// Downstream, command/data flits from the controller are delivered to the PE
// named in the flit (flit.pe). Upstream, result flits from all PEs are
// collected with a round-robin arbiter and delivered to the accumulation unit.
// Each direction has one register stage with valid/ready handshakes; a flit
// whose PE is not ready holds the downstream stage (in-order delivery).
// The accelerator's floorplan shows a mesh of routers; this module keeps only
// the delivery function (a routed crossbar) and not the mesh topology or its
// hop latency. `idle` is high when no flit is in flight in either direction.
module noc
  import aras_pkg::pe_flit_t, aras_pkg::res_flit_t;
#(
  parameter int N_PE = 96
) (
  input  logic       clk,
  input  logic       rst_n,
  // downstream: controller -> PEs
  input  logic       in_valid,
  output logic       in_ready,
  input  pe_flit_t   in_flit,
  output logic [N_PE-1:0] pe_valid,
  input  logic [N_PE-1:0] pe_ready,
  output pe_flit_t   pe_flit,
  // upstream: PEs -> ACC
  input  logic [N_PE-1:0] res_valid,
  output logic [N_PE-1:0] res_ready,
  input  res_flit_t  res_flit [N_PE],
  output logic       acc_valid,
  input  logic       acc_ready,
  output res_flit_t  acc_flit,
  output logic       idle
);
  localparam int PW = (N_PE > 1) ? $clog2(N_PE) : 1;

  // ---------------- downstream ----------------
  logic dn_full;
  logic dn_take;
  assign dn_take  = dn_full && pe_ready[PW'(pe_flit.pe)];
  assign in_ready = !dn_full || dn_take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dn_full <= 1'b0; pe_flit <= '0;
    end else if (in_valid && in_ready) begin
      dn_full <= 1'b1; pe_flit <= in_flit;
    end else if (dn_take) begin
      dn_full <= 1'b0;
    end
  end

  always_comb begin
    pe_valid = '0;
    if (dn_full) pe_valid[PW'(pe_flit.pe)] = 1'b1;
  end

  // ---------------- upstream ----------------
  logic up_full, up_take;
  logic [PW-1:0] rr;          // highest-priority requester
  logic [PW-1:0] grant;
  logic grant_v;

  always_comb begin
    grant = '0; grant_v = 1'b0;
    for (int k = 0; k < N_PE; k++) begin
      int idx;
      idx = (int'(rr) + k) % N_PE;
      if (!grant_v && res_valid[idx]) begin
        grant = PW'(idx); grant_v = 1'b1;
      end
    end
  end

  assign up_take = !up_full || acc_ready;
  always_comb begin
    res_ready = '0;
    if (grant_v && up_take) res_ready[grant] = 1'b1;
  end
  assign acc_valid = up_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_full <= 1'b0; acc_flit <= '0; rr <= '0;
    end else begin
      if (grant_v && up_take) begin
        up_full  <= 1'b1;
        acc_flit <= res_flit[grant];
        rr       <= (int'(grant) == N_PE - 1) ? '0 : grant + 1'b1;
      end else if (acc_ready) begin
        up_full <= 1'b0;
      end
    end
  end

  assign idle = !dn_full && !up_full && !(|res_valid);

  // a held flit must stay stable until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   dn_full && !dn_take |=> dn_full && $stable(pe_flit));
endmodule
