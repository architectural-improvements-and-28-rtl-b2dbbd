// lofamo: local fault monitor (LO|FA|MO) of one node.
// A mutual watchdog between the host and the network card. Software on the
// host writes the Host Watchdog Register at least once per watchdog period;
// the card counts periods and publishes a heartbeat in the APEnet Watchdog
// Register, which the host reads to see that the card is alive. If a whole
// period passes without a host write, the host is declared faulty. At every
// period the monitor sends a diagnostic message on each of the N_LINKS links
// to the neighbouring nodes, carrying its host status and heartbeat. From the
// messages it receives it records, per link, whether the neighbour's host is
// faulty and whether the neighbour's card has gone silent (no message during
// two consecutive periods). Neighbours can thus report a dead host, or a dead
// card, to a master node, so no fault goes unnoticed.
//
// Interface: wd_period in clock cycles (software programmable); host_wd_wr a
// one-cycle pulse per host write; diag_tx_* per link, a 32-bit message held
// until accepted; diag_rx_* per link, one-cycle pulses.
// Register layouts: apenet_wd = {heartbeat[15:0], 15'b0, host_fault};
// neigh_status = {18'b0, nb_dead[5:0] at bits 13:8, 2'b0, nb_host_fault[5:0]}
// (for N_LINKS = 6); message = {15'b0, host_fault, heartbeat[15:0]}.
// That the host updates a watchdog register, the card detects the missed
// update and informs the neighbours through diagnostic messages follows the
// published design; the message and register layouts and the one-period /
// two-period fault rules are this implementation's choices.
module lofamo #(
  parameter int N_LINKS = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        wd_period,
  input  logic               host_wd_wr,
  output logic [N_LINKS-1:0] diag_tx_valid,
  input  logic [N_LINKS-1:0] diag_tx_ready,
  output logic [31:0]        diag_tx_data,
  input  logic [N_LINKS-1:0] diag_rx_valid,
  input  logic [31:0]        diag_rx_data [N_LINKS],
  output logic               host_fault,
  output logic [N_LINKS-1:0] nb_host_fault,
  output logic [N_LINKS-1:0] nb_dead,
  output logic [31:0]        apenet_wd,
  output logic [31:0]        neigh_status,
  output logic               tick
);
  logic [31:0]        cnt;
  logic [15:0]        heartbeat;
  logic               host_seen;
  logic [N_LINKS-1:0] nb_seen, nb_seen_prev;

  assign tick = (cnt >= wd_period - 1);
  assign diag_tx_data = {15'd0, host_fault, heartbeat};
  assign apenet_wd = {heartbeat, 15'd0, host_fault};
  always_comb begin
    neigh_status = '0;
    for (int i = 0; i < N_LINKS && i < 8; i++) begin
      neigh_status[i]     = nb_host_fault[i];
      neigh_status[8 + i] = nb_dead[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      heartbeat <= '0;
      host_seen <= 1'b0;
      host_fault <= 1'b0;
      nb_seen <= '0;
      nb_seen_prev <= '1;
      nb_dead <= '0;
      nb_host_fault <= '0;
      diag_tx_valid <= '0;
    end else begin
      diag_tx_valid <= diag_tx_valid & ~diag_tx_ready;
      for (int i = 0; i < N_LINKS; i++)
        if (diag_rx_valid[i]) nb_host_fault[i] <= diag_rx_data[i][16];
      if (tick) begin
        cnt <= '0;
        heartbeat <= heartbeat + 1'b1;
        host_fault <= !(host_seen || host_wd_wr);
        host_seen <= 1'b0;
        diag_tx_valid <= '1;
        nb_dead <= ~(nb_seen | nb_seen_prev | diag_rx_valid);
        nb_seen_prev <= nb_seen | diag_rx_valid;
        nb_seen <= '0;
      end else begin
        cnt <= cnt + 1'b1;
        if (host_wd_wr) host_seen <= 1'b1;
        nb_seen <= nb_seen | diag_rx_valid;
      end
    end
  end
endmodule
