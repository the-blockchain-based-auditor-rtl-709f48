// tb_vec_pkg: reference values for the testbenches.
//
// Four RSA-1024 key pairs (public exponent 65537), one per key-owning IP
// (RNG, Hash, AES, RSA), made from random 512-bit primes; SHA3-512 digests of
// 64-byte messages computed with an independent SHA3 implementation (byte i
// of a message or digest is bits [8i+7:8i]); and the fixed RNG number R of the
// end-to-end test, the randoms S the PE gives the hash core and the master
// key M = SHA3-512(R xor S).
package tb_vec_pkg;
  localparam int unsigned NK = 4;
  localparam logic [1023:0] KEY_N [NK] = '{
    1024'hafa929d18c2806414661f52a1cbfa1cf2ea6bbb231f41cd5f0ca18396e5a733457d8136b3fdd48bcc1c13409d281187294b27024763bca404e080f74b52e2879aeacf1c6b26de6d82adcec1d41f2724375e7d13121dad0bef160862d71e9c918b236c4c24f43a75da2415b13e5e612c27d45f7b5b380f94380594e16deaa4737,
    1024'hc05b0fe03320ad31882f502228af9825d01191a5659d4263018a7d570e2ae6d0c740dd77dd0eabbe6f83390d59b55b61a00bdde789e970e365543bf94bd8a34eedbea2e84e7772a84bc4ebea1a12c634f359f43bd3094f41e9fc62490f2071833c438b51e9b5cfecb694a3ac3c288ba451be727c211251993a8ef0d227c8c5fd,
    1024'hcefdd3335e9b41d6c4aae3f29c652f2c22a2c702ceed834a4290706fc10d3126721850fb49f02cd6b373bb053dd370191d06ef3b836abb3508a1abd4f8a38a0e22c9971bb144d1a8822dec1213d45a1a118c32d4879ce41a8a606d01135e958811b8d517db1c48080e56131276160b871ac23cc5a76711415ace82dc2fb278cf,
    1024'had56c86a6a0be0b076903a3da3c61fc8b77a47e5d9b3c9892f5ddf9c62550d72375505e55328e70c5165ba6943c90c729bd742992d8670b102c2820681c420ddf84782bf6ffe89ec1b092bec60028bc42763028c839af7589711e483b20c038ea2d4839d2ecb2661182a4e6ea9d844e0a5d38eccec6d301187d5f2a4d6c39049};
  localparam logic [1023:0] KEY_D [NK] = '{
    1024'ha600e9a23c1fbef984f821e67050b12bc85c8d58b3588cbfa9d472dc236b9b1fc63c4eedb5e6fb4c5696ad04f34848c04fc1e9b4ab7f897d07c11a4a22c6c23bda3a08bf146e603d611b876aaca7b6eb7ef626f0927c733ce0a1b21214e1d9e139775a813d137849342475d93457e29f884e1f180f46c87b152d42d9ca299691,
    1024'hade8a6add90bce0a5e4a087519bbc81f47c2da9f63038f25dc1acdbf8b7b963b642a6d1115b751e7570298ee4d10fe918115b986c0d561cef5a9f69f29c7afbcf73c762719a125a53785eead9404c1bb5de24f1f900f4a1c02bda3cd5e9a6d71e7daf1f236c4fbb72bbb13b50a89257c1b7ab4b6a5fe5dc9cab2cbb825af9b31,
    1024'h51d57c085520e098be4c29aea33245c217376fa2a698b44d499fbd341188dba3ad7bfb983d951cc50d5175e10e9e6735268ab54e3c189846d150c9947b707c857f259f8ef3819d322152aca099fff235c6c955c1ad0362f3526667c13b8375af7cb70cfb004c6f6b200f510a04fc03318d978ff8c86167e2be7ac10000d42c81,
    1024'h588fda5de448a548038bb4f601531cb2246c2987da2eed6d55f2146986240676b0a6941892e0770be81a9d9f62aeb9d9649e1abcc071cbe9e48b147bd6992a60e6f214f6e7ab2e74d7ff847321d31e4e648e41942f9f6c678c6c34f53b6af9447ef23f3b7134817cd1e9c3b9611c02263ce627dffb23c0f6508507af7a1184c1};
  localparam logic [1023:0] KEY_E = 1024'd65537;
  localparam int unsigned NV = 5;
  localparam logic [511:0] SHA_MSG [NV] = '{
    512'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000,
    512'h000000000000000000000000000000002998d3ceddf55e75766c6f7960d5bdf9f6cb15aceb3853b9fab672c47950486a4d01e58b5fcfdcafc52268f99a4ac911,
    512'h2887add13f20429963aa3c4ac76b9f9a6d9c5cc6fee26b4ba6f2214317b8f4c22652feb153f1733ef4a4175f9bef763126cb22aeae7f7d4c54b7e277a0a4b548,
    512'hb3dd594a5c1913ed5396a0c4fbf8d73d56bf0a1f654bf3500e839ee0bf3e226a6dbbb7a3d9334dc9a7c8c828c05e09084dfdf3bb2311c2389678888a14ce4fbb,
    512'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff};
  localparam logic [511:0] SHA_DIG [NV] = '{
    512'h283c557e21b95e0922853a5c97a19dc6a7445bff6b9bd1f0908dd9fcbd10e1124c576150c846367e11fcd47a2f4762b3f7e60ea66dcbf4c94c8a32a1f5923d24,
    512'h84330221c110559f30f6802a3672a515a814646cf1898ffc3a34315e907a1b080648ccfcf9a7faca8b14e0a85fd7a0c31aceea4d2a075c4346296a73b8a4a45c,
    512'h71595428093a9f944a0e5aee454d32406b86438a0a50fcf6caf5d5414d954fe374009384a5856eb676d9978e412a6f6475c9c76406f0e274cdc824d3530fdde5,
    512'hb2f26557ce0da39d7220771cdadd1556697756b1a91ee31d8d152f6a4115a3460e77390b7d959d10bee04d45f85498ef0022a80a07414c1425a6c8683cf62276,
    512'h1c2a289ec9a0deb9dda7d2bf95d926d09be45b35e62a37e33db1125d84d7259cd66b6dab05923c875dbe86f4a2bfed3b798d41f7618fbd930b2f67cda384ea23};
  localparam logic [383:0] RNG_R = 384'h2998d3ceddf55e75766c6f7960d5bdf9f6cb15aceb3853b9fab672c47950486a4d01e58b5fcfdcafc52268f99a4ac911;
  localparam logic [511:0] HASH_RAND_S = 512'hd9be890a03a84f17621b51e67bf83de9d2a31f47ce4af7bbec01aa4e949fd043756b0a430d43b837a4015ddb2c2f0fa77d4f5cb4339dc61974d07ad8e664a0c3;
  localparam logic [511:0] MASTER_M = 512'h2887add13f20429963aa3c4ac76b9f9a6d9c5cc6fee26b4ba6f2214317b8f4c22652feb153f1733ef4a4175f9bef763126cb22aeae7f7d4c54b7e277a0a4b548;
  localparam logic [1023:0] SIG_R_RNG = 1024'h81301da6335f3b8c6ebdcd277120591fe6e708ec1a06bea0d8e096f47429f6275a283e46a17a03e747fd341c47d4ad4a14e4663135ff2441e8b56586191f9a53ad9212203cf5acd43f0a58d1f7a675f5d7c1a103fd579237189df62cf913f6a0bb36635a154ac1497fb8cd0917ffa7da248665fc609897b0cf2cbed531379c98;
endpackage
