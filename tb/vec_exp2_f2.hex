a
6
38
3b3abfb40d00123f41713ddcc5602a0889c302ecddbce44504cda86b223ad462ae32e2766ebe0cceafbec436f26ab6ba8553bd320f97b658f8cd34c92623ff4e
55dce840715f56f23c68edcbc739c4b9b0f6c7e2cab5b1c2f0020850ae92f7937ab5feac44b1a11cf4d0209c2e8ab7f3d64b9c639eaa83f4924560f982f31503
7a1552c01ab50da00c5a12110d760070e8f435bc87cf966d0928363db6bc82021fdd878f5e5ce52b4e785ad5ff0f45d92a16497d7c57cdc9cccb9029af46200f
6178dc413011f0b7be47283c35a959ec53b6e7ac7df54599a56dc2cb5e27f5189ceab7e45ed58931f34958728a50cd30556b976910b56629f2a0cedcb6fb936
6a63247edafcce3d1200e4255c151d915a17c1b017ba5e21d34f8fd4ef6795f3275bbdd8da2015bf6c86ffde55e94a9d9e1e6390b71693225e069d3337e23d93
b9dcd035ba0a81032a8d307c3eba1e1ae0b1e20415bfab1b042c7f4b66523069b10bd3f9d286885872f044cf8b3802cbc0ca87e17b87e4d6857ec308ffba2144
55436780dfa4633dce8aa34272962fa3a20ac8c5b29101d4d693af654a03434e1420eb25a86ee08585c1d4ff6496df84810d1338b1c15c15fd979b88f0580693
537bc50dca7ec8d2424a2f84cc9b0cb42f5c45c89a7883a0be8db4160ea4f76a58ecc9ce178c41884e54b5435b353619ebbd3d18304b20a9eba54c0a2aac5ea9
86fa9ad8a579fa0e6e6f03a9eb7005e3ff532e5db9a4d76689fad763168d4eb81be160a827f0c0202e2ea56ff1f03f36f6ca9b18a50b60df14a827da91389891
24aa93a7fcdbae8b29b4f49a7cdadba662c22d401fd3ac4fbb48e971123b4ea23f53d43d37141c3bd196b61c1a8fbd58319ff6b658d74a5904d57035c980fdef
3
6
c2990cefb37759672811f1b387dcaff0596261aab5f1d2c47e9576bcae4aea093eef74af2e49b75ed91b4a7f604023beb4c8d5a30ea62b20f9a82ae82312845b
2bb01689d25c5acbc6f721dac9d964e9bdf0e52dde8048b1574a998c17154eafd3774db8c4675be595135c9131a855dff067580f84d797a0b7f4e32ef2d1b170
c
a74855ef1370b1ce2e4c93d9e6730b851e2098cbea88509ae0399b4220f1c86362bd26128a981838058c13036f94468d0091736ba12feafd11ab8156bfd067ea
3c1becd26ddf4ac23d703bfdd6661249a47265639a8fb2d83572ea9c858e4bf520b174a3c9cf410c4530673c7344dfb31edbd6bc3050ccb4d1d22df22654622c
d
7761e94f9818492a3a3e145582f368743df94f93234836ed657d26aa862000c00842afa926d80dd842f2353e4e697728fdfd07dea841873a9e52e8ed0163121b
95d36fcbb62ec5885540e452a32c33dd1000cefa8d9530fc06c8e995d0151927bf661cba57e45d9c27db55e4427159331d3e74ea0ed6c1158ee5040bec8b40cf
