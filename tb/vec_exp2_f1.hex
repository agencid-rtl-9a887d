a
2
7
5edda68ee4c86139f078a9dfce5b6276374285aecf0c8372dae7155742743e53654822b8c1d77f6c35b2e03065f40f187de8a91230794c859aedd3af95c1550d
5929e101c3cfe2dd8661046263d1179f1d7d7a09bcf6303aedac539c1087827ac2cfd4a0951e50f4b79ac524f9459d338ccc6ca8d418b468d3c2233f2ed8d877
b72e7965919628861334e222b0cb223b2c47b84aaf8a38de5df19ae984a2d251b8599c16c7e907ec4ae85f67fa2c0beee392a86d47b4ab135f225d09ae97065
b3a66f74437689d3d2bcd2d738565459a086576cfb28ea9fa22f75c6d06fea0786dc2b9bf2610216d9a587c6852d982b06db9ee0bc7e7f164ae74fe1ec6b8bba
468bd104b423005393e521e914d1815627bd8de4a0b64938fa0376bb5019a5039ea1791dc095e9214c458506e5e7c17c614ad58d049c0eb0fe768745292102fc
ff015c437e4fe57388a96644822e1f7945ac7f7067f76e81759709478862ec8f34091ae4e15e974c6b0e97ce222cdd0cd9a0954b9eb6e621779e3a3d4aa1f56
bf3d8196dfcb3a75670a06fef0fe57d9930e747a46c3b020ce3959efeb8ce296466e59fae435fcb4bb1986598ad1d228e7560f7a19da5df83ac9b8fe4d037685
655b42d9dddbd2e1e3cd7483f6f5d41c5522db7bb74d1bb9cab17c105ad9cd0707da35886a243e1059534a6031d844abe34ba4aa934065f386e642aadb1f7b9f
c28d28ea88f7a111265e5d9b82abb52ee7a85386b7e99cb7479888988371fa39e549ba873e4351740a1c9418428a088ef340aaba30d7b104ec46894c86a17f11
a45cb1c8188586dd0ffacf5f4985217e00123ff62c09c8f031e43db97f6688731e81df8ce626785c212fbb6adc659cc24612a0d983b0a3f29d30648d61796c94
3
2
ae678ce8afead99d747c77c1aaf10b376ccc1fadf3639610dc624c39c22e2173454fc0aa6ab081b1c7d9597b235b618757131bba0dda0031dc3d9fe861d51efc
a09b57cd13b5942a0701356b1d243d45872ff1b0a5b14da633ae84144e5cf9b732ca2e24cc2e932b5c914cb9623f2a295734bfb96302a9fb24556a3673dd834d
a
a51497c24d717aa25e7b546d14798eb63fdda47f7303610e737c0e8c90a99a4fa74447c091f0a3ccab9b7c1116948b7b4645d8cdce9923736f7a126e3f584302
9729a9325e1b0d7076399fe653c80a0072fb4ff86666120a30020dcae503eca9e176bce0b7a6e371f18fc508b6ac07f85969d5ef73e68fbe594adb9d25c914ba
c
a74855ef1370b1ce2e4c93d9e6730b851e2098cbea88509ae0399b4220f1c86362bd26128a981838058c13036f94468d0091736ba12feafd11ab8156bfd067ea
3c1becd26ddf4ac23d703bfdd6661249a47265639a8fb2d83572ea9c858e4bf520b174a3c9cf410c4530673c7344dfb31edbd6bc3050ccb4d1d22df22654622c
