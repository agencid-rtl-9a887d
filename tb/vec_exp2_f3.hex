a
7
3c0
775f71936623c75de90c06474537a6f76057f4081d298aadc335121ac7ff4554f0b429d0b2e68dac76263df1ef3f14e83e11356f8a50cff3a0f29cb5b077b066
a9f166c9f162fecf3129d510a1ac0c9d1ba2f9a6d6dc2c6a14c00b24abf3cb5acdbb659888add1d59d0399289c0584bf149e0c553e742d687046b1e4ece87cc9
a38e0261aca840296fb9c54f98ff0fd71540717b67bd8ef1f0c6af1ec9a630f2ab17d77819a1ab85ac479bcb83192aa24de291377ba727ac3ea6ed9a0532d5c4
724c61a9aac2894c831b5bed541d06068098c37714f1dacbdd6a83bb22b2f67d74570e48303ec3aa9d01c9b4d5d5005775a86f666b6178066a050ea62be1c6c4
8671eddc9fda084d87f14b4b3733085c1dcb6d1409fe4e7a2b8bccd7814dab0cb560e5290f6a069092eab2a99709192a705273ee32472b57bdc5d145b587156a
89e9e53f9957334685112b9032bc6ac3fc1e03f5150482ef8ac126590115b8fc846c94ecbaf2f37f2bf3cda32a93b7e0867367b195ddd042c087d633c6804dbd
ab572f06091b15fcd79b4c53e5cdf7e6ddeb99e9edec76dc9e7012f74bb9f8a786af85299a1370d1d753189b1bd157a10f68494a425792d9d8563c232b240c4d
3d64a47c96e589fb6ff33ccf9b33da0ce117063d4d3051e19c8811f819ac760df956461d2bb5295356628733476825a5c6d0aff477ac381442d019a77f344bd2
adb3249924a153a0d122ec73e03104a051fa19d6072b4e3a928c7fbe4a44ab6cdf450519637b10a8430dd7da52f5de55e33992c4c4efddc49602a307ea1d4d6c
aa932867d8f4cbab50776a805e2dc053351c39f74c3a84fb032bd82615c099cb87df25817b8f36b769a8d6af68789531ef6c158ee524b6e7f357357eca446fa6
4
7
3f96a154e191f9280f21af07636c3a7d2d142464cfbe0e558a73e4f44ed17253caec4b63c242061432f135e690aee3c808f3db885ea90aa673d5952b8a1f3b56
4685f3db83b2688ddd15556f990af0cc35ecd29611cb1cd4047d83bd9489a57748de4472e4d16d9c1b79186f82d15c2690e563bb37c644c8282988684db0ae68
8
210a6bc16fba52392b09f51d062441205db7124f05bcc71c9c3314a6276f0b4cdbf9b1821e7dfd01ab97792defad62750540b3c8954218f0be1516579a4cb48f
809b9ad73220c06b99d3a573edad44bcd46b616a9100658ae35e6f6d02af5391f3e4eee0010999a1f89bb52eaa2330e0735292f37a474169b82505db8e8ebace
9
191ead82970d9d6deefb01ce81d9b648fc4f5de31d826740478d7cac017edae6422622982f4f5db71f980c8d1297e77c9e89a5519e2a17e6848b5942a723ac74
392b030aa900325ee4fcd27eb710dd0626ed6cd6f87aaa7642d44153182c7d684a63463a66efbd1883a3961f701b3cd15f19ec40a10d20809245584ccf1f0820
a
a51497c24d717aa25e7b546d14798eb63fdda47f7303610e737c0e8c90a99a4fa74447c091f0a3ccab9b7c1116948b7b4645d8cdce9923736f7a126e3f584302
9729a9325e1b0d7076399fe653c80a0072fb4ff86666120a30020dcae503eca9e176bce0b7a6e371f18fc508b6ac07f85969d5ef73e68fbe594adb9d25c914ba
